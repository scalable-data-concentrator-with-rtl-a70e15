// Self-checking testbench for aux_record: random per-word strobes and data;
// the record must hold, word by word, the last value written under a strobe.
module tb_aux_record;
  localparam int LAYERS = 3;
  localparam int NIN = 1 << LAYERS;
  localparam int W = 12;
  logic clk = 0;
  logic [NIN-1:0] stb;
  logic [NIN-1:0][W-1:0] din, rec, model;
  int checks = 0, failures = 0;

  aux_record #(.LAYERS(LAYERS), .data_t(logic [W-1:0])) dut (.clk, .asm_stb(stb), .din, .rec);

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    stb = '1; din = '0; model = '0;
    @(negedge clk);
    for (int i = 0; i < 500; i++) begin
      stb = NIN'($urandom);
      for (int p = 0; p < NIN; p++) begin
        din[p] = W'($urandom);
        if (stb[p]) model[p] = din[p];
      end
      @(negedge clk);
      for (int p = 0; p < NIN; p++) begin
        checks++;
        if (rec[p] !== model[p]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
