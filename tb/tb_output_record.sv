// Self-checking testbench for output_record: random write strobes, copy
// commands and data; a word takes the network word under its strobe, else the
// auxiliary word on a copy, else keeps its value.
module tb_output_record;
  localparam int LAYERS = 3;
  localparam int NIN = 1 << LAYERS;
  localparam int W = 12;
  logic clk = 0;
  logic [NIN-1:0] stb;
  logic copy;
  logic [NIN-1:0][W-1:0] din, aux, rec, model;
  int checks = 0, failures = 0, n_copy = 0;

  output_record #(.LAYERS(LAYERS), .data_t(logic [W-1:0])) dut (.clk, .wr_stb(stb), .copy, .din, .aux, .rec);

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    stb = '1; copy = 0; din = '0; aux = '0; model = '0;
    @(negedge clk);
    for (int i = 0; i < 500; i++) begin
      stb = NIN'($urandom);
      copy = ($urandom % 4) == 0;
      n_copy += copy;
      for (int p = 0; p < NIN; p++) begin
        din[p] = W'($urandom);
        aux[p] = W'($urandom);
        if (stb[p])    model[p] = din[p];
        else if (copy) model[p] = aux[p];
      end
      @(negedge clk);
      for (int p = 0; p < NIN; p++) begin
        checks++;
        if (rec[p] !== model[p]) failures++;
      end
    end
    checks++;
    if (n_copy == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
