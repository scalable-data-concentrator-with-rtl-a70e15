// conc_harness: drives one bnro_concentrator of any size with consecutive
// integers (DAQ words handed out in input order) at a sequence of DAQ-word
// probabilities, reads every output word and checks that the integers come out
// in order with no holes. At the end the words still waiting in the partial
// output record are accounted for. Reports its own check and failure counts.
module conc_harness #(
  parameter int                LAYERS = 4,
  parameter logic [LAYERS-1:0] PIPE   = '1,
  parameter int                SEG    = 300   // cycles per probability
) (
  input  logic clk,
  input  logic rst,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int NIN = 1 << LAYERS;
  localparam int W = 32;
  localparam int NPCT = 7;
  localparam int PCTS [NPCT] = '{5, 10, 25, 50, 75, 90, 100};

  logic [NIN-1:0][W-1:0] din;
  logic [NIN-1:0] daq;
  logic [NIN*W-1:0] dout;
  logic dout_valid, overflow;
  int unsigned next_val, expect_val;

  bnro_concentrator #(.LAYERS(LAYERS), .data_t(logic [W-1:0]), .PIPE(PIPE)) dut (
    .clk, .rst, .din, .daq, .rd_en(1'b1), .dout, .dout_valid, .overflow);

  always @(posedge clk) begin
    if (!rst && dout_valid) begin
      for (int p = 0; p < NIN; p++) begin
        checks++;
        if (dout[p*W +: W] != expect_val) begin
          failures++;
          if (failures < 5) $display("%m: expected %0d got %0d", expect_val, dout[p*W +: W]);
        end
        expect_val++;
      end
    end
  end

  initial begin
    checks = 0; failures = 0; done = 0;
    next_val = 0; expect_val = 0;
    daq = '0; din = '0;
    @(negedge clk);
    while (rst) @(negedge clk);
    for (int s = 0; s < NPCT; s++) begin
      for (int i = 0; i < SEG; i++) begin
        for (int k = 0; k < NIN; k++) begin
          daq[k] = ($urandom % 100) < PCTS[s];
          if (daq[k]) din[k] = next_val++;
          else        din[k] = 32'hbad00000 | ($urandom & 32'hfffff);
        end
        @(negedge clk);
      end
    end
    daq = '0;
    repeat (LAYERS + 10) @(negedge clk);
    checks += 2;
    if (expect_val != next_val - next_val % NIN) begin
      failures++;
      $display("%m: delivered %0d of %0d words", expect_val, next_val - next_val % NIN);
    end
    if (overflow) failures++;
    $display("%m: LAYERS=%0d PIPE=%b: %0d words sent, %0d delivered in %0d records",
             LAYERS, PIPE, next_val, expect_val, expect_val / NIN);
    done = 1;
  end
endmodule
