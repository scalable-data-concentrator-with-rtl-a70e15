// bnro_switch: the two-input, two-output switch of the concentrating network.
//
// With swap = 0 ("bar" mode) in0 goes to out0 and in1 to out1; with swap = 1
// ("cross" mode) the two words are swapped. The 0/1 encoding of the control is
// the one drawn in the paper's switch figure.
//
// REG = 1 adds a pipeline register on both outputs, so the switch has one clock
// cycle of latency; REG = 0 makes it purely combinational and clk is unused.
// The paper offers pipeline registers "inside switches" per layer; putting them
// on the outputs is this design's choice. The data register has no reset: the
// words are qualified downstream by strobes that are reset.
module bnro_switch #(
  parameter type data_t = logic [31:0],
  parameter bit REG    = 1'b0
) (
  input  logic              clk,
  input  logic              swap,
  input  data_t in0,
  input  data_t in1,
  output data_t out0,
  output data_t out1
);

  data_t m0, m1;

  always_comb begin
    m0 = swap ? in1 : in0;
    m1 = swap ? in0 : in1;
  end

  if (REG) begin : g_reg
    always_ff @(posedge clk) begin
      out0 <= m0;
      out1 <= m1;
    end
  end else begin : g_comb
    assign out0 = m0;
    assign out1 = m1;
  end

endmodule
