// bnro_network: N-layer baseline network with reversed outputs (BNRO).
//
// 2^LAYERS inputs are routed to 2^LAYERS outputs through LAYERS layers of
// 2^(LAYERS-1) bnro_switch instances. Between layer l and layer l+1 the wires
// follow the recursive baseline construction (see bnro_pkg::next_pos): output 0
// of a switch goes to the upper half-network, output 1 to the lower one. A
// final bit-reverse ordering stage renumbers the last layer's positions so that
// dout[m] is network output m in natural order.
//
// ctrl[l][r] is the cross bit of switch r of layer l (numbering as in
// bnro_pkg::switch_index). Routing input k to output m needs, in every layer l,
// cross = k[l] ^ m[l]; the controller computes this.
//
// Pipelining: bit l of PIPE puts registers in the switches of layer l. The
// controls of the later layers are registered at the same point, so that every
// layer sees the controls issued together with its data. All of ctrl is
// presented in the cycle the data is at din; dout appears $countones(PIPE)
// cycles later (0 = same cycle, fully combinational).
module bnro_network
  import bnro_pkg::*;
#(
  parameter int                LAYERS = 4,
  parameter type                data_t = logic [31:0],
  parameter logic [LAYERS-1:0] PIPE   = '1
) (
  input  logic                                     clk,
  input  logic [LAYERS-1:0][(1<<(LAYERS-1))-1:0]   ctrl,
  input  data_t [(1<<LAYERS)-1:0]       din,
  output data_t [(1<<LAYERS)-1:0]       dout
);

  localparam int NIN = 1 << LAYERS;
  localparam int NSW = NIN / 2;

  typedef logic [LAYERS-1:0][NSW-1:0] ctrl_t;
  typedef data_t [NIN-1:0] vec_t;

  ctrl_t cst  [LAYERS];   // controls as seen by layer l
  vec_t  lin  [LAYERS];   // switch inputs of layer l, by position
  vec_t  lout [LAYERS];   // switch outputs of layer l, by position

  assign cst[0] = ctrl;
  assign lin[0] = din;

  for (genvar l = 0; l < LAYERS; l++) begin : g_layer
    for (genvar r = 0; r < NSW; r++) begin : g_sw
      bnro_switch #(.data_t(data_t), .REG(PIPE[l])) u_sw (
        .clk  (clk),
        .swap (cst[l][l][r]),
        .in0  (lin[l][2*r]),
        .in1  (lin[l][2*r+1]),
        .out0 (lout[l][2*r]),
        .out1 (lout[l][2*r+1])
      );
    end

    if (l < LAYERS - 1) begin : g_link
      for (genvar p = 0; p < NIN; p++) begin : g_wire
        assign lin[l+1][next_pos(p, l, LAYERS)] = lout[l][p];
      end
      if (PIPE[l]) begin : g_creg
        ctrl_t c_q;
        always_ff @(posedge clk) c_q <= cst[l];
        assign cst[l+1] = c_q;
      end else begin : g_cpass
        assign cst[l+1] = cst[l];
      end
    end
  end

  // bit-reverse ordering of the outputs
  for (genvar m = 0; m < NIN; m++) begin : g_out
    assign dout[m] = lout[LAYERS-1][bitrev(m, LAYERS)];
  end

endmodule
