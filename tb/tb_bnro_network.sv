// Self-checking testbench for bnro_network (4 layers, 16 x 16-bit words).
// Random switch settings are applied every cycle to three networks: no
// pipeline registers, registers in layers 0, 1 and 3 (latency 3), and all
// layers registered (latency 4). For every input k the expected output is found
// by tracing k through the recursive baseline definition (bnro_ref.svh); the
// word must appear there exactly $countones(PIPE) cycles later. A second phase
// uses concentration patterns (consecutive targets from a random start) to
// exercise the settings the controller produces. The switch numbering is
// also checked against labels of the published 16-input drawing.
module tb_bnro_network;
  localparam int LAYERS = 4;
  localparam int NIN = 1 << LAYERS;
  localparam int NSW = NIN / 2;
  localparam int W = 16;
  localparam int NCYC = 400;

  `include "bnro_ref.svh"

  typedef logic [LAYERS-1:0][NSW-1:0] ctrl_t;
  typedef logic [NIN-1:0][W-1:0] vec_t;

  logic clk = 0;
  ctrl_t ctrl;
  vec_t din, d0, d3, d4;
  ctrl_t hc [NCYC];
  vec_t  hd [NCYC];
  int checks = 0, failures = 0;

  bnro_network #(.LAYERS(LAYERS), .data_t(logic [W-1:0]), .PIPE(4'b0000)) u_p0 (.clk, .ctrl, .din, .dout(d0));
  bnro_network #(.LAYERS(LAYERS), .data_t(logic [W-1:0]), .PIPE(4'b1011)) u_p3 (.clk, .ctrl, .din, .dout(d3));
  bnro_network #(.LAYERS(LAYERS), .data_t(logic [W-1:0]), .PIPE(4'b1111)) u_p4 (.clk, .ctrl, .din, .dout(d4));

  always #5 clk = ~clk;

  initial begin
    #((NCYC + 50) * 10);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // controls that concentrate the inputs flagged in act, starting at t
  function automatic ctrl_t conc_ctrl(logic [NIN-1:0] act, int unsigned t);
    ctrl_t c;
    int unsigned m, r;
    c = '0;
    m = t;
    for (int unsigned k = 0; k < NIN; k++) if (act[k]) begin
      for (int unsigned l = 0; l < LAYERS; l++) begin
        r = (ref_rev(m % NIN, l) << (LAYERS - 1 - l)) | (k >> (l + 1));
        c[l][r] = 1'(((k >> l) ^ (m >> l)) & 1);
      end
      m++;
    end
    return c;
  endfunction

  task automatic check(vec_t got, int lat, int cyc);
    int unsigned m;
    if (cyc < lat) return;
    for (int k = 0; k < NIN; k++) begin
      m = ref_trace(hc[cyc-lat], k);
      checks++;
      if (got[m] !== hd[cyc-lat][k]) begin
        failures++;
        if (failures < 10) $display("lat %0d cycle %0d: input %0d expected at output %0d", lat, cyc, k, m);
      end
    end
  endtask

  // switch numbering against labels printed in the 16-input topology drawing:
  // {layer, an input k that reaches the switch, an output m it reaches, S_l,r}
  localparam int NLAB = 8;
  localparam int LAB [NLAB][4] = '{'{0, 5, 0, 2},    // S0,2: inputs 0100, 0101
                                   '{1, 0, 1, 4},    // S1,4: in 000x, out xx01
                                   '{1, 3, 3, 4},    // S1,4: in 001x, out xx11
                                   '{1, 8, 0, 2},    // S1,2: in 100x, out xx00
                                   '{2, 0, 2, 2},    // S2,2: in 00xx, out x010
                                   '{2, 4, 6, 2},    // S2,2: in 01xx, out x110
                                   '{2, 8, 1, 5},    // S2,5: in 10xx, out x001
                                   '{3, 0, 5, 5}};   // S3,5: in 0xxx, out 0101

  initial begin
    logic [NIN-1:0] act;
    for (int i = 0; i < NLAB; i++) begin
      checks++;
      if (bnro_pkg::switch_index(LAB[i][0], LAB[i][1], LAB[i][2], LAYERS) != LAB[i][3]) begin
        failures++;
        $display("switch numbering differs from the drawing, entry %0d", i);
      end
    end
    for (int cyc = 0; cyc < NCYC; cyc++) begin
      @(negedge clk);
      for (int k = 0; k < NIN; k++) din[k] = W'($urandom);
      if (cyc < NCYC / 2) begin
        for (int l = 0; l < LAYERS; l++) ctrl[l] = NSW'($urandom);
      end else begin
        act = NIN'($urandom);
        ctrl = conc_ctrl(act, $urandom % NIN);
      end
      hc[cyc] = ctrl; hd[cyc] = din;
      #1;
      check(d0, 0, cyc);
      check(d3, 3, cyc);
      check(d4, 4, cyc);
    end
    // the trace must be a permutation: spot-check that all-bar keeps order
    ctrl = '0;
    #1;
    for (int k = 0; k < NIN; k++) begin
      checks++;
      if (d0[k] !== din[k]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
