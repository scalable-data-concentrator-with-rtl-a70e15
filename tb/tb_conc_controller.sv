// Self-checking testbench for conc_controller (4 layers).
// Random DAQ-flag patterns of varying density (including all-active and
// all-idle cycles) are applied to two controllers: PIPE = 0 (strobes in the
// same cycle) and PIPE = 4'b0101 (strobes two cycles later). An independent
// model keeps the output-record occupancy. Checked every cycle:
//  * ctrl: every active input k, traced through the network with these
//    settings (bnro_ref.svh), reaches (occupancy + number of active inputs
//    before k) mod 16;
//  * wr_stb / asm_stb equal the model's record / auxiliary positions, delayed
//    by the network latency;
//  * out_stb comes one cycle after that, exactly for the cycles that complete
//    a record.
module tb_conc_controller;
  localparam int LAYERS = 4;
  localparam int NIN = 1 << LAYERS;
  localparam int NSW = NIN / 2;
  localparam int NCYC = 2000;

  `include "bnro_ref.svh"

  typedef logic [LAYERS-1:0][NSW-1:0] ctrl_t;

  logic clk = 0, rst = 1;
  logic [NIN-1:0] daq;
  ctrl_t c0, c2;
  logic [NIN-1:0] w0, a0, w2, a2;
  logic o0, o2;
  logic [NIN-1:0] hw [NCYC], ha [NCYC];
  logic hc [NCYC];
  int checks = 0, failures = 0;
  int n_aux = 0, n_cmp = 0;

  conc_controller #(.LAYERS(LAYERS), .PIPE(4'b0000)) u_0 (.clk, .rst, .daq, .ctrl(c0), .wr_stb(w0), .asm_stb(a0), .out_stb(o0));
  conc_controller #(.LAYERS(LAYERS), .PIPE(4'b0101)) u_2 (.clk, .rst, .daq, .ctrl(c2), .wr_stb(w2), .asm_stb(a2), .out_stb(o2));

  always #5 clk = ~clk;

  initial begin
    #((NCYC + 50) * 10);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(bit ok, string what, int cyc);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("cycle %0d: %s", cyc, what);
    end
  endfunction

  initial begin
    int occ, pos, dens;
    daq = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    occ = 0;
    for (int cyc = 0; cyc < NCYC; cyc++) begin
      // density changes every 50 cycles: 0..100 %
      if (cyc % 50 == 0) dens = $urandom % 11;
      for (int k = 0; k < NIN; k++) daq[k] = ($urandom % 10) < dens;
      hw[cyc] = '0; ha[cyc] = '0;
      pos = occ;
      for (int k = 0; k < NIN; k++) if (daq[k]) begin
        if (pos < NIN) hw[cyc][pos] = 1'b1;
        else           ha[cyc][pos - NIN] = 1'b1;
        pos++;
      end
      hc[cyc] = (pos >= NIN);
      if (pos > NIN) n_aux++;
      if (pos >= NIN) n_cmp++;
      #1;
      // routing
      pos = occ;
      for (int k = 0; k < NIN; k++) if (daq[k]) begin
        chk(ref_trace(c0, k) == pos % NIN, "ctrl (PIPE=0) misroutes", cyc);
        chk(ref_trace(c2, k) == pos % NIN, "ctrl (PIPE=0101) misroutes", cyc);
        pos++;
      end
      // strobes
      chk(w0 == hw[cyc] && a0 == ha[cyc], "strobes (latency 0)", cyc);
      if (cyc >= 2) chk(w2 == hw[cyc-2] && a2 == ha[cyc-2], "strobes (latency 2)", cyc);
      if (cyc >= 1) chk(o0 == hc[cyc-1], "out_stb (latency 1)", cyc);
      if (cyc >= 3) chk(o2 == hc[cyc-3], "out_stb (latency 3)", cyc);
      occ = pos % NIN;
      @(negedge clk);
    end
    chk(n_aux > 0 && n_cmp > 0, "auxiliary record / completion never exercised", NCYC);
    $display("cycles completing a record: %0d, cycles using the auxiliary record: %0d", n_cmp, n_aux);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
