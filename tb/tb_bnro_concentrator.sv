// End-to-end testbench of bnro_concentrator at its default parameters
// (4 layers: 16 inputs of 32 bits, all layers pipelined, 16-entry FIFO).
//
// Stimulus in the style of the original authors' testbench: DAQ words carry
// consecutive integers, handed out to the inputs in input order, cycle after
// cycle; non-DAQ inputs carry junk. A correct concentrator therefore delivers
// the integers 0, 1, 2, ... in order, 16 per output word, with no holes.
// Phases:
//   0  latency: one all-active cycle after reset; the record must leave the
//      FIFO exactly LAT+2 = 6 cycles later;
//   1  random DAQ density per 64-cycle segment (0..100 %), reader always ready;
//   2  full rate: all 16 inputs active for 100 cycles; one 512-bit record per
//      cycle must come out (16 x 32 bit x f_clk, 128 Gb/s at 250 MHz);
//   3  reader ready half of the time at 40 % density (FIFO absorbs bursts);
//   4  drain: every word that fits in complete records has been delivered;
//   5  overflow: reader stopped, full input; the 17th record must hit the full
//      FIFO and raise the overflow flag in the exact cycle.
// Each mechanism (record completion, auxiliary record, idle inputs, full rate,
// reader stall, overflow) is counted and must occur.
module tb_bnro_concentrator;
  localparam int LAYERS = 4;
  localparam int NIN = 16;
  localparam int W = 32;
  localparam int LAT = 4;

  logic clk = 0, rst = 1;
  logic [NIN-1:0][W-1:0] din;
  logic [NIN-1:0] daq;
  logic rd_en;
  logic [NIN*W-1:0] dout;
  logic dout_valid, overflow;

  int checks = 0, failures = 0;
  int cyc = 0;
  int unsigned next_val = 0;   // next integer to send
  int unsigned expect_val = 0; // next integer expected at the output
  bit checking = 1;
  int n_rec = 0, n_aux = 0, n_idle = 0, n_full = 0, n_stall = 0, n_ovf = 0;

  bnro_concentrator dut (.clk, .rst, .din, .daq, .rd_en, .dout, .dout_valid, .overflow);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("cycle %0d: %s", cyc, what);
    end
  endfunction

  // output checker
  always @(posedge clk) begin
    if (!rst && rd_en && dout_valid && checking) begin
      for (int p = 0; p < NIN; p++) begin
        chk(dout[p*W +: W] == expect_val, "output word out of order / hole");
        expect_val++;
      end
      n_rec++;
    end
    if (!rst && |dut.asm_stb) n_aux++;
    if (!rst && dout_valid && !rd_en) n_stall++;
  end

  // drive one input cycle with DAQ probability pct (percent)
  task automatic drive(int pct);
    for (int k = 0; k < NIN; k++) begin
      daq[k] = ($urandom % 100) < pct;
      if (daq[k]) din[k] = next_val++;
      else        din[k] = 32'hdead0000 | ($urandom & 32'hffff);
    end
    if (daq == '0) n_idle++;
    if (daq == '1) n_full++;
  endtask

  initial begin
    int t0, pct, occ;
    daq = '0; din = '0; rd_en = 1;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);

    // phase 0: latency
    t0 = cyc;
    drive(100);
    @(negedge clk);
    drive(0);
    while (!dout_valid && cyc < t0 + 50) begin
      @(negedge clk);
      drive(0);
    end
    chk(cyc - t0 == LAT + 2, $sformatf("latency %0d cycles, expected %0d", cyc - t0, LAT + 2));
    repeat (5) begin @(negedge clk); drive(0); end

    // phase 1: random density
    for (int i = 0; i < 2048; i++) begin
      if (i % 64 == 0) pct = 10 * ($urandom % 11);
      drive(pct);
      @(negedge clk);
    end

    // phase 2: full rate
    repeat (20) begin drive(0); @(negedge clk); end
    t0 = cyc;
    for (int i = 0; i < 100 + LAT + 2; i++) begin
      drive(i < 100 ? 100 : 0);
      if (i >= LAT + 2) chk(dout_valid, "full rate: no record in this cycle");
      @(negedge clk);
    end

    // phase 3: slow reader
    for (int i = 0; i < 1000; i++) begin
      rd_en = $urandom % 2;
      drive(40);
      @(negedge clk);
    end
    rd_en = 1;

    // phase 4: drain, then all complete records must have arrived
    repeat (40) begin drive(0); @(negedge clk); end
    occ = next_val % NIN;
    chk(expect_val == next_val - occ, $sformatf("delivered %0d of %0d words", expect_val, next_val - occ));
    chk(!overflow, "overflow before the overflow phase");

    // phase 5: overflow (reader stopped)
    checking = 0;
    rd_en = 0;
    t0 = cyc;
    for (int i = 0; i < 30; i++) begin
      drive(100);
      if (cyc == t0 + 16 + LAT + 1) chk(!overflow, "overflow too early");
      if (cyc == t0 + 16 + LAT + 2) chk(overflow, "overflow missing");
      if (overflow) n_ovf++;
      @(negedge clk);
    end

    chk(n_rec > 0,   "no record completed");
    chk(n_aux > 0,   "auxiliary record never used");
    chk(n_idle > 0,  "no idle cycle");
    chk(n_full > 0,  "no full-rate cycle");
    chk(n_stall > 0, "reader never stalled");
    chk(n_ovf > 0,   "no overflow");
    $display("records %0d, aux-record cycles %0d, idle cycles %0d, full-rate cycles %0d, stalls %0d, overflow cycles %0d",
             n_rec, n_aux, n_idle, n_full, n_stall, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
