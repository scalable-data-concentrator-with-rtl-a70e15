// Self-checking testbench for output_fifo (4 entries of 24 bits): random
// pushes and pops against a queue model, checking head data, empty, full and
// the sticky overflow flag, which is forced by pushing into a full FIFO.
module tb_output_fifo;
  localparam int W = 24;
  logic clk = 0, rst = 1;
  logic wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic empty, full, overflow;
  logic [W-1:0] q [$];
  bit ovf_model;
  int checks = 0, failures = 0, n_full = 0;

  output_fifo #(.WIDTH(W), .DEPTH_LOG2(2)) dut (.clk, .rst, .wr_en, .wr_data, .rd_en, .rd_data, .empty, .full, .overflow);

  always #5 clk = ~clk;

  initial begin
    #50000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%t: %s", $time, what);
    end
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    ovf_model = 0;
    for (int i = 0; i < 1000; i++) begin
      // phases: fill-heavy then drain-heavy
      wr_en = ($urandom % 100) < ((i / 100) % 2 ? 30 : 70);
      rd_en = ($urandom % 100) < ((i / 100) % 2 ? 70 : 30);
      wr_data = W'($urandom);
      #1;
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == 4), "full");
      chk(overflow == ovf_model, "overflow");
      if (q.size() > 0) chk(rd_data == q[0], "head data");
      if (full) n_full++;
      @(posedge clk);
      begin
        int sz;
        sz = q.size();
        if (rd_en && sz > 0) void'(q.pop_front());
        if (wr_en) begin
          if (sz < 4) q.push_back(wr_data);
          else        ovf_model = 1;
        end
      end
      @(negedge clk);
    end
    chk(n_full > 0 && ovf_model, "FIFO never filled or overflowed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
