// Self-checking testbench for bnro_switch: random words and controls through a
// combinational and a registered switch; bar must pass straight through, cross
// must swap, and the registered one must do so one cycle later.
module tb_bnro_switch;
  localparam int W = 16;
  logic clk = 0;
  logic sw;
  logic [W-1:0] a, b, c0, c1, r0, r1, pa, pb;
  logic psw;
  int checks = 0, failures = 0;

  bnro_switch #(.data_t(logic [W-1:0]), .REG(1'b0)) u_c (.clk, .swap(sw), .in0(a), .in1(b), .out0(c0), .out1(c1));
  bnro_switch #(.data_t(logic [W-1:0]), .REG(1'b1)) u_r (.clk, .swap(sw), .in0(a), .in1(b), .out0(r0), .out1(r1));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sw = 0; a = 0; b = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      psw = sw; pa = a; pb = b;
      sw = 1'($urandom); a = W'($urandom); b = W'($urandom);
      #1;
      checks++;
      if (c0 !== (sw ? b : a) || c1 !== (sw ? a : b)) begin
        failures++; $display("comb mismatch sw=%0d", sw);
      end
      if (i > 0) begin
        checks++;
        if (r0 !== (psw ? pb : pa) || r1 !== (psw ? pa : pb)) begin
          failures++; $display("reg mismatch sw=%0d", psw);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
