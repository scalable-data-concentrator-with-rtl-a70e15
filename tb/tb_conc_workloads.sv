// Workload testbench: the configurations the concentrator was evaluated in.
// 4 layers (16 inputs) and 5 layers (32 inputs), each without pipeline
// registers, with registers in every layer and with registers in selected
// layers, each run at DAQ-word probabilities of 5 % to 100 % with the order
// and density of the output stream checked word by word. A 6-layer
// (64-input) instance checks the extension the architecture allows beyond
// the evaluated sizes.
module tb_conc_workloads;
  logic clk = 0, rst = 1;
  localparam int NH = 7;
  logic [NH-1:0] done;
  int c [NH];
  int f [NH];

  conc_harness #(.LAYERS(4), .PIPE(4'b0000))  h0 (.clk, .rst, .done(done[0]), .checks(c[0]), .failures(f[0]));
  conc_harness #(.LAYERS(4), .PIPE(4'b1111))  h1 (.clk, .rst, .done(done[1]), .checks(c[1]), .failures(f[1]));
  conc_harness #(.LAYERS(4), .PIPE(4'b0101))  h2 (.clk, .rst, .done(done[2]), .checks(c[2]), .failures(f[2]));
  conc_harness #(.LAYERS(5), .PIPE(5'b00000)) h3 (.clk, .rst, .done(done[3]), .checks(c[3]), .failures(f[3]));
  conc_harness #(.LAYERS(5), .PIPE(5'b11111)) h4 (.clk, .rst, .done(done[4]), .checks(c[4]), .failures(f[4]));
  conc_harness #(.LAYERS(5), .PIPE(5'b10010)) h5 (.clk, .rst, .done(done[5]), .checks(c[5]), .failures(f[5]));
  conc_harness #(.LAYERS(6), .PIPE(6'b101010)) h6 (.clk, .rst, .done(done[6]), .checks(c[6]), .failures(f[6]));

  always #5 clk = ~clk;

  initial begin
    int checks, failures;
    repeat (3) @(negedge clk);
    rst = 0;
    fork
      wait (&done);
      repeat (5000) @(posedge clk);
    join_any
    checks = 0; failures = 0;
    for (int i = 0; i < NH; i++) begin
      checks += c[i];
      failures += f[i];
    end
    if (!(&done)) begin
      failures++;
      $display("watchdog expired");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
