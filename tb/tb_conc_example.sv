// Directed testbench: the three-cycle, 8-input worked example of the
// concentrator (record occupancy 0 -> 5 -> 3 -> 1), replayed on an 8-input
// concentrator without and with pipeline registers. DAQ word D_i carries the
// payload 100 + i and its link number; non-DAQ words carry junk.
//   cycle a: D0 N  D1 D2 N  D3 D4 N    -> record D0..D4
//   cycle b: D5 D6 N  D7 D8 D9 N  D10  -> record D0..D7 complete, aux D8 D9 D10
//   cycle c: D11 D12 D13 N D14 D15 D16 N -> record D8..D15 complete, aux D16
// The record and auxiliary contents are checked word by word when the
// strobes of each cycle have taken effect, then the two complete records must
// leave the FIFO in order.
module tb_conc_example;
  localparam int LAYERS = 3;
  localparam int NIN = 8;
  localparam int W = 16;

  // the concentrated words are structs (source link, payload), showing that
  // the concentrator carries any packed type
  typedef struct packed {
    logic [3:0]  src;
    logic [11:0] payload;
  } word_t;

  logic clk = 0, rst = 1;
  word_t [NIN-1:0] din;
  logic [NIN-1:0] daq;
  logic rd_en = 0;
  logic [NIN*W-1:0] dout_0, dout_3;
  logic v_0, v_3, o_0, o_3;
  int checks = 0, failures = 0;

  bnro_concentrator #(.LAYERS(LAYERS), .data_t(word_t), .PIPE(3'b000)) u_0 (
    .clk, .rst, .din, .daq, .rd_en, .dout(dout_0), .dout_valid(v_0), .overflow(o_0));
  bnro_concentrator #(.LAYERS(LAYERS), .data_t(word_t), .PIPE(3'b111)) u_3 (
    .clk, .rst, .din, .daq, .rd_en, .dout(dout_3), .dout_valid(v_3), .overflow(o_3));

  always #5 clk = ~clk;

  initial begin
    #2000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input pattern: -1 = non-DAQ word, else index i of D_i
  int pat [3][NIN] = '{'{0, -1, 1, 2, -1, 3, 4, -1},
                       '{5, 6, -1, 7, 8, 9, -1, 10},
                       '{11, 12, 13, -1, 14, 15, 16, -1}};
  // expected output record / auxiliary record after each cycle (-1 = don't care)
  int erec [3][NIN] = '{'{0, 1, 2, 3, 4, -1, -1, -1},
                        '{0, 1, 2, 3, 4, 5, 6, 7},
                        '{8, 9, 10, 11, 12, 13, 14, 15}};
  int eaux [3][NIN] = '{'{-1, -1, -1, -1, -1, -1, -1, -1},
                        '{8, 9, 10, -1, -1, -1, -1, -1},
                        '{16, -1, -1, -1, -1, -1, -1, -1}};

  initial begin
    daq = '0; din = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int s = 0; s < 3; s++) begin
      for (int k = 0; k < NIN; k++) begin
        daq[k] = pat[s][k] >= 0;
        din[k] = daq[k] ? '{src: 4'(k), payload: 12'(100 + pat[s][k])} : '{src: 4'hf, payload: 12'(12'hee0 + k)};
      end
      @(negedge clk);
    end
    daq = '0;
    // PIPE=111 (latency 3): cycle a, applied 3 edges ago, is in the records
    // after the next edge; cycles b and c follow one edge apart.
    @(negedge clk);
    check_state_3(0);
    @(negedge clk);
    check_state_3(1);
    @(negedge clk);
    check_state_3(2);
    // read both FIFOs
    repeat (3) @(negedge clk);
    rd_en = 1;
    for (int r = 0; r < 2; r++) begin
      checks += 2;
      if (!v_0 || !v_3) begin failures++; $display("record %0d missing", r); end
      for (int p = 0; p < NIN; p++) begin
        checks += 2;
        if (dout_0[p*W +: 12] != 12'(100 + r * NIN + p)) failures++;
        if (dout_3[p*W +: 12] != 12'(100 + r * NIN + p)) failures++;
      end
      @(negedge clk);
    end
    checks++;
    if (v_0 || v_3 || o_0 || o_3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // unpipelined instance: check its records right after each input cycle
  initial begin
    @(negedge clk);
    while (rst) @(negedge clk);
    for (int s = 0; s < 3; s++) begin
      @(negedge clk);
      for (int p = 0; p < NIN; p++) begin
        if (erec[s][p] >= 0) begin
          checks++;
          if (u_0.rec[p].payload != 12'(100 + erec[s][p])) begin failures++; $display("PIPE=000 cycle %0d record word %0d", s, p); end
        end
        if (eaux[s][p] >= 0) begin
          checks++;
          if (u_0.aux[p].payload != 12'(100 + eaux[s][p])) begin failures++; $display("PIPE=000 cycle %0d aux word %0d", s, p); end
        end
      end
    end
  end

  task automatic check_state_3(int s);
    for (int p = 0; p < NIN; p++) begin
      if (erec[s][p] >= 0) begin
        checks++;
        if (u_3.rec[p].payload != 12'(100 + erec[s][p])) begin failures++; $display("PIPE=111 cycle %0d record word %0d", s, p); end
      end
      if (eaux[s][p] >= 0) begin
        checks++;
        if (u_3.aux[p].payload != 12'(100 + eaux[s][p])) begin failures++; $display("PIPE=111 cycle %0d aux word %0d", s, p); end
      end
    end
  endtask
endmodule
