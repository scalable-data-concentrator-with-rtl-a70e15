// conc_controller: the concentrator controller of the BNRO data concentrator.
//
// Every clock cycle, from the DAQ-word flags of the 2^LAYERS inputs and the
// occupancy of the output record (words already in it), it
//   1. counts the active inputs (those carrying a DAQ word) and gives the k-th
//      active input, counting from input 0, the target position
//      (occupancy + k) mod 2^LAYERS: the next free word of the output record,
//      or, once the record is full, a word of the auxiliary record;
//   2. sets each switch with the bit-compare rule of the BNRO: in layer l the
//      switch that carries input k towards target m is in cross mode when
//      k[l] != m[l] and in bar mode otherwise. Switches that carry no DAQ word
//      are left in bar mode;
//   3. raises a write strobe for every output-record word and an assembly strobe
//      for every auxiliary-record word that receives data, and marks the record
//      complete when occupancy + count reaches 2^LAYERS. The new occupancy is
//      (occupancy + count) mod 2^LAYERS.
// Steps 1-3 are one combinational step from daq to the occupancy register, as
// in the paper (whose controller also decides all routing within one cycle).
//
// Timing: ctrl is valid in the same cycle as daq (it goes to the network with
// the data). wr_stb and asm_stb are delayed by LAT = $countones(PIPE) cycles,
// the network latency, so they meet the words at the network output. out_stb
// follows one cycle later, when the output record register holds the complete
// record: it pushes the record into the FIFO and loads the auxiliary record
// into the output record. Reset is synchronous and active high; these timing
// and reset details are this design's choices. asm_stb[2^LAYERS-1] is always
// 0, since at most 2^LAYERS-1 words can overflow; it is kept so that both
// strobe vectors have one bit per record word.
//
// The paper proves that the BNRO never needs both modes in one switch while
// concentrating; an assertion checks that no switch is asked for both.
module conc_controller
  import bnro_pkg::*;
#(
  parameter int                LAYERS = 4,
  parameter logic [LAYERS-1:0] PIPE   = '1
) (
  input  logic                                   clk,
  input  logic                                   rst,
  input  logic [(1<<LAYERS)-1:0]                 daq,
  output logic [LAYERS-1:0][(1<<(LAYERS-1))-1:0] ctrl,
  output logic [(1<<LAYERS)-1:0]                 wr_stb,
  output logic [(1<<LAYERS)-1:0]                 asm_stb,
  output logic                                   out_stb
);

  localparam int NIN = 1 << LAYERS;
  localparam int NSW = NIN / 2;
  localparam int LAT = $countones(PIPE);

  typedef logic [LAYERS-1:0] pos_t;
  typedef struct packed {
    logic [NIN-1:0] wr;
    logic [NIN-1:0] as;
    logic           cmp;
  } stb_t;

  pos_t              occ;          // words already in the output record
  pos_t [NIN-1:0]    tgt;          // target position of each input
  logic [LAYERS:0]   cnt;          // number of active inputs
  logic [LAYERS:0]   sum;          // occ + cnt
  logic [LAYERS-1:0][NSW-1:0] need_cross, need_bar;
  stb_t              now;

  // 1. count active inputs, assign consecutive positions
  always_comb begin
    logic [LAYERS:0] c;
    c = '0;
    for (int k = 0; k < NIN; k++) begin
      tgt[k] = occ + pos_t'(c);
      if (daq[k]) c = c + 1'b1;
    end
    cnt = c;
    sum = {1'b0, occ} + cnt;
  end

  // 2. switch modes. Switch r = {a, b} of layer l (a: l bits, b: LAYERS-1-l
  // bits) is reached from inputs k = {b, c} whose target satisfies
  // bitrev(m[l-1:0]) == a.
  always_comb begin
    need_cross = '0;
    need_bar   = '0;
    for (int l = 0; l < LAYERS; l++) begin
      for (int r = 0; r < NSW; r++) begin
        for (int c = 0; c < (2 << l); c++) begin
          int unsigned k, a, b;
          a = r >> (LAYERS - 1 - l);
          b = r & ((1 << (LAYERS - 1 - l)) - 1);
          k = (b << (l + 1)) | c;
          if (daq[k] && bitrev(int'(tgt[k]) & ((1 << l) - 1), l) == a) begin
            if (((k >> l) & 1) != int'(tgt[k][l])) need_cross[l][r] = 1'b1;
            else                                   need_bar[l][r]   = 1'b1;
          end
        end
      end
    end
  end

  assign ctrl = need_cross;

  // 3. strobes for the records
  always_comb begin
    for (int p = 0; p < NIN; p++) begin
      now.wr[p] = (p >= int'(occ)) && (p < int'(sum));
      now.as[p] = (p + NIN < int'(sum));
    end
    now.cmp = sum[LAYERS];
  end

  always_ff @(posedge clk) begin
    if (rst) occ <= '0;
    else     occ <= sum[LAYERS-1:0];
  end

  // align the strobes with the network latency
  stb_t dly [LAT+1];
  assign dly[0] = now;
  for (genvar i = 0; i < LAT; i++) begin : g_dly
    stb_t q;
    always_ff @(posedge clk) begin
      if (rst) q <= '0;
      else     q <= dly[i];
    end
    assign dly[i+1] = q;
  end

  assign wr_stb  = dly[LAT].wr;
  assign asm_stb = dly[LAT].as;

  always_ff @(posedge clk) begin
    if (rst) out_stb <= 1'b0;
    else     out_stb <= dly[LAT].cmp;
  end

  // no collision: no switch is asked to be in bar and cross mode at once
  a_no_collision: assert property (@(posedge clk) disable iff (rst)
                                   (need_cross & need_bar) == '0);

endmodule
