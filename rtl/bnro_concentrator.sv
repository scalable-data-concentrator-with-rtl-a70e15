// bnro_concentrator: scalable data concentrator built on an N-layer baseline
// network with reversed outputs (BNRO).
//
// 2^LAYERS input links each deliver one word of type data_t per clock cycle
// with a flag telling whether it is a DAQ word (to keep) or a non-DAQ word (to drop).
// The concentrator packs the DAQ words, in time order and, within a cycle, in
// input order, into dense 2^LAYERS-word output records with no holes, and
// queues every complete record in an output FIFO. At the default 16 x 32 bits it
// turns sixteen 32-bit links into a 512-bit stream, one record per cycle at
// full input load.
//
// Datapath: inputs -> bnro_network -> (output_record | aux_record) -> output_fifo.
// conc_controller sets the switches so that the active inputs land on
// consecutive record positions starting at the current occupancy, and strobes
// the words into the output record, or, when they overflow, into the auxiliary
// record; a complete record goes to the FIFO while the auxiliary words are
// copied into the emptied output record.
//
// data_t may be any packed type (a 32-bit vector by default, or for example a
// struct of source ID and payload), as the published design also allows; the
// network only moves words and never looks inside them.
//
// Interface: din/daq are sampled every cycle (no back-pressure). dout is the
// FIFO head, word 0 (oldest) in the low bits, valid while dout_valid; rd_en
// pops it. overflow is sticky when a record was lost to a full FIFO. The
// FIFO's full flag is left unconnected: with no back-pressure nothing can act
// on it, and overflow reports its consequence.
// Latency from the cycle that completes a record to dout_valid is
// $countones(PIPE) + 2 cycles. PIPE selects the layers with registered
// switches, as in the paper; the default registers all layers (the variant that
// met 250 MHz on both of the paper's boards).
module bnro_concentrator #(
  parameter int                LAYERS          = 4,
  parameter type                data_t          = logic [31:0],
  parameter logic [LAYERS-1:0] PIPE            = '1,
  parameter int                FIFO_DEPTH_LOG2 = 4
) (
  input  logic                                clk,
  input  logic                                rst,
  input  data_t [(1<<LAYERS)-1:0]  din,
  input  logic [(1<<LAYERS)-1:0]              daq,
  input  logic                                rd_en,
  output logic [(1<<LAYERS)*$bits(data_t)-1:0] dout,
  output logic                                dout_valid,
  output logic                                overflow
);

  localparam int NIN = 1 << LAYERS;

  logic [LAYERS-1:0][NIN/2-1:0] ctrl;
  logic [NIN-1:0]               wr_stb, asm_stb;
  logic                         out_stb;
  data_t [NIN-1:0]              net_out, aux, rec;
  logic                         empty, full;

  conc_controller #(.LAYERS(LAYERS), .PIPE(PIPE)) u_ctrl (
    .clk, .rst, .daq, .ctrl, .wr_stb, .asm_stb, .out_stb
  );

  bnro_network #(.LAYERS(LAYERS), .data_t(data_t), .PIPE(PIPE)) u_net (
    .clk, .ctrl, .din, .dout(net_out)
  );

  aux_record #(.LAYERS(LAYERS), .data_t(data_t)) u_aux (
    .clk, .asm_stb, .din(net_out), .rec(aux)
  );

  output_record #(.LAYERS(LAYERS), .data_t(data_t)) u_rec (
    .clk, .wr_stb, .copy(out_stb), .din(net_out), .aux, .rec
  );

  output_fifo #(.WIDTH(NIN * $bits(data_t)), .DEPTH_LOG2(FIFO_DEPTH_LOG2)) u_fifo (
    .clk, .rst, .wr_en(out_stb), .wr_data(rec), .rd_en, .rd_data(dout),
    .empty, .full, .overflow
  );

  assign dout_valid = !empty;

endmodule
