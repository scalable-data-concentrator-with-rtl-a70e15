// output_record: the 2^LAYERS-word output record in which the concentrated
// output word is assembled.
//
// Word p is loaded from network output p when its write strobe wr_stb[p] is
// high. When copy is high (the output strobe: the record was complete in the
// previous cycle and is being pushed into the FIFO at this clock edge) every
// word not written by the network is loaded from the auxiliary record, which
// restores the words that overflowed from the completed record. A network write
// and a copy never need the same word: copied words lie below the new
// occupancy and network writes above it; the network write wins if both occur.
// rec[0] is the oldest word; flattened, it is the least significant word.
module output_record #(
  parameter int LAYERS = 4,
  parameter type data_t = logic [31:0]
) (
  input  logic                                clk,
  input  logic [(1<<LAYERS)-1:0]              wr_stb,
  input  logic                                copy,
  input  data_t [(1<<LAYERS)-1:0]  din,
  input  data_t [(1<<LAYERS)-1:0]  aux,
  output data_t [(1<<LAYERS)-1:0]  rec
);

  always_ff @(posedge clk) begin
    for (int p = 0; p < (1 << LAYERS); p++) begin
      if (wr_stb[p])  rec[p] <= din[p];
      else if (copy)  rec[p] <= aux[p];
    end
  end

endmodule
