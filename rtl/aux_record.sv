// aux_record: the 2^LAYERS-word auxiliary record.
//
// When the DAQ words of one cycle overflow the output record, the remaining
// words wrap around to positions 0, 1, ... of the network output and are stored
// here, word p from network output p, under the assembly strobe asm_stb[p].
// The next complete-record strobe copies them into the output record.
// One cycle write latency; no reset, since a word is only read after the
// strobe that wrote it.
module aux_record #(
  parameter int LAYERS = 4,
  parameter type data_t = logic [31:0]
) (
  input  logic                                clk,
  input  logic [(1<<LAYERS)-1:0]              asm_stb,
  input  data_t [(1<<LAYERS)-1:0]  din,
  output data_t [(1<<LAYERS)-1:0]  rec
);

  always_ff @(posedge clk) begin
    for (int p = 0; p < (1 << LAYERS); p++)
      if (asm_stb[p]) rec[p] <= din[p];
  end

endmodule
