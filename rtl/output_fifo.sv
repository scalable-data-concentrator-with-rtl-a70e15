// output_fifo: synchronous first-word-fall-through FIFO for complete output
// records.
//
// wr_en pushes wr_data (one complete record) at the clock edge; rd_data always
// shows the oldest word while empty is low, and rd_en removes it. The
// concentrator cannot be stalled, so a push into a full FIFO is dropped and
// sets the sticky overflow flag until reset. Depth 2^DEPTH_LOG2 and the
// overflow policy are this design's choices: the paper only names the FIFO.
module output_fifo #(
  parameter int WIDTH      = 512,
  parameter int DEPTH_LOG2 = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic             overflow
);

  localparam int DEPTH = 1 << DEPTH_LOG2;

  logic [WIDTH-1:0]    mem [DEPTH];
  logic [DEPTH_LOG2:0] wptr, rptr;

  assign empty   = (wptr == rptr);
  assign full    = (wptr[DEPTH_LOG2] != rptr[DEPTH_LOG2]) &&
                   (wptr[DEPTH_LOG2-1:0] == rptr[DEPTH_LOG2-1:0]);
  assign rd_data = mem[rptr[DEPTH_LOG2-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wptr[DEPTH_LOG2-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr     <= '0;
      rptr     <= '0;
      overflow <= 1'b0;
    end else begin
      if (wr_en && !full) wptr <= wptr + 1'b1;
      if (wr_en && full)  overflow <= 1'b1;
      if (rd_en && !empty) rptr <= rptr + 1'b1;
    end
  end

endmodule
