// FIFO carrying the 128-GTU pixel sums (SUM_pixel) to the L2 trigger.
//
// At the end of every 128-GTU window the accumulator emits 36 rows of sums in
// consecutive clocks; the FIFO holds them until the L2 logic takes them with a
// valid/ready handshake. The producer cannot be stalled, so a row arriving
// when the FIFO is full (and not read in that clock) is dropped and the sticky overflow flag is set. Depth
// and the drop policy are this design's choices (the paper only shows a FIFO
// between the sums and L2). out_data is the head entry, valid with out_valid;
// an entry is removed in a clock with out_valid && out_ready. DEPTH must be
// a power of two (the pointers wrap naturally).
module sum_fifo #(
  parameter int unsigned WIDTH = 966,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      level,
  output logic             overflow
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;

  wire full = level == (AW+1)'(DEPTH);
  wire pop  = out_valid && out_ready;
  wire push = in_valid && (!full || pop);     // a pop frees the slot in the same clock

  assign level     = wr_ptr - rd_ptr;
  assign out_valid = level != '0;
  assign out_data  = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      overflow <= 1'b0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      if (in_valid && !push) overflow <= 1'b1;
    end
  end

  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> level != '0);

endmodule
