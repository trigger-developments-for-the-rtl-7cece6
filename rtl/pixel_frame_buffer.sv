// Two-GTU circular buffer of the pixel matrix.
//
// The buffer has two halves, each holding one complete frame (N_ROWS rows of
// LANES pixel counts). Incoming rows fill one half; when its last row is
// written the frame is complete, the write side moves to the other half, and
// the complete frame is read out one row per clock to the threshold
// comparators. Reading a frame (N_ROWS clocks) is never slower than writing
// one, so a frame is always read before its half is written again; overflow
// flags (and an assertion reports) a frame that would be overwritten unread.
//
// The read has an address phase (rd_addr_*, used to read the matching
// thresholds) and a data phase one clock later (rd_*). wr_window_start tags a
// frame that is the first GTU of a 128-GTU window; the tag travels with it.
// The two-GTU size is the paper's; its use as a write/read ping-pong is this
// design's choice.
module pixel_frame_buffer #(
  parameter int unsigned N_ROWS = 36,
  parameter int unsigned LANES  = 64,
  parameter int unsigned PIX_W  = 8,
  localparam int unsigned ROW_W = $clog2(N_ROWS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_valid,
  input  logic [ROW_W-1:0]            wr_row,
  input  logic [LANES-1:0][PIX_W-1:0] wr_pix,
  input  logic                        wr_window_start,
  output logic                        rd_addr_valid,
  output logic [ROW_W-1:0]            rd_addr_row,
  output logic                        rd_addr_window_start,
  output logic                        rd_valid,
  output logic [ROW_W-1:0]            rd_row,
  output logic [LANES-1:0][PIX_W-1:0] rd_pix,
  output logic                        overflow
);

  logic [LANES-1:0][PIX_W-1:0] mem [2][N_ROWS];
  logic       wr_half;
  logic [1:0] full;        // half holds a complete, unread frame
  logic [1:0] tag;         // window-start tag of each half
  logic       reading;
  logic       rd_half;     // half being read, or the next one to read
  logic [ROW_W-1:0] rd_cnt;

  wire wr_last   = wr_valid && wr_row == ROW_W'(N_ROWS - 1);
  wire rd_last   = reading && rd_cnt == ROW_W'(N_ROWS - 1);

  assign rd_addr_valid        = reading;
  assign rd_addr_row          = rd_cnt;
  assign rd_addr_window_start = tag[rd_half];

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wr_half][wr_row] <= wr_pix;
    if (reading)  rd_pix <= mem[rd_half][rd_cnt];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_half  <= 1'b0;
      full     <= '0;
      tag      <= '0;
      reading  <= 1'b0;
      rd_half  <= 1'b0;
      rd_cnt   <= '0;
      rd_valid <= 1'b0;
      rd_row   <= '0;
      overflow <= 1'b0;
    end else begin
      rd_valid <= reading;
      rd_row   <= rd_cnt;
      if (wr_valid && wr_row == '0) tag[wr_half] <= wr_window_start;
      if (reading) begin
        rd_cnt <= rd_last ? '0 : rd_cnt + 1'b1;
        if (rd_last) begin
          // move on to the other half; keep reading if it is already complete
          full[rd_half] <= 1'b0;
          rd_half       <= ~rd_half;
          reading       <= full[~rd_half];
        end
      end else if (full[rd_half]) begin
        reading <= 1'b1;
      end
      if (wr_last) begin
        if (full[wr_half] && !(rd_last && rd_half == wr_half)) overflow <= 1'b1;
        full[wr_half] <= 1'b1;
        wr_half       <= ~wr_half;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !overflow);

endmodule
