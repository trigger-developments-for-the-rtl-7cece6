// Double-banked store of the per-pixel thresholds S_pixel.
//
// One bank holds the thresholds in force; the other receives the set computed
// from the window that is ending. When all N_ROWS rows of a new set have been
// written, the set is pending; it is taken into use on the first read of a
// frame that starts a new 128-GTU window (rd_window_start with rd_row == 0),
// so every GTU of a window is compared with the thresholds of the previous
// window, as the paper describes. The two banks are this design's way of
// keeping the last GTU of a window on the old thresholds.
//
// Before the first set is in force every threshold reads as all ones, which no
// pixel count can exceed. Read data is registered: rd_thr belongs to the
// rd_row given one clock earlier. swap pulses in the clock a new set is taken.
module threshold_store
  import euso_trig_pkg::*;
#(
  parameter int unsigned N_ROWS = 36,
  parameter int unsigned LANES  = 64,
  localparam int unsigned RW = $clog2(N_ROWS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_valid,
  input  logic [RW-1:0]          wr_row,
  input  logic [LANES-1:0][S_W-1:0] wr_thr,
  input  logic                      rd_en,
  input  logic [RW-1:0]          rd_row,
  input  logic                      rd_window_start,
  output logic [LANES-1:0][S_W-1:0] rd_thr,
  output logic                      loaded,
  output logic                      swap
);

  logic [LANES-1:0][S_W-1:0] mem [2][N_ROWS];
  logic active;        // bank in force
  logic pending;       // the other bank holds a complete new set
  logic use_bank;

  assign swap     = rd_en && rd_row == '0 && rd_window_start && pending;
  assign use_bank = swap ? ~active : active;

  always_ff @(posedge clk) begin
    if (wr_valid) mem[~active][wr_row] <= wr_thr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      pending <= 1'b0;
      loaded  <= 1'b0;
      rd_thr  <= '1;
    end else begin
      if (swap) begin
        active  <= ~active;
        pending <= 1'b0;
        loaded  <= 1'b1;
      end else if (wr_valid && wr_row == RW'(N_ROWS - 1)) begin
        pending <= 1'b1;
      end
      if (rd_en) rd_thr <= (loaded || swap) ? mem[use_bank][rd_row] : '1;
    end
  end

  // A new set must not be written while the previous one is still pending.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && wr_row == '0 |-> !pending || swap);

endmodule
