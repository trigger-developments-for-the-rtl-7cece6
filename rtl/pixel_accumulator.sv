// Per-pixel integrator over the 128-GTU threshold window ("Sum on 128 GTU").
//
// Every incoming row (the 64 pixel counts of one MAPMT in one GTU) is added to
// that row's entry of an N_ROWS x LANES accumulator array. In the first GTU of
// a window the old contents are ignored, so no clearing pass is needed. In the
// last GTU of the window the completed sums (old contents plus this GTU) are
// presented at the output, one row per input row, one clock later. These are
// the SUM_pixel values that feed both the threshold calculation and the FIFO
// towards L2. The window length follows the paper; the row-serial datapath and
// the implicit clear are this design's choices.
//
// Interface: in_gtu is the GTU index inside the window (0..WIN_GTU-1), supplied
// by the frame sequencer; out_* is registered, one clock after in_*.
module pixel_accumulator #(
  parameter int unsigned N_ROWS  = 36,
  parameter int unsigned LANES   = 64,
  parameter int unsigned PIX_W   = 8,
  parameter int unsigned WIN_GTU = 128,
  localparam int unsigned ROW_W  = $clog2(N_ROWS),
  localparam int unsigned GTU_W  = $clog2(WIN_GTU),
  localparam int unsigned SUM_W  = PIX_W + GTU_W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic [ROW_W-1:0]                  in_row,
  input  logic [GTU_W-1:0]                  in_gtu,
  input  logic [LANES-1:0][PIX_W-1:0]       in_pix,
  output logic                              out_valid,
  output logic [ROW_W-1:0]                  out_row,
  output logic [LANES-1:0][SUM_W-1:0]       out_sum
);

  logic [LANES-1:0][SUM_W-1:0] acc [N_ROWS];
  logic [LANES-1:0][SUM_W-1:0] acc_next;

  wire first_gtu = (in_gtu == '0);
  wire last_gtu  = (in_gtu == GTU_W'(WIN_GTU - 1));

  always_comb begin
    for (int l = 0; l < LANES; l++)
      acc_next[l] = (first_gtu ? '0 : acc[in_row][l]) + SUM_W'(in_pix[l]);
  end

  always_ff @(posedge clk) begin
    if (in_valid) acc[in_row] <= acc_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_row   <= '0;
      out_sum   <= '0;
    end else begin
      out_valid <= in_valid && last_gtu;
      if (in_valid && last_gtu) begin
        out_row <= in_row;
        out_sum <= acc_next;
      end
    end
  end

endmodule
