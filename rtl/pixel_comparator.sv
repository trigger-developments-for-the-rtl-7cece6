// Pixel threshold comparison and active-pixel count per MAPMT.
//
// For one MAPMT row per clock, every pixel count is compared with its own
// threshold (active when count > S_pixel, strictly, as the paper prints it),
// and the active pixels are counted into PMT_VALUE, the number of pixels above
// threshold in that MAPMT in this GTU. Output is registered: one clock latency,
// one row per clock. out_active is the map of active pixels.
module pixel_comparator
  import euso_trig_pkg::*;
#(
  parameter int unsigned LANES  = 64,
  parameter int unsigned N_ROWS = 36,
  localparam int unsigned RW = $clog2(N_ROWS),
  localparam int unsigned CNT_W = $clog2(LANES + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [RW-1:0]            in_row,
  input  logic [LANES-1:0][PIX_W-1:0] in_pix,
  input  logic [LANES-1:0][S_W-1:0]   in_thr,
  output logic                        out_valid,
  output logic [RW-1:0]            out_row,
  output logic [CNT_W-1:0]            out_count,
  output logic [LANES-1:0]            out_active
);

  logic [LANES-1:0] active;
  logic [CNT_W-1:0] count;

  always_comb begin
    count = '0;
    for (int l = 0; l < LANES; l++) begin
      active[l] = S_W'(in_pix[l]) > in_thr[l];
      count     = count + CNT_W'(active[l]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_row    <= '0;
      out_count  <= '0;
      out_active <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_row    <= in_row;
        out_count  <= count;
        out_active <= active;
      end
    end
  end

endmodule
