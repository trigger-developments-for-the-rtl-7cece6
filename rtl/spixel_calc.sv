// Adaptive per-pixel threshold S_pixel, computed for one MAPMT row per clock.
//
// S_pixel = (SUM + 8*N_SIGMA*isqrt(2*SUM)) / 128, which is the mean lambda =
// SUM/128 plus N_SIGMA Poisson standard deviations sqrt(lambda). With the
// paper's N_SIGMA = 4 it is exactly the printed (SUM + 32*sqrt(2*SUM))/128.
// Square root and division truncate; combined with the strict "count >
// S_pixel" of the comparator, a mean of 1.5 counts/GTU (SUM = 192) gives
// S_pixel = 6, so a pixel is active from 7 counts, as in the paper's example.
// LANES square-root units work in parallel; the result is registered (one
// clock latency). The truncation is this design's reading of the formula.
module spixel_calc
  import euso_trig_pkg::*;
#(
  parameter int unsigned LANES   = 64,
  parameter int unsigned N_SIGMA = 4,
  parameter int unsigned N_ROWS  = 36,
  localparam int unsigned RW  = $clog2(N_ROWS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [RW-1:0]            in_row,
  input  logic [LANES-1:0][SUM_W-1:0] in_sum,
  output logic                        out_valid,
  output logic [RW-1:0]            out_row,
  output logic [LANES-1:0][S_W-1:0]   out_thr
);

  logic [LANES-1:0][S_W-1:0] thr;

  always_comb begin
    for (int l = 0; l < LANES; l++) thr[l] = spixel(in_sum[l], N_SIGMA);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_row   <= '0;
      out_thr   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_row <= in_row;
        out_thr <= thr;
      end
    end
  end

endmodule
