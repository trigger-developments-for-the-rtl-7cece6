// EUSO L1 trigger for one PDM (2304 pixels): adaptive per-pixel thresholds
// followed by the EUSO-TA and EUSO-SPB2 pixel-counting trigger logics.
//
// Pixel counts enter one MAPMT (64 pixels) per clock, MAPMTs 0..35 in raster
// order of the 6x6 focal-surface grid, 36 beats per GTU. The input side counts
// rows and GTUs. Two paths leave the input:
//   * pixel_accumulator integrates each pixel over a 128-GTU window; at the
//     window's end its sums go to spixel_calc, which computes the next
//     window's thresholds into threshold_store, and to sum_fifo towards L2;
//   * pixel_frame_buffer (two GTUs) holds the current frame and replays the
//     previous, complete one to pixel_comparator, together with the matching
//     thresholds, producing PMT_VALUE (active pixels per MAPMT) per clock.
// PMT_VALUE feeds ta_trigger and spb2_trigger in parallel. logic_sel chooses
// which of the two drives l1_trig (0: EUSO-TA, 1: EUSO-SPB2); both results are
// also brought out. l1_gtu is the number of the GTU (counted from reset, first
// GTU = 0) that caused the trigger. event_storage keeps the last GTUs of the
// input stream and, on an accepted L1 trigger, the 128 GTUs around it, which
// leave through the ev_* read-out port.
//
// Timing: a GTU's results (res_valid) appear a fixed number of clocks after
// its last input row (see the testbench); the frame needs 36 input clocks, so
// the clock must be at least 36 times the GTU rate (14.4 MHz for the 2.5 us TA
// GTU, 36 MHz for the 1 us SPB2 GTU). Every GTU of window k (k >= 1) is
// compared with thresholds computed from window k-1; during window 0 no pixel
// is active. The thresholds' n_sigma and window follow the paper; the row-
// serial datapath, the frame buffer's role and logic_sel are design choices.
module euso_l1_trigger
  import euso_trig_pkg::*;
#(
  parameter int unsigned N_SIGMA = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // pixel counts, one MAPMT per beat
  input  logic             pix_valid,
  input  pmt_pix_t         pix,
  // configuration
  input  ta_cfg_t          ta_cfg,
  input  spb2_cfg_t        spb2_cfg,
  input  logic             logic_sel,
  // L1 results, once per GTU
  output logic             res_valid,
  output logic             l1_trig,
  output logic [31:0]      l1_gtu,
  output logic             ta_trig,
  output logic [5:0]       ta_cause,
  output logic             spb2_trig,
  output logic [N_PMT-1:0] spb2_pmt,
  output logic             thr_update,
  // 128-GTU sums towards L2
  output logic             l2_valid,
  input  logic             l2_ready,
  output row_t             l2_row,
  output pmt_sum_t         l2_sum,
  output logic             l2_overflow,
  output logic             frame_overflow,
  // stored events (128 GTUs around each accepted L1 trigger) towards the CPU
  output logic             ev_accepted,
  output logic             ev_rejected,
  output logic             ev_valid,
  input  logic             ev_ready,
  output logic [31:0]      ev_trig_gtu,
  output logic [31:0]      ev_gtu,
  output row_t             ev_row,
  output pmt_pix_t         ev_pix,
  output logic             ev_last
);

  // ---------------- input sequencing ----------------
  row_t                 in_row;
  logic [WIN_LOG2-1:0]  in_gtu;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_row <= '0;
      in_gtu <= '0;
    end else if (pix_valid) begin
      if (in_row == row_t'(N_PMT - 1)) begin
        in_row <= '0;
        in_gtu <= in_gtu + 1'b1;       // wraps every 128 GTUs
      end else begin
        in_row <= in_row + 1'b1;
      end
    end
  end

  // ---------------- threshold path ----------------
  logic     acc_valid;
  row_t     acc_row;
  pmt_sum_t acc_sum;

  pixel_accumulator #(.N_ROWS(N_PMT), .LANES(PIX_PER_PMT), .PIX_W(PIX_W), .WIN_GTU(WIN_GTU)) u_acc (
    .clk, .rst_n, .in_valid(pix_valid), .in_row, .in_gtu, .in_pix(pix),
    .out_valid(acc_valid), .out_row(acc_row), .out_sum(acc_sum));

  logic     thr_wr_valid;
  row_t     thr_wr_row;
  pmt_thr_t thr_wr;

  spixel_calc #(.LANES(PIX_PER_PMT), .N_SIGMA(N_SIGMA), .N_ROWS(N_PMT)) u_spixel (
    .clk, .rst_n, .in_valid(acc_valid), .in_row(acc_row), .in_sum(acc_sum),
    .out_valid(thr_wr_valid), .out_row(thr_wr_row), .out_thr(thr_wr));

  localparam int unsigned FIFO_W = ROW_W + PIX_PER_PMT * SUM_W;
  logic [FIFO_W-1:0] l2_data;

  sum_fifo #(.WIDTH(FIFO_W), .DEPTH(64)) u_fifo (
    .clk, .rst_n, .in_valid(acc_valid), .in_data({acc_row, acc_sum}),
    .out_valid(l2_valid), .out_ready(l2_ready), .out_data(l2_data), .level(),
    .overflow(l2_overflow));

  assign {l2_row, l2_sum} = l2_data;

  // ---------------- comparison path ----------------
  logic     fb_addr_valid, fb_addr_ws, fb_valid;
  row_t     fb_addr_row, fb_row;
  pmt_pix_t fb_pix;

  pixel_frame_buffer #(.N_ROWS(N_PMT), .LANES(PIX_PER_PMT), .PIX_W(PIX_W)) u_fb (
    .clk, .rst_n, .wr_valid(pix_valid), .wr_row(in_row), .wr_pix(pix),
    .wr_window_start(in_gtu == '0),
    .rd_addr_valid(fb_addr_valid), .rd_addr_row(fb_addr_row), .rd_addr_window_start(fb_addr_ws),
    .rd_valid(fb_valid), .rd_row(fb_row), .rd_pix(fb_pix), .overflow(frame_overflow));

  pmt_thr_t thr_rd;

  threshold_store #(.N_ROWS(N_PMT), .LANES(PIX_PER_PMT)) u_thr (
    .clk, .rst_n, .wr_valid(thr_wr_valid), .wr_row(thr_wr_row), .wr_thr(thr_wr),
    .rd_en(fb_addr_valid), .rd_row(fb_addr_row), .rd_window_start(fb_addr_ws),
    .rd_thr(thr_rd), .loaded(), .swap(thr_update));

  logic             pmt_valid;
  row_t             pmt_row;
  pmt_cnt_t         pmt_count;

  pixel_comparator #(.LANES(PIX_PER_PMT), .N_ROWS(N_PMT)) u_cmp (
    .clk, .rst_n, .in_valid(fb_valid), .in_row(fb_row), .in_pix(fb_pix), .in_thr(thr_rd),
    .out_valid(pmt_valid), .out_row(pmt_row), .out_count(pmt_count), .out_active());

  // ---------------- trigger logics ----------------
  logic ta_valid, spb2_valid;

  ta_trigger u_ta (
    .clk, .rst_n, .pmt_valid, .pmt_row, .pmt_count, .cfg(ta_cfg),
    .trig_valid(ta_valid), .trig(ta_trig), .cause(ta_cause));

  logic             spb2_trig_raw;
  logic [N_PMT-1:0] spb2_pmt_raw;

  spb2_trigger u_spb2 (
    .clk, .rst_n, .pmt_valid, .pmt_row, .pmt_count, .cfg(spb2_cfg),
    .trig_valid(spb2_valid), .trig(spb2_trig_raw), .pmt_trig(spb2_pmt_raw));

  // SPB2 results come one clock before the TA results of the same GTU; delay
  // them so both are presented together.
  logic             spb2_trig_d;
  logic [N_PMT-1:0] spb2_pmt_d;
  logic [31:0]      gtu_cnt;          // GTU number of the results in flight

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spb2_trig_d <= 1'b0;
      spb2_pmt_d  <= '0;
      gtu_cnt     <= '0;
    end else begin
      if (spb2_valid) begin
        spb2_trig_d <= spb2_trig_raw;
        spb2_pmt_d  <= spb2_pmt_raw;
      end
      if (ta_valid) gtu_cnt <= gtu_cnt + 1'b1;
    end
  end

  assign res_valid = ta_valid;
  assign spb2_trig = ta_valid && spb2_trig_d;
  assign spb2_pmt  = ta_valid ? spb2_pmt_d : '0;
  assign l1_trig   = logic_sel ? spb2_trig : ta_trig;
  assign l1_gtu    = gtu_cnt;

  // ---------------- event storage ----------------
  event_storage #(.N_ROWS(N_PMT), .LANES(PIX_PER_PMT), .PIX_W(PIX_W), .EV_GTU(WIN_GTU)) u_ev (
    .clk, .rst_n, .wr_valid(pix_valid), .wr_row(in_row), .wr_pix(pix),
    .trig(res_valid && l1_trig), .trig_gtu(l1_gtu),
    .trig_accepted(ev_accepted), .trig_rejected(ev_rejected),
    .rd_valid(ev_valid), .rd_ready(ev_ready), .rd_trig_gtu(ev_trig_gtu), .rd_gtu(ev_gtu),
    .rd_row(ev_row), .rd_pix(ev_pix), .rd_last(ev_last));

  a_spb2_before_ta: assert property (@(posedge clk) disable iff (!rst_n) spb2_valid |=> ta_valid);

endmodule
