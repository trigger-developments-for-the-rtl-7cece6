// Background workload for euso_l1_trigger at full size: 16 windows (2048
// GTUs) of pure Poisson background with a mean of 1.5 counts/GTU in every
// pixel, the reference case of the trigger's designers.
//
// From the testbench's own 128-GTU sums it computes each pixel's threshold
// and, with the exact Poisson tail, the expected number of active pixels over
// windows 1..15; the number the design reports (sum of PMT_VALUE) must agree
// within five standard deviations. It prints the measured active-pixel
// probability (about 0.09 % for a threshold of 6, higher where the sampled
// mean gives a threshold of 5) and the fake-trigger counts of both logics,
// which must stay rare: a handful at most in 1920 GTUs.
module tb_background_rate;
  import euso_trig_pkg::*;

  localparam int N_WIN  = 16;
  localparam int N_GTU  = N_WIN * WIN_GTU;
  localparam int NPIX   = N_PMT * PIX_PER_PMT;
  localparam real LAMBDA = 1.5;

  logic clk = 0, rst_n = 0;
  logic pix_valid = 0;
  pmt_pix_t pix = '0;
  ta_cfg_t ta_cfg = TA_CFG_DEFAULT;
  spb2_cfg_t spb2_cfg = SPB2_CFG_DEFAULT;
  logic logic_sel = 0;
  logic res_valid, l1_trig, ta_trig, spb2_trig, thr_update;
  logic [31:0] l1_gtu;
  logic [5:0] ta_cause;
  logic [N_PMT-1:0] spb2_pmt;
  logic l2_valid, l2_ready = 1, l2_overflow, frame_overflow;
  row_t l2_row;
  pmt_sum_t l2_sum;
  logic ev_accepted, ev_rejected, ev_valid, ev_ready = 1, ev_last;
  logic [31:0] ev_trig_gtu, ev_gtu;
  row_t ev_row;
  pmt_pix_t ev_pix;

  euso_l1_trigger dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (50 * N_GTU * N_PMT) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int poisson();
    real l, p;
    int k;
    l = $exp(-LAMBDA); p = 1.0; k = 0;
    do begin
      k++;
      p = p * (real'($urandom) / 4294967296.0);
    end while (p > l);
    return k - 1;
  endfunction

  // P(X > t) for X ~ Poisson(LAMBDA)
  function automatic real tail(int t);
    real term, cdf;
    term = $exp(-LAMBDA); cdf = term;
    for (int j = 1; j <= t; j++) begin
      term = term * LAMBDA / j;
      cdf += term;
    end
    return 1.0 - cdf;
  endfunction

  function automatic int isqrt_ref(int x);
    int r;
    r = 0;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  // measured activity and triggers, counted from the design's outputs
  longint n_active = 0;
  int n_res = 0, n_ta = 0, n_spb2 = 0;
  always @(posedge clk) begin
    if (rst_n && dut.pmt_valid) n_active += dut.pmt_count;
    if (rst_n && res_valid) begin
      n_res++;
      if (ta_trig) n_ta++;
      if (spb2_trig) n_spb2++;
    end
  end

  int  acc [NPIX];
  real expected = 0.0;

  initial begin
    real per_gtu, diff;
    repeat (3) @(posedge clk);
    rst_n = 1;
    per_gtu = 0.0;
    for (int g = 0; g < N_GTU; g++) begin
      // at a window start, the thresholds from the last window's sums apply
      if (g % WIN_GTU == 0 && g > 0) begin
        per_gtu = 0.0;
        for (int i = 0; i < NPIX; i++)
          per_gtu += tail((acc[i] + 32 * isqrt_ref(2 * acc[i])) / 128);
      end
      expected += per_gtu;
      for (int p = 0; p < N_PMT; p++) begin
        @(negedge clk);
        pix_valid = 1;
        for (int l = 0; l < PIX_PER_PMT; l++) begin
          int c;
          c = poisson();
          if (c > 255) c = 255;
          pix[l] = PIX_W'(c);
          acc[p * PIX_PER_PMT + l] = (g % WIN_GTU == 0) ? c : acc[p * PIX_PER_PMT + l] + c;
        end
      end
    end
    @(negedge clk); pix_valid = 0;
    repeat (200) @(posedge clk);

    $display("active pixels: measured %0d, expected %0.1f (probability per pixel and GTU %0.4f %%)",
             n_active, expected, 100.0 * real'(n_active) / (real'(NPIX) * (N_GTU - WIN_GTU)));
    $display("fake triggers in %0d GTUs: EUSO-TA %0d, EUSO-SPB2 %0d", N_GTU - WIN_GTU, n_ta, n_spb2);
    checks++;
    if (n_res != N_GTU) begin failures++; $display("results %0d", n_res); end
    checks++;
    diff = real'(n_active) - expected;
    if (diff < 0.0) diff = -diff;
    if (diff > 5.0 * $sqrt(expected) + 1.0) begin
      failures++; $display("active-pixel count off by more than 5 sigma");
    end
    checks++;
    if (n_ta > 5 || n_spb2 > 5) begin failures++; $display("too many fake triggers"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
