// End-to-end testbench of euso_l1_trigger at its default (full) size: one
// PDM of 2304 pixels, 128-GTU windows, the paper's thresholds.
//
// Background counts are uniform in 0..3 (mean 1.5 counts/GTU, the paper's
// example, which gives S_pixel = 6) with rare noise hits. From the second
// window on, signals are injected: a bright MAPMT, a spot spread over one EC,
// a faint spread over the PDM, and a signal that persists on one MAPMT for a
// few GTUs. The testbench models the whole chain itself: 128-GTU sums,
// thresholds for the next window, active-pixel counts, the six EUSO-TA
// conditions, the SPB2 persistence rule, and the FIFO towards L2. It checks
// every GTU's results, their order and GTU number, a constant latency, the
// threshold swaps and every 128-GTU sum read from the L2 port. The L2 reader
// is held off for the first two windows so that the FIFO overflows once, and
// logic_sel is switched during the run.
//
// Mechanisms counted (each must happen): threshold update, each of the six TA
// causes, SPB2 trigger, L1 trigger from each logic, L2 overflow, an event
// stored (every stored event is read out and compared with the frames sent)
// and a trigger not stored (event being completed, or 4 events in the gate).
module tb_euso_l1_trigger;
  import euso_trig_pkg::*;

  localparam int N_WIN = 3;                       // windows simulated
  localparam int N_GTU = N_WIN * WIN_GTU + 2;     // plus two GTUs of the next
  localparam int NPIX  = N_PMT * PIX_PER_PMT;

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
  logic l2_valid, l2_ready = 0, l2_overflow, frame_overflow;
  row_t l2_row;
  pmt_sum_t l2_sum;
  logic ev_accepted, ev_rejected, ev_valid, ev_ready = 1, ev_last;
  logic [31:0] ev_trig_gtu, ev_gtu;
  row_t ev_row;
  pmt_pix_t ev_pix;

  euso_l1_trigger dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;

  initial begin
    repeat (40 * N_GTU * N_PMT) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  function automatic int isqrt_ref(int x);
    int r = 0;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  int  acc [NPIX];            // running 128-GTU sums
  int  thr [NPIX];            // thresholds in force for the current window
  int  thr_next [NPIX];
  bit  thr_ok = 0, thr_next_ok = 0;
  int  prev_pmt [N_PMT], prev_ec [N_EC], prev_pdm, run [N_PMT];

  typedef struct { int gtu; int last_cyc; logic [5:0] cause; logic [N_PMT-1:0] spb2; } res_t;
  res_t res_q[$];
  typedef struct { int win; int row; int sum [PIX_PER_PMT]; } l2_t;
  l2_t l2_q[$];              // rows the FIFO must deliver, in order
  l2_t l2_got[$];            // rows read from the L2 port
  int  n_l2_drop = 0;

  int v [N_PMT][PIX_PER_PMT];   // counts of the frame being sent
  byte unsigned hist_pix [N_GTU][N_PMT][PIX_PER_PMT];   // every frame sent

  // per-frame model of the frame in v
  task automatic model_frame(int g, int last_cyc);
    int cnt [N_PMT], ec [N_EC], pdm;
    logic [5:0] c;
    logic [N_PMT-1:0] s2;
    res_t r;
    // window start: take the thresholds computed from the previous window
    if (g % WIN_GTU == 0 && thr_next_ok) begin
      thr = thr_next; thr_ok = 1; thr_next_ok = 0;
    end
    for (int k = 0; k < N_EC; k++) ec[k] = 0;
    pdm = 0;
    for (int p = 0; p < N_PMT; p++) begin
      cnt[p] = 0;
      for (int l = 0; l < PIX_PER_PMT; l++)
        if (thr_ok && v[p][l] > thr[p * PIX_PER_PMT + l]) cnt[p]++;
      ec[((p / PMT_GRID) / 2) * EC_GRID + (p % PMT_GRID) / 2] += cnt[p];
      pdm += cnt[p];
    end
    c = '0; s2 = '0;
    for (int p = 0; p < N_PMT; p++) begin
      if (cnt[p] > ta_cfg.n_pmt1) c[C_PMT1] = 1;
      if (cnt[p] + prev_pmt[p] > ta_cfg.n_pmt2) c[C_PMT2] = 1;
      run[p] = (cnt[p] > spb2_cfg.n_pixel) ? run[p] + 1 : 0;
      s2[p] = run[p] >= spb2_cfg.n_gtu;
      prev_pmt[p] = cnt[p];
    end
    for (int k = 0; k < N_EC; k++) begin
      if (ec[k] > ta_cfg.n_ec1) c[C_EC1] = 1;
      if (ec[k] + prev_ec[k] > ta_cfg.n_ec2) c[C_EC2] = 1;
      prev_ec[k] = ec[k];
    end
    if (pdm > ta_cfg.n_pdm1) c[C_PDM1] = 1;
    if (pdm + prev_pdm > ta_cfg.n_pdm2) c[C_PDM2] = 1;
    prev_pdm = pdm;
    r.gtu = g; r.last_cyc = last_cyc; r.cause = c; r.spb2 = s2;
    res_q.push_back(r);
    // integration for the next window's thresholds and the L2 sums
    for (int p = 0; p < N_PMT; p++) begin
      l2_t e;
      for (int l = 0; l < PIX_PER_PMT; l++) begin
        int i;
        i = p * PIX_PER_PMT + l;
        acc[i] = (g % WIN_GTU == 0) ? v[p][l] : acc[i] + v[p][l];
        if (g % WIN_GTU == WIN_GTU - 1) thr_next[i] = (acc[i] + 32 * isqrt_ref(2 * acc[i])) / 128;
        e.sum[l] = acc[i];
      end
      if (g % WIN_GTU == WIN_GTU - 1) begin
        e.win = g / WIN_GTU; e.row = p;
        // the FIFO holds 64 rows; the reader is off until window 2 is done
        if (l2_q.size() < 64 || l2_ready) l2_q.push_back(e);  // (nothing read yet)
        else n_l2_drop++;
      end
    end
    if (g % WIN_GTU == WIN_GTU - 1) thr_next_ok = 1;
  endtask

  // ---------------- checkers ----------------
  int n_res = 0, n_thr_upd = 0, n_spb2 = 0, n_l1_ta = 0, n_l1_spb2 = 0, n_l2 = 0;
  int n_cause [6];
  int latency = -1;
  int n_ev_acc = 0, n_ev_rej = 0, n_ev_read = 0, ev_rows = 0;
  int ev_acc_q[$];

  always @(posedge clk) begin
    cyc++;
    if (rst_n && thr_update) n_thr_upd++;
    if (rst_n && res_valid) begin
      res_t r;
      n_res++;
      checks++;
      if (res_q.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        r = res_q.pop_front();
        if (latency < 0) latency = cyc - r.last_cyc;
        if (cyc - r.last_cyc != latency) begin
          failures++; $display("GTU %0d latency %0d, earlier %0d", r.gtu, cyc - r.last_cyc, latency);
        end
        if (l1_gtu != 32'(r.gtu) || ta_cause != r.cause || ta_trig != |r.cause
            || spb2_pmt != r.spb2 || spb2_trig != |r.spb2
            || l1_trig != (logic_sel ? |r.spb2 : |r.cause)) begin
          failures++;
          $display("GTU %0d (dut %0d): cause %b/%b spb2 %h/%h l1 %b", r.gtu, l1_gtu, ta_cause, r.cause,
                   spb2_pmt, r.spb2, l1_trig);
        end
        for (int i = 0; i < 6; i++) if (r.cause[i]) n_cause[i]++;
        if (|r.spb2) n_spb2++;
        if (l1_trig && !logic_sel) n_l1_ta++;
        if (l1_trig && logic_sel) n_l1_spb2++;
      end
    end
    if (rst_n && ev_accepted) begin n_ev_acc++; ev_acc_q.push_back(int'(l1_gtu)); end
    if (rst_n && ev_rejected) n_ev_rej++;
    if (rst_n && ev_valid && ev_ready) begin
      int k, g;
      k = ev_rows;
      checks++;
      if (ev_acc_q.size() == 0) begin failures++; $display("unexpected event row"); end
      else begin
        g = ev_acc_q[0];
        if (ev_trig_gtu != 32'(g) || ev_gtu != 32'(g - 63 + k / N_PMT) || ev_row != row_t'(k % N_PMT)
            || ev_last != (k == WIN_GTU * N_PMT - 1)) begin
          failures++; $display("event %0d row %0d: GTU %0d row %0d", g, k, ev_gtu, ev_row);
        end else
          for (int l = 0; l < PIX_PER_PMT; l++)
            if (ev_pix[l] != PIX_W'(hist_pix[g - 63 + k / N_PMT][k % N_PMT][l])) begin
              failures++; $display("event %0d row %0d lane %0d wrong", g, k, l);
              break;
            end
        ev_rows++;
        if (ev_last) begin ev_rows = 0; n_ev_read++; void'(ev_acc_q.pop_front()); end
      end
    end
    if (rst_n && l2_valid && l2_ready) begin
      l2_t e;
      e.win = -1; e.row = int'(l2_row);
      for (int l = 0; l < PIX_PER_PMT; l++) e.sum[l] = int'(l2_sum[l]);
      l2_got.push_back(e);
    end
  end

  // ---------------- stimulus ----------------

  task automatic make_frame(int g);
    int kind, p0, k0;
    for (int p = 0; p < N_PMT; p++)
      for (int l = 0; l < PIX_PER_PMT; l++)
        v[p][l] = ($urandom_range(999) == 0) ? $urandom_range(7, 12) : $urandom_range(3);
    if (g < WIN_GTU || g % 9 > 3) return;
    kind = (g / 9) % 5;
    p0 = $urandom_range(N_PMT - 1);
    k0 = $urandom_range(N_EC - 1);
    case (kind)
      0: for (int l = 0; l < 6 + g % 2; l++) v[p0][l * 9] = 25;          // bright MAPMT
      1: for (int d = 0; d < 4; d++)                                       // spot on one EC
           for (int l = 0; l < 2 + (g % 9) / 3; l++)
             v[((k0 / 3) * 2 + d / 2) * PMT_GRID + (k0 % 3) * 2 + d % 2][l] = 20;
      2: for (int p = 0; p < N_PMT; p += 2) v[p][g % 64] = 15;            // faint, PDM-wide
      3: for (int l = 0; l < 3; l++) v[(g / 9) % N_PMT][l] = 12;          // persists 4 GTUs
      default: ;
    endcase
  endtask

  initial begin
    for (int i = 0; i < 6; i++) n_cause[i] = 0;
    for (int p = 0; p < N_PMT; p++) begin prev_pmt[p] = 0; run[p] = 0; end
    for (int k = 0; k < N_EC; k++) prev_ec[k] = 0;
    prev_pdm = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < N_GTU; g++) begin
      if (g == WIN_GTU + WIN_GTU / 2) logic_sel = 1;
      if (g == 2 * WIN_GTU + 20) logic_sel = 0;
      if (g == 2 * WIN_GTU + 5) l2_ready = 1;
      make_frame(g);
      for (int p = 0; p < N_PMT; p++)
        for (int l = 0; l < PIX_PER_PMT; l++) hist_pix[g][p][l] = 8'(v[p][l]);
      for (int p = 0; p < N_PMT; p++) begin
        // gaps in the first window only; afterwards rows come back to back
        if (g < 20 && $urandom_range(3) == 0) begin @(negedge clk); pix_valid = 0; end
        @(negedge clk);
        pix_valid = 1;
        for (int l = 0; l < PIX_PER_PMT; l++) pix[l] = PIX_W'(v[p][l]);
      end
      model_frame(g, cyc + 1);
    end
    @(negedge clk); pix_valid = 0;
    repeat (20000) @(posedge clk);      // let stored events drain

    checks++;
    if (n_res != N_GTU || res_q.size() != 0) begin failures++; $display("results %0d of %0d", n_res, N_GTU); end
    checks++;
    if (n_thr_upd != N_WIN) begin failures++; $display("threshold updates %0d", n_thr_upd); end
    n_l2 = l2_got.size();
    for (int i = 0; i < n_l2 && i < l2_q.size(); i++) begin
      checks++;
      if (l2_got[i].row != l2_q[i].row || l2_got[i].sum != l2_q[i].sum) begin
        failures++; $display("L2 entry %0d: row %0d, expected window %0d row %0d", i, l2_got[i].row, l2_q[i].win, l2_q[i].row);
      end
    end
    checks++;
    if (n_l2 != N_WIN * N_PMT - n_l2_drop || !l2_overflow || n_l2_drop == 0) begin
      failures++; $display("L2 rows %0d, dropped %0d, overflow %0b", n_l2, n_l2_drop, l2_overflow);
    end
    checks++;
    // events whose last frame was sent must all have been read out
    while (ev_acc_q.size() > 0 && ev_acc_q[$] + 64 >= N_GTU) void'(ev_acc_q.pop_back());
    if (n_ev_acc == 0 || n_ev_rej == 0 || ev_acc_q.size() != 0) begin
      failures++; $display("events accepted %0d, rejected %0d, read %0d, missing %0d", n_ev_acc, n_ev_rej, n_ev_read, ev_acc_q.size());
    end
    checks++;
    if (frame_overflow) begin failures++; $display("frame buffer overflow"); end
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (n_cause[i] == 0) begin failures++; $display("TA cause %0d never occurred", i); end
    end
    checks++;
    if (n_spb2 == 0 || n_l1_ta == 0 || n_l1_spb2 == 0) begin failures++; $display("a trigger path never fired"); end
    $display("latency %0d clocks; threshold updates %0d; TA causes %0d %0d %0d %0d %0d %0d; SPB2 %0d; L1 (TA) %0d, L1 (SPB2) %0d; L2 rows %0d, dropped %0d; events accepted %0d, rejected %0d, read %0d",
             latency, n_thr_upd, n_cause[0], n_cause[1], n_cause[2], n_cause[3], n_cause[4], n_cause[5],
             n_spb2, n_l1_ta, n_l1_spb2, n_l2, n_l2_drop, n_ev_acc, n_ev_rej, n_ev_read);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
