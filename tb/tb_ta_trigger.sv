// Testbench for ta_trigger with the paper's thresholds (5/6 MAPMT, 7/9 EC,
// 15/20 PDM). Each GTU gets 36 PMT_VALUEs, one per clock, drawn from patterns
// that exercise each of the six conditions (a bright MAPMT, a spread over one
// EC, a faint spread over the PDM, each as one- and two-GTU signals). The
// reference maps every MAPMT to its EC from its grid position and keeps the
// previous GTU's values itself. Checks trig/cause and that the result comes
// two clocks after the 36th value; every cause must occur at least once.
module tb_ta_trigger;
  import euso_trig_pkg::*;

  logic clk = 0, rst_n = 0;
  logic pmt_valid = 0;
  row_t pmt_row = '0;
  pmt_cnt_t pmt_count = '0;
  ta_cfg_t cfg = TA_CFG_DEFAULT;
  logic trig_valid, trig;
  logic [5:0] cause;
  int checks = 0, failures = 0, cyc = 0, n_res = 0;
  int n_cause [6];

  ta_trigger dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int cyc; logic [5:0] cause; } exp_t;
  exp_t exp_q[$];

  always @(posedge clk) begin
    cyc++;
    if (rst_n && trig_valid) begin
      exp_t e;
      n_res++;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        e = exp_q.pop_front();
        if (cyc != e.cyc || cause != e.cause || trig != |e.cause) begin
          failures++; $display("cycle %0d/%0d cause %b expected %b", cyc, e.cyc, cause, e.cause);
        end
        for (int i = 0; i < 6; i++) if (e.cause[i]) n_cause[i]++;
      end
    end
  end

  initial begin
    int v [N_PMT], pv [N_PMT], ec [N_EC], pec [N_EC], pdm, ppdm;
    for (int i = 0; i < 6; i++) n_cause[i] = 0;
    for (int p = 0; p < N_PMT; p++) pv[p] = 0;
    for (int k = 0; k < N_EC; k++) pec[k] = 0;
    ppdm = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 400; g++) begin
      int kind, tgt;
      logic [5:0] c;
      kind = $urandom_range(5);
      tgt  = $urandom_range(N_PMT - 1);
      for (int p = 0; p < N_PMT; p++) v[p] = ($urandom_range(15) == 0) ? 1 : 0;
      case (kind)
        0: v[tgt] = $urandom_range(2, 7);                       // one bright MAPMT
        1: begin                                                // spread over the EC of tgt
             int r0, c0;
             r0 = (tgt / 6) & ~1; c0 = (tgt % 6) & ~1;
             for (int d = 0; d < 4; d++) v[(r0 + d / 2) * 6 + c0 + d % 2] = $urandom_range(1, 3);
           end
        2: for (int p = 0; p < N_PMT; p++) v[p] = $urandom_range(1);  // faint, PDM-wide
        default: ;
      endcase
      // reference sums
      for (int k = 0; k < N_EC; k++) ec[k] = 0;
      pdm = 0;
      for (int p = 0; p < N_PMT; p++) begin
        ec[((p / 6) / 2) * 3 + (p % 6) / 2] += v[p];
        pdm += v[p];
      end
      c = '0;
      for (int p = 0; p < N_PMT; p++) begin
        if (v[p] > 5) c[0] = 1;
        if (v[p] + pv[p] > 6) c[1] = 1;
      end
      for (int k = 0; k < N_EC; k++) begin
        if (ec[k] > 7) c[2] = 1;
        if (ec[k] + pec[k] > 9) c[3] = 1;
      end
      if (pdm > 15) c[4] = 1;
      if (pdm + ppdm > 20) c[5] = 1;
      pv = v; pec = ec; ppdm = pdm;
      for (int p = 0; p < N_PMT; p++) begin
        if ($urandom_range(4) == 0) begin @(negedge clk); pmt_valid = 0; end
        @(negedge clk);
        pmt_valid = 1; pmt_row = row_t'(p); pmt_count = pmt_cnt_t'(v[p]);
        if (p == N_PMT - 1) begin
          exp_t e;
          // 36th value taken at cyc+1, result registered two edges later,
          // seen by the checker at the edge after
          e.cyc = cyc + 3; e.cause = c;
          exp_q.push_back(e);
        end
      end
      @(negedge clk); pmt_valid = 0;
    end
    repeat (5) @(posedge clk);
    checks++;
    if (n_res != 400) begin failures++; $display("results %0d", n_res); end
    for (int i = 0; i < 6; i++) begin
      checks++;
      $display("cause %0d seen %0d times", i, n_cause[i]);
      if (n_cause[i] == 0) begin failures++; $display("cause %0d never occurred", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
