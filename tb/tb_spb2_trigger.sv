// Testbench for spb2_trigger with the paper's values n_pixel = 2, N_GTU = 2,
// and with N_GTU = 3 in a second phase. Each GTU gets 36 PMT_VALUEs; a few
// MAPMTs carry persistent signals of random length. The reference keeps its
// own run length per MAPMT. Checks the per-MAPMT trigger map, the PDM trigger
// and that the result comes one clock after the 36th value. A single active
// GTU must never trigger with N_GTU = 2.
module tb_spb2_trigger;
  import euso_trig_pkg::*;

  logic clk = 0, rst_n = 0;
  logic pmt_valid = 0;
  row_t pmt_row = '0;
  pmt_cnt_t pmt_count = '0;
  spb2_cfg_t cfg = SPB2_CFG_DEFAULT;
  logic trig_valid, trig;
  logic [N_PMT-1:0] pmt_trig;
  int checks = 0, failures = 0, cyc = 0, n_res = 0, n_trig = 0, n_single = 0;

  spb2_trigger dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int cyc; logic [N_PMT-1:0] map; } exp_t;
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
        if (cyc != e.cyc || pmt_trig != e.map || trig != |e.map) begin
          failures++; $display("cycle %0d/%0d map %h expected %h", cyc, e.cyc, pmt_trig, e.map);
        end
        if (|e.map) n_trig++;
      end
    end
  end

  initial begin
    int run [N_PMT], left [N_PMT];
    for (int p = 0; p < N_PMT; p++) begin run[p] = 0; left[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 600; g++) begin
      logic [N_PMT-1:0] map;
      int ngtu;
      if (g == 300) begin
        // phase 2: require 3 consecutive GTUs; counters continue
        @(negedge clk); cfg.n_gtu = 3;
      end
      ngtu = cfg.n_gtu;
      map = '0;
      for (int p = 0; p < N_PMT; p++) begin
        int v;
        if (left[p] == 0 && $urandom_range(40) == 0) left[p] = $urandom_range(1, 4);
        v = (left[p] > 0) ? $urandom_range(3, 10) : $urandom_range(2);   // 0..2 never active
        if (left[p] > 0) left[p]--;
        run[p] = (v > 2) ? run[p] + 1 : 0;
        map[p] = (v > 2) && run[p] >= ngtu;
        if (run[p] == 1 && left[p] == 0) n_single++;
        if ($urandom_range(5) == 0) begin @(negedge clk); pmt_valid = 0; end
        @(negedge clk);
        pmt_valid = 1; pmt_row = row_t'(p); pmt_count = pmt_cnt_t'(v);
      end
      begin
        exp_t e;
        e.cyc = cyc + 2; e.map = map;
        exp_q.push_back(e);
      end
      @(negedge clk); pmt_valid = 0;
    end
    repeat (5) @(posedge clk);
    checks++;
    if (n_res != 600 || n_trig == 0 || n_single == 0) begin
      failures++; $display("results %0d triggers %0d single-GTU signals %0d", n_res, n_trig, n_single);
    end
    $display("triggers %0d, single-GTU signals %0d", n_trig, n_single);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
