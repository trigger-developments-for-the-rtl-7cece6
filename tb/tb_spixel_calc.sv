// Testbench for spixel_calc: checks the threshold against a reference that
// finds the square root by upward search, on corner values (0, the paper's
// example SUM = 192 -> S_pixel = 6, the largest sum) and on random sums, with
// N_SIGMA = 4. Checks the one-clock latency.
module tb_spixel_calc;
  import euso_trig_pkg::*;
  localparam int unsigned NL = 64, NR = 36, RW = $clog2(NR);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [RW-1:0] in_row = '0;
  logic [NL-1:0][SUM_W-1:0] in_sum = '0;
  logic out_valid;
  logic [RW-1:0] out_row;
  logic [NL-1:0][S_W-1:0] out_thr;
  int checks = 0, failures = 0;

  spixel_calc #(.LANES(NL), .N_SIGMA(4), .N_ROWS(NR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // floor(sqrt(x)) by upward search
  function automatic int unsigned ref_sqrt(int unsigned x);
    int unsigned r = 0;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  function automatic int unsigned ref_thr(int unsigned sum);
    return (sum + 32 * ref_sqrt(2 * sum)) / 128;
  endfunction

  initial begin
    int unsigned sums [NL];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      for (int l = 0; l < NL; l++) begin
        if (t == 0) sums[l] = (l == 0) ? 0 : (l == 1) ? 192 : (l == 2) ? 32640 : l;
        else        sums[l] = $urandom_range(32767);
        in_sum[l] = SUM_W'(sums[l]);
      end
      @(negedge clk);
      in_valid = 1; in_row = RW'(t % NR);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_row != RW'(t % NR)) begin failures++; $display("latency/row wrong"); end
      for (int l = 0; l < NL; l++) begin
        checks++;
        if (out_thr[l] != S_W'(ref_thr(sums[l]))) begin
          failures++; $display("sum %0d: thr %0d expected %0d", sums[l], out_thr[l], ref_thr(sums[l]));
        end
      end
      if (t == 0) begin
        // the paper's example: mean 1.5 counts/GTU gives threshold 6, i.e.
        // a pixel is active from 7 counts
        checks++;
        if (out_thr[1] != 6) begin failures++; $display("paper example gives %0d", out_thr[1]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
