// Testbench for pixel_comparator at full width (64 lanes): random counts and
// thresholds near each other, including equal values (not active: the test is
// strictly greater) and the all-ones "no threshold" value. The reference
// count is formed independently per lane; the latency is one clock.
module tb_pixel_comparator;
  import euso_trig_pkg::*;
  localparam int unsigned NL = 64, NR = 36, RW = $clog2(NR), CW = $clog2(NL + 1);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [RW-1:0] in_row = '0;
  logic [NL-1:0][PIX_W-1:0] in_pix = '0;
  logic [NL-1:0][S_W-1:0] in_thr = '0;
  logic out_valid;
  logic [RW-1:0] out_row;
  logic [CW-1:0] out_count;
  logic [NL-1:0] out_active;
  int checks = 0, failures = 0;

  pixel_comparator #(.LANES(NL), .N_ROWS(NR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int exp_n;
      logic [NL-1:0] exp_a;
      exp_n = 0;
      for (int l = 0; l < NL; l++) begin
        int p, s;
        p = $urandom_range(20);
        case ($urandom_range(3))
          0: s = p;                                   // equal: not active
          1: s = (p > 0) ? p - 1 : 0;                 // one below
          2: s = (t == 7) ? 1023 : p + 1;             // above / no threshold
          default: s = (t < 3) ? 0 : $urandom_range(20);
        endcase
        if (t == 5) begin p = 64 - l; s = 0; end      // all active
        in_pix[l] = PIX_W'(p); in_thr[l] = S_W'(s);
        exp_a[l] = p > s;
        exp_n += (p > s) ? 1 : 0;
      end
      @(negedge clk); in_valid = 1; in_row = RW'(t % NR);
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid || out_row != RW'(t % NR) || out_count != CW'(exp_n) || out_active != exp_a) begin
        failures++; $display("t=%0d count %0d expected %0d", t, out_count, exp_n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
