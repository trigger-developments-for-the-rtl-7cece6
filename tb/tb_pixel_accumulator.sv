// Testbench for pixel_accumulator: streams random pixel rows over three
// windows (small geometry: 4 rows x 4 lanes, 8-GTU window) and compares every
// emitted sum with a reference total kept in the testbench. Checks that sums
// appear only in the last GTU of a window, one clock after their row.
module tb_pixel_accumulator;
  localparam int unsigned NR = 4, NL = 4, PW = 8, WG = 8;
  localparam int unsigned GW = $clog2(WG), SW = PW + GW, RW = $clog2(NR);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [RW-1:0] in_row = '0;
  logic [GW-1:0] in_gtu = '0;
  logic [NL-1:0][PW-1:0] in_pix = '0;
  logic out_valid;
  logic [RW-1:0] out_row;
  logic [NL-1:0][SW-1:0] out_sum;
  int checks = 0, failures = 0, n_out = 0;
  int unsigned ref_sum [NR][NL];

  pixel_accumulator #(.N_ROWS(NR), .LANES(NL), .PIX_W(PW), .WIN_GTU(WG)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard: expected rows with the cycle they must appear in
  typedef struct { int cyc; int row; int unsigned sum [NL]; } exp_t;
  exp_t exp_q[$];
  int cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      checks++;
      n_out++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output at cycle %0d", cyc);
      end else begin
        exp_t e;
        e = exp_q.pop_front();
        if (e.cyc != cyc || out_row != RW'(e.row)) begin
          failures++; $display("row %0d at cycle %0d, expected row %0d at %0d", out_row, cyc, e.row, e.cyc);
        end
        for (int l = 0; l < NL; l++) begin
          checks++;
          if (out_sum[l] != SW'(e.sum[l])) begin
            failures++; $display("sum mismatch row %0d lane %0d got %0d exp %0d", e.row, l, out_sum[l], e.sum[l]);
          end
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 3; w++) begin
      for (int r = 0; r < NR; r++) for (int l = 0; l < NL; l++) ref_sum[r][l] = 0;
      for (int g = 0; g < WG; g++) begin
        for (int r = 0; r < NR; r++) begin
          // random gaps between rows
          while ($urandom_range(3) == 0) begin
            @(negedge clk); in_valid = 0;
          end
          @(negedge clk);
          in_valid = 1; in_row = RW'(r); in_gtu = GW'(g);
          for (int l = 0; l < NL; l++) begin
            in_pix[l] = (w == 1) ? 8'hFF : PW'($urandom_range(255));
            ref_sum[r][l] += in_pix[l];
          end
          if (g == WG - 1) begin
            exp_t e;
            // registered at the edge that takes the row (cyc+1), seen by the
            // checker at the edge after that
            e.cyc = cyc + 2;
            e.row = r;
            for (int l = 0; l < NL; l++) e.sum[l] = ref_sum[r][l];
            exp_q.push_back(e);
          end
        end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (n_out != 3 * NR) begin failures++; $display("expected %0d sum rows, saw %0d", 3 * NR, n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
