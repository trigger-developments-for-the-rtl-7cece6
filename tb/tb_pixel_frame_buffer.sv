// Testbench for pixel_frame_buffer (4 rows x 4 lanes): writes frames of
// random rows, with random gaps and also back to back, and checks that every
// frame is read out complete, in order, with its window-start tag, starting
// two clocks after its last row is written (one clock to register the frame
// as complete, one for the memory read), and that no overflow is flagged.
module tb_pixel_frame_buffer;
  localparam int unsigned NR = 4, NL = 4, PW = 8, RW = $clog2(NR);

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_window_start = 0;
  logic [RW-1:0] wr_row = '0;
  logic [NL-1:0][PW-1:0] wr_pix = '0;
  logic rd_addr_valid, rd_addr_window_start, rd_valid, overflow;
  logic [RW-1:0] rd_addr_row, rd_row;
  logic [NL-1:0][PW-1:0] rd_pix;
  int checks = 0, failures = 0, cyc = 0, n_rows = 0;

  pixel_frame_buffer #(.N_ROWS(NR), .LANES(NL), .PIX_W(PW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic [NL-1:0][PW-1:0] pix; int row; bit ws; } row_t;
  row_t exp_q[$];
  int   first_rd_cyc[$];     // earliest cycle the first row of each frame may show

  always @(posedge clk) begin
    cyc++;
    if (rst_n && rd_valid) begin
      row_t e;
      checks++;
      n_rows++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected row");
      end else begin
        e = exp_q.pop_front();
        if (rd_pix != e.pix || rd_row != RW'(e.row)) begin
          failures++; $display("row %0d mismatch (got row %0d)", e.row, rd_row);
        end
        if (rd_row == '0) begin
          int c;
          c = first_rd_cyc.pop_front();
          checks++;
          if (cyc != c) begin failures++; $display("frame read at cycle %0d, expected %0d", cyc, c); end
        end
      end
    end
    if (rst_n && rd_addr_valid && rd_addr_row == '0) begin
      checks++;
      if (rd_addr_window_start != exp_q[0].ws) begin failures++; $display("tag wrong"); end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 20; f++) begin
      for (int r = 0; r < NR; r++) begin
        row_t e;
        if (f < 10) while ($urandom_range(2) == 0) begin @(negedge clk); wr_valid = 0; end
        @(negedge clk);
        wr_valid = 1; wr_row = RW'(r); wr_window_start = (f % 3 == 0);
        for (int l = 0; l < NL; l++) wr_pix[l] = PW'($urandom);
        e.pix = wr_pix; e.row = r; e.ws = wr_window_start;
        exp_q.push_back(e);
        // last row taken at cyc+1; read of row 0 registered two edges later and
        // seen by the checker one edge after that -- unless the previous frame
        // is still being read, in which case it follows that read directly
        if (r == NR - 1) first_rd_cyc.push_back(cyc + 4);
      end
    end
    @(negedge clk); wr_valid = 0;
    repeat (3 * NR) @(posedge clk);
    checks++;
    if (n_rows != 20 * NR || exp_q.size() != 0) begin failures++; $display("rows read %0d", n_rows); end
    checks++;
    if (overflow) begin failures++; $display("overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
