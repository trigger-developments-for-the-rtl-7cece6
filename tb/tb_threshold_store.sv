// Testbench for threshold_store (4 rows x 4 lanes): checks that thresholds
// read as all ones before the first set, that a newly written set is not used
// until a frame starting a window is read, that the old set stays in force
// while the next one is written, and the swap pulse and one-clock read latency.
module tb_threshold_store;
  import euso_trig_pkg::*;
  localparam int unsigned NR = 4, NL = 4, RW = $clog2(NR);

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, rd_en = 0, rd_window_start = 0;
  logic [RW-1:0] wr_row = '0, rd_row = '0;
  logic [NL-1:0][S_W-1:0] wr_thr = '0, rd_thr;
  logic loaded, swap;
  int checks = 0, failures = 0, n_swap = 0;

  threshold_store #(.N_ROWS(NR), .LANES(NL)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && swap) n_swap++;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [S_W-1:0] val(int set, int r, int l);
    return S_W'(set * 100 + r * 10 + l);
  endfunction

  task automatic write_set(int set);
    for (int r = 0; r < NR; r++) begin
      @(negedge clk);
      wr_valid = 1; wr_row = RW'(r);
      for (int l = 0; l < NL; l++) wr_thr[l] = val(set, r, l);
    end
    @(negedge clk); wr_valid = 0;
  endtask

  // read a frame; expect set 'set', or all ones if set < 0
  task automatic read_frame(bit ws, int set);
    for (int r = 0; r < NR; r++) begin
      @(negedge clk);
      rd_en = 1; rd_row = RW'(r); rd_window_start = ws;
      @(negedge clk);
      rd_en = 0;
      for (int l = 0; l < NL; l++) begin
        checks++;
        if (rd_thr[l] != ((set < 0) ? '1 : val(set, r, l))) begin
          failures++; $display("frame ws=%0b set %0d row %0d lane %0d got %0d", ws, set, r, l, rd_thr[l]);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    read_frame(1, -1);           // nothing loaded: all ones
    write_set(1);
    read_frame(0, -1);           // pending, but not a window start
    checks++; if (loaded) begin failures++; $display("loaded too early"); end
    read_frame(1, 1);            // window start: set 1 taken
    checks++; if (!loaded) begin failures++; $display("not loaded"); end
    write_set(2);
    read_frame(0, 1);            // set 1 still in force
    read_frame(1, 2);            // set 2 taken
    read_frame(1, 2);            // nothing pending: stays
    checks++;
    if (n_swap != 2) begin failures++; $display("swaps %0d", n_swap); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
