// Testbench for sum_fifo (16 bits x 8 entries): pushes bursts of 36 rows, as
// the accumulator does at the end of a window, with a reader that accepts at
// random. Checks order and contents against a reference queue, the level, and
// that a burst into a slow reader overflows: the extra rows are dropped and
// the sticky flag is raised. Counts the overflow events.
module tb_sum_fifo;
  localparam int unsigned W = 16, D = 8, AW = $clog2(D);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_ready = 0;
  logic [W-1:0] in_data = '0;
  logic out_valid, overflow;
  logic [W-1:0] out_data;
  logic [AW:0] level;
  int checks = 0, failures = 0, n_pop = 0, n_drop = 0;
  logic [W-1:0] ref_q[$];

  sum_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model, updated at each edge from the values driven before it
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (level != (AW+1)'(ref_q.size()) || out_valid != (ref_q.size() != 0)) begin
        failures++; $display("level %0d expected %0d", level, ref_q.size());
      end
      if (out_valid && out_ready) begin
        checks++;
        n_pop++;
        if (out_data != ref_q[0]) begin failures++; $display("data %h expected %h", out_data, ref_q[0]); end
        void'(ref_q.pop_front());
      end
      if (in_valid) begin
        if (ref_q.size() < D) ref_q.push_back(in_data);
        else n_drop++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 6; b++) begin
      for (int r = 0; r < 36; r++) begin
        @(negedge clk);
        in_valid = ($urandom_range(7) != 0); in_data = W'($urandom);
        out_ready = (b < 3) ? 1'b1 : ($urandom_range(3) == 0);
      end
      @(negedge clk); in_valid = 0; out_ready = 1;
      repeat (D + 2) @(negedge clk);
      checks++;
      if (overflow != (n_drop > 0)) begin failures++; $display("overflow flag %0b drops %0d", overflow, n_drop); end
    end
    checks++;
    if (n_drop == 0 || n_pop == 0) begin failures++; $display("no overflow exercised"); end
    $display("pops %0d drops %0d", n_pop, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
