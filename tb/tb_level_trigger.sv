// Testbench for level_trigger with 9 cells of 9 bits (the EC level) and the
// paper's EC thresholds n1 = 7, n2 = 9. Random values around the thresholds,
// including values equal to them (no trigger: "more than"), are checked
// against a reference that keeps its own copy of the previous GTU. Gaps
// between GTUs must not disturb the 2-GTU sum.
module tb_level_trigger;
  localparam int unsigned NC = 9, VW = 9;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [NC-1:0][VW-1:0] in_val = '0;
  logic [VW-1:0] n1 = 7;
  logic [VW:0]   n2 = 9;
  logic out_valid, any1, any2;
  logic [NC-1:0] trig1, trig2;
  int checks = 0, failures = 0, n_t1 = 0, n_t2 = 0;

  level_trigger #(.N_CELLS(NC), .VAL_W(VW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev [NC];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NC; c++) prev[c] = 0;
    for (int t = 0; t < 300; t++) begin
      logic [NC-1:0] e1, e2;
      int v [NC];
      for (int c = 0; c < NC; c++) begin
        v[c] = (t == 0) ? 8 : $urandom_range(9) * (($urandom_range(3) == 0) ? 1 : 0) + $urandom_range(1);
        if (t == 1) v[c] = (c == 0) ? 2 : 0;      // 8 + 2 = 10 > 9 only via the 2-GTU sum
        in_val[c] = VW'(v[c]);
        e1[c] = v[c] > 7;
        e2[c] = v[c] + prev[c] > 9;
        prev[c] = v[c];
      end
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      repeat ($urandom_range(2)) @(negedge clk);
      checks++;
      if (trig1 != e1 || trig2 != e2 || any1 != |e1 || any2 != |e2) begin
        failures++; $display("t=%0d trig1 %b/%b trig2 %b/%b", t, trig1, e1, trig2, e2);
      end
      n_t1 += (|e1) ? 1 : 0;
      n_t2 += (|e2) ? 1 : 0;
    end
    checks++;
    if (n_t1 == 0 || n_t2 == 0) begin failures++; $display("conditions not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // out_valid must follow in_valid by exactly one clock
  logic in_valid_q = 0;
  always @(posedge clk) begin
    in_valid_q <= in_valid;
    if (rst_n) begin
      checks++;
      if (out_valid != in_valid_q) begin failures++; $display("out_valid timing"); end
    end
  end
endmodule
