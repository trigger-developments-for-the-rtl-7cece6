// One level (MAPMT, EC or PDM) of the EUSO-TA trigger.
//
// For each GTU the module receives the N_CELLS values of its level (active
// pixels per MAPMT, per EC or in the whole PDM). It keeps the previous GTU's
// values (the "x2 GTU" matrix of the paper's scheme), forms the 2-GTU sum per
// cell, and flags a cell when its single-GTU value is greater than n1 or its
// 2-GTU sum is greater than n2. any1/any2 are the ORs over the cells, i.e. the
// level's TRIGGER1 and TRIGGER2. Results are registered: out_valid follows
// in_valid by one clock. After reset the previous GTU counts as zero.
module level_trigger #(
  parameter int unsigned N_CELLS = 36,
  parameter int unsigned VAL_W   = 7
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [N_CELLS-1:0][VAL_W-1:0] in_val,
  input  logic [VAL_W-1:0]              n1,
  input  logic [VAL_W:0]                n2,
  output logic                          out_valid,
  output logic [N_CELLS-1:0]            trig1,
  output logic [N_CELLS-1:0]            trig2,
  output logic                          any1,
  output logic                          any2
);

  logic [N_CELLS-1:0][VAL_W-1:0] prev;      // values of the previous GTU
  logic [N_CELLS-1:0][VAL_W:0]   sum2;
  logic [N_CELLS-1:0]            t1, t2;

  always_comb begin
    for (int c = 0; c < N_CELLS; c++) begin
      sum2[c] = (VAL_W+1)'(in_val[c]) + (VAL_W+1)'(prev[c]);
      t1[c]   = in_val[c] > n1;
      t2[c]   = sum2[c] > n2;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev      <= '0;
      out_valid <= 1'b0;
      trig1     <= '0;
      trig2     <= '0;
      any1      <= 1'b0;
      any2      <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        prev  <= in_val;
        trig1 <= t1;
        trig2 <= t2;
        any1  <= |t1;
        any2  <= |t2;
      end
    end
  end

endmodule
