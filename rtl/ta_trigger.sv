// EUSO-TA L1 trigger logic for one PDM.
//
// PMT_VALUE (active pixels per MAPMT) arrives one MAPMT per clock. When the
// 36th value of a GTU has arrived, the 6x6 MAPMT matrix is complete; it is
// summed into the 3x3 EC matrix (each EC is a 2x2 block of MAPMTs) and the EC
// values into the PDM value. Three level_trigger instances then test, for
// MAPMT, EC and PDM level, "more than n1 active pixels in one GTU" and "more
// than n2 active pixels over 2 consecutive GTUs". A trigger is issued when any
// of the six conditions holds; cause says which (bit order of ta_cause_e).
//
// The thresholds are run-time inputs (cfg); TA_CFG_DEFAULT holds the paper's
// values 5/6 (MAPMT), 7/9 (EC), 15/20 (PDM). EC and PDM values count active
// pixels, as the paper's text states. Timing: trig_valid pulses two clocks
// after the last MAPMT of a GTU, once per GTU.
module ta_trigger
  import euso_trig_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 pmt_valid,
  input  row_t                 pmt_row,
  input  pmt_cnt_t             pmt_count,
  input  ta_cfg_t              cfg,
  output logic                 trig_valid,
  output logic                 trig,
  output logic [5:0]           cause
);

  pmt_cnt_t                          pmt_val [N_PMT];
  logic                              frame_valid;
  logic [N_PMT-1:0][PMT_CNT_W-1:0]   pmt_mat;
  logic [N_EC-1:0][EC_CNT_W-1:0]     ec_mat;
  logic [0:0][PDM_CNT_W-1:0]         pdm_val;

  always_ff @(posedge clk) begin
    if (pmt_valid) pmt_val[pmt_row] <= pmt_count;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) frame_valid <= 1'b0;
    else        frame_valid <= pmt_valid && pmt_row == row_t'(N_PMT - 1);
  end

  // MAPMT p sits at grid row p / 6, column p % 6; EC k covers grid rows
  // 2*(k/3)..2*(k/3)+1 and columns 2*(k%3)..2*(k%3)+1.
  always_comb begin
    pdm_val[0] = '0;
    for (int p = 0; p < N_PMT; p++) pmt_mat[p] = pmt_val[p];
    for (int k = 0; k < N_EC; k++) begin
      ec_mat[k] = '0;
      for (int dr = 0; dr < 2; dr++)
        for (int dc = 0; dc < 2; dc++)
          ec_mat[k] = ec_mat[k] + EC_CNT_W'(pmt_val[(2*(k/EC_GRID) + dr) * PMT_GRID + 2*(k%EC_GRID) + dc]);
      pdm_val[0] = pdm_val[0] + PDM_CNT_W'(ec_mat[k]);
    end
  end

  logic                v_pmt, v_ec, v_pdm;
  logic [5:0]          any;

  level_trigger #(.N_CELLS(N_PMT), .VAL_W(PMT_CNT_W)) u_pmt (
    .clk, .rst_n, .in_valid(frame_valid), .in_val(pmt_mat), .n1(cfg.n_pmt1), .n2(cfg.n_pmt2),
    .out_valid(v_pmt), .trig1(), .trig2(), .any1(any[C_PMT1]), .any2(any[C_PMT2]));

  level_trigger #(.N_CELLS(N_EC), .VAL_W(EC_CNT_W)) u_ec (
    .clk, .rst_n, .in_valid(frame_valid), .in_val(ec_mat), .n1(cfg.n_ec1), .n2(cfg.n_ec2),
    .out_valid(v_ec), .trig1(), .trig2(), .any1(any[C_EC1]), .any2(any[C_EC2]));

  level_trigger #(.N_CELLS(1), .VAL_W(PDM_CNT_W)) u_pdm (
    .clk, .rst_n, .in_valid(frame_valid), .in_val(pdm_val), .n1(cfg.n_pdm1), .n2(cfg.n_pdm2),
    .out_valid(v_pdm), .trig1(), .trig2(), .any1(any[C_PDM1]), .any2(any[C_PDM2]));

  assign trig_valid = v_pmt;
  assign cause      = trig_valid ? any : '0;
  assign trig       = |cause;

  // The three levels see the same frames, so their results stay aligned.
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n) v_pmt == v_ec && v_ec == v_pdm);

endmodule
