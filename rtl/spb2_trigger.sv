// EUSO-SPB2 L1 trigger logic for one PDM.
//
// A MAPMT is active in a GTU when more than cfg.n_pixel of its pixels are
// above threshold. Each MAPMT has a saturating counter of consecutive active
// GTUs, cleared by an inactive GTU. A MAPMT triggers when it is active and its
// counter (including this GTU) reaches cfg.n_gtu; the PDM trigger is the OR
// over the MAPMTs, whose triggering set is given in pmt_trig. The paper's
// values are n_pixel = 2 and N_GTU = 2 (SPB2_CFG_DEFAULT).
//
// PMT_VALUE arrives one MAPMT per clock; the MAPMT flags are collected during
// the GTU and trig_valid pulses one clock after the 36th MAPMT, once per GTU.
// Counters reset to zero.
module spb2_trigger
  import euso_trig_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pmt_valid,
  input  row_t             pmt_row,
  input  pmt_cnt_t         pmt_count,
  input  spb2_cfg_t        cfg,
  output logic             trig_valid,
  output logic             trig,
  output logic [N_PMT-1:0] pmt_trig
);

  logic [3:0]       run [N_PMT];     // consecutive active GTUs, saturating
  logic [N_PMT-1:0] hit;             // MAPMT flags of the GTU being collected
  logic             active;
  logic [3:0]       run_next;

  assign active   = pmt_count > cfg.n_pixel;
  assign run_next = !active ? 4'd0 : (run[pmt_row] == 4'hF ? 4'hF : run[pmt_row] + 4'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < N_PMT; p++) run[p] <= '0;
      hit        <= '0;
      trig_valid <= 1'b0;
      trig       <= 1'b0;
      pmt_trig   <= '0;
    end else begin
      trig_valid <= 1'b0;
      if (pmt_valid) begin
        run[pmt_row] <= run_next;
        hit[pmt_row] <= active && run_next >= cfg.n_gtu;
        if (pmt_row == row_t'(N_PMT - 1)) begin
          trig_valid <= 1'b1;
          pmt_trig   <= {active && run_next >= cfg.n_gtu, hit[N_PMT-2:0]};
          trig       <= (active && run_next >= cfg.n_gtu) || |hit[N_PMT-2:0];
        end
      end
    end
  end

endmodule
