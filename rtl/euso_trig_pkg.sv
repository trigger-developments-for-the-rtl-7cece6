// Shared constants, types and arithmetic of the EUSO L1 trigger.
//
// The focal surface (PDM) is a 6x6 grid of 64-pixel MAPMTs (2304 pixels),
// grouped in 3x3 elementary cells (ECs) of 2x2 MAPMTs. Pixel counts arrive
// one MAPMT (one "row" of 64 pixels) per clock; a GTU (gate time unit) is the
// 36 rows of one frame. The geometry and the 128-GTU threshold window follow
// the paper; the 8-bit pixel count is this design's choice.
//
// spixel() is the adaptive threshold S = (SUM + 8*nsigma*isqrt(2*SUM)) / 128,
// i.e. lambda + nsigma*sqrt(lambda) with lambda = SUM/128. For nsigma = 4 this
// is the paper's (SUM + 32*sqrt(2*SUM))/128. Square root and division truncate.
package euso_trig_pkg;

  localparam int unsigned PMT_GRID    = 6;                       // MAPMTs per PDM side
  localparam int unsigned N_PMT       = PMT_GRID * PMT_GRID;     // 36
  localparam int unsigned PIX_PER_PMT = 64;                      // 8x8 anodes
  localparam int unsigned EC_GRID     = 3;                       // ECs per PDM side
  localparam int unsigned N_EC        = EC_GRID * EC_GRID;       // 9
  localparam int unsigned WIN_GTU     = 128;                     // threshold window
  localparam int unsigned WIN_LOG2    = $clog2(WIN_GTU);         // 7

  localparam int unsigned PIX_W     = 8;                         // counts per pixel per GTU
  localparam int unsigned SUM_W     = PIX_W + WIN_LOG2;          // 15
  localparam int unsigned S_W       = PIX_W + 2;                 // threshold width
  localparam int unsigned ROW_W     = $clog2(N_PMT);             // 6
  localparam int unsigned PMT_CNT_W = $clog2(PIX_PER_PMT + 1);   // 7: 0..64
  localparam int unsigned EC_CNT_W  = PMT_CNT_W + 2;             // 9: 0..256
  localparam int unsigned PDM_CNT_W = EC_CNT_W + 4;              // 13: 0..2304

  typedef logic [PIX_W-1:0]                      pix_t;
  typedef logic [PIX_PER_PMT-1:0][PIX_W-1:0]     pmt_pix_t;
  typedef logic [PIX_PER_PMT-1:0][SUM_W-1:0]     pmt_sum_t;
  typedef logic [PIX_PER_PMT-1:0][S_W-1:0]       pmt_thr_t;
  typedef logic [ROW_W-1:0]                      row_t;
  typedef logic [PMT_CNT_W-1:0]                  pmt_cnt_t;

  // EUSO-TA thresholds; 2-GTU thresholds are one bit wider than 1-GTU ones.
  typedef struct packed {
    logic [PMT_CNT_W-1:0] n_pmt1;
    logic [PMT_CNT_W:0]   n_pmt2;
    logic [EC_CNT_W-1:0]  n_ec1;
    logic [EC_CNT_W:0]    n_ec2;
    logic [PDM_CNT_W-1:0] n_pdm1;
    logic [PDM_CNT_W:0]   n_pdm2;
  } ta_cfg_t;

  // EUSO-SPB2 thresholds.
  typedef struct packed {
    logic [PMT_CNT_W-1:0] n_pixel;
    logic [3:0]           n_gtu;
  } spb2_cfg_t;

  // Order of the TA trigger-cause bits.
  typedef enum logic [2:0] {
    C_PMT1 = 3'd0, C_PMT2 = 3'd1, C_EC1 = 3'd2, C_EC2 = 3'd3, C_PDM1 = 3'd4, C_PDM2 = 3'd5
  } ta_cause_e;

  // Values the paper gives as the best trade-off.
  localparam ta_cfg_t TA_CFG_DEFAULT = '{
    n_pmt1: 5, n_pmt2: 6, n_ec1: 7, n_ec2: 9, n_pdm1: 15, n_pdm2: 20 };
  localparam spb2_cfg_t SPB2_CFG_DEFAULT = '{ n_pixel: 2, n_gtu: 2 };

  // Integer square root (floor) of a (SUM_W+1)-bit value by the restoring
  // digit-by-digit method, one result bit per step.
  function automatic logic [(SUM_W+1)/2:0] isqrt(input logic [SUM_W:0] x);
    logic [SUM_W+2:0] rem;
    logic [SUM_W+2:0] root;
    logic [SUM_W+2:0] trial;
    rem  = '0;
    root = '0;
    for (int i = (SUM_W+1)/2; i >= 0; i--) begin
      rem   = (rem << 2) | ((SUM_W+3)'(x >> (2*i)) & 3);
      trial = (root << 2) | 1;
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root << 1) | 1;
      end else begin
        root = root << 1;
      end
    end
    return root[(SUM_W+1)/2:0];
  endfunction

  // S_pixel for one pixel from its 128-GTU sum.
  function automatic logic [S_W-1:0] spixel(input logic [SUM_W-1:0] sum, input int unsigned nsigma);
    logic [SUM_W+5:0] num;
    num = (SUM_W+6)'(sum) + (SUM_W+6)'(8 * nsigma) * (SUM_W+6)'(isqrt({sum, 1'b0}));
    return S_W'(num >> WIN_LOG2);
  endfunction

endpackage
