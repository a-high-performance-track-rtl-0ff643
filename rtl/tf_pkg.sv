// tf_pkg - shared types, widths and fixed-point formats of the track fitter.
//
// The fitter works on 18-bit signed fixed-point numbers throughout. The
// formats below are a choice of this design (no widths are published for the
// original firmware); they were picked so that a CMS-like tracker geometry
// fits the 18-bit range of a DSP multiplier port:
//   phi            rad   x 2^PHI_FRAC   (15 fractional bits, +-4 rad)
//   R, z           cm    x 2^LEN_FRAC   (8 fractional bits, +-512 cm)
//   c = q/(2 rho)  1/cm  x 2^C_FRAC     (23 fractional bits)
//   tan, cot       1     x 2^T_FRAC     (12 fractional bits)
//   1/R^2          1/cm2 x 2^INV_R2_FRAC
//   fit constants: any scale; a scalar product is shifted right by COEF_FRAC
// All rescaling is an arithmetic right shift (truncation toward minus
// infinity); every stage output saturates to W bits.
//
// Constant tables (sizes follow the published constant count: 13 + 25 + 25
// pre-estimate constants, 6 ideal radii, 2 x 44 transverse and 44
// longitudinal final-fit constants per set, and a 16-entry 1/R^2 table) are
// written one constant at a time through cfg_wr_t.
package tf_pkg;

  localparam int W          = 18;   // data and constant width
  localparam int ACC_W      = 48;   // accumulator width (DSP P register)
  localparam int N_LAYERS   = 6;    // hit slots per track
  localparam int N_REGIONS  = 14;   // detector regions
  localparam int N_COMBOS   = 7;    // six-hit set + six five-hit sets
  localparam int N_SETS     = N_REGIONS * N_COMBOS;
  localparam int N_CHI      = N_LAYERS - 2;  // chi components per plane
  localparam int N_RINGS    = 16;   // entries of the 1/R^2 table
  localparam int REGION_W   = 4;
  localparam int RING_W     = 4;
  localparam int SOFF_W     = 11;   // signed strip offset h_sn - m_sn
  localparam int SET_W      = 8;    // constant-set address width
  localparam int CHI2_W     = 2 * W + 2;  // exact sum of up to 8 squared chi

  // fixed-point formats
  localparam int PHI_FRAC    = 15;
  localparam int LEN_FRAC    = 8;
  localparam int C_FRAC      = 23;
  localparam int T_FRAC      = 12;
  localparam int INV_R2_FRAC = 28;
  localparam int PITCH_FRAC  = 16;
  localparam int COEF_FRAC   = 12;
  // (R * c) >>> RC_SHIFT is an angle in the phi format
  localparam int RC_SHIFT    = LEN_FRAC + C_FRAC - PHI_FRAC;
  // 1/6 as a 18-bit fraction
  localparam int SIXTH_FRAC  = 18;
  localparam logic signed [W:0] SIXTH = 19'sd43691;    // round(2^18 / 6)
  // (R_ex - R) * (1/R^2) >>> G_SHIFT keeps LEN_FRAC + INV_R2_FRAC - G_SHIFT bits
  localparam int G_SHIFT     = 12;
  localparam int DPHI_SHIFT  = PITCH_FRAC + LEN_FRAC + INV_R2_FRAC - G_SHIFT - PHI_FRAC;

  // constants per set in each table
  localparam int K_PRE_C   = 13;  // 6 A, 6 phi-bar, 1 mean
  localparam int K_PRE_RZ  = 25;  // 6 A_z, 6 A_R, 6 z-bar, 6 R-bar, 1 mean
  localparam int K_RIDEAL  = 6;
  localparam int K_FIT     = 44;  // 6x6 matrix, 6 x-bar, 2 means

  // word indices inside a set
  localparam int I_PC_A = 0, I_PC_XBAR = 6, I_PC_MEAN = 12;
  localparam int I_RZ_AZ = 0, I_RZ_AR = 6, I_RZ_ZBAR = 12, I_RZ_RBAR = 18, I_RZ_MEAN = 24;
  localparam int I_FIT_M = 0, I_FIT_XBAR = 36, I_FIT_MEAN0 = 42, I_FIT_MEAN1 = 43;

  typedef logic signed [W-1:0] word_t;

  typedef enum logic [2:0] {
    TBL_PRE_C   = 3'd0,  // q/2rho pre-estimate
    TBL_PRE_TAN = 3'd1,  // tan(theta) pre-estimate
    TBL_PRE_COT = 3'd2,  // cot(theta) pre-estimate
    TBL_RIDEAL  = 3'd3,  // ideal-layer radii R'
    TBL_FIT_T   = 3'd4,  // transverse final fit, set address = 2*set + hi_pt
    TBL_FIT_Z   = 3'd5,  // longitudinal final fit
    TBL_INV_R2  = 3'd6   // 1/R^2 table, set address = ring
  } cfg_table_e;

  typedef struct packed {
    logic             we;
    cfg_table_e       table_sel;
    logic [SET_W-1:0] set;
    logic [5:0]       idx;
    word_t            data;
  } cfg_wr_t;

  typedef struct packed {
    logic                     valid;     // slot holds a hit
    logic                     two_s;     // parallel-strip (2S) disk module
    logic [RING_W-1:0]        ring;      // index into the 1/R^2 table
    logic signed [SOFF_W-1:0] strip_off; // h_sn - m_sn
    word_t                    r;
    word_t                    phi;
    word_t                    z;
  } hit_t;

  typedef struct packed {
    logic             hi_pt;       // transverse constant set used
    logic [SET_W-1:0] set;         // constant-set address
    word_t            q_over_pt;   // transverse: parameter 0
    word_t            phi0;        // transverse: parameter 1
    word_t [N_CHI-1:0] chi_t;      // transverse chi components
    word_t            z0;          // longitudinal: parameter 0
    word_t            cot_theta;   // longitudinal: parameter 1
    word_t [N_CHI-1:0] chi_z;      // longitudinal chi components
  } fit_out_t;

  // saturate a wide signed value to W bits
  function automatic word_t sat_w(input logic signed [ACC_W-1:0] v);
    localparam logic signed [ACC_W-1:0] MAXV = ACC_W'(2**(W-1) - 1);
    localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(2**(W-1));
    if (v > MAXV)      return word_t'(MAXV);
    else if (v < MINV) return word_t'(MINV);
    else               return word_t'(v);
  endfunction

endpackage
