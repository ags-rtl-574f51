// ags_pkg: types and constants shared by the AGS accelerator.
//
// Number formats (this design's choice; the accelerator's published description
// gives no bit widths):
//   * pixel coordinates and 2D Gaussian means: signed Q12.4 (16 bit)
//   * 2D inverse covariance ("conic") a, b, c of Sigma^-1 = [[a b][b c]]: signed Q4.12
//   * opacity, alpha, transmittance T and colour channels: unsigned Q0.16,
//     where 16'hFFFF stands for 1.0
// The thresholds follow the algorithm: Thresh_alpha = 1/255, early termination
// when T drops below 1e-4, and alpha clamped to 0.99 as in reference 3DGS.
package ags_pkg;

  localparam int unsigned POS_FRAC   = 4;   // Q12.4 positions
  localparam int unsigned CONIC_FRAC = 12;  // Q4.12 conic entries
  localparam int unsigned UNIT_W     = 16;  // Q0.16 width

  // 1/255 in Q0.16 -> 65535/255 = 257
  localparam logic [15:0] ALPHA_THRESH_DEF = 16'd257;
  // 0.99 in Q0.16
  localparam logic [15:0] ALPHA_MAX        = 16'd64880;
  // 1e-4 in Q0.16 = 6.55 -> 7
  localparam logic [15:0] T_MIN            = 16'd7;

  // Gaussian ID width (up to 1M Gaussians) and non-contributory number width
  localparam int unsigned GID_W = 20;
  localparam int unsigned NUM_W = 12;

  typedef logic [GID_W-1:0] gid_t;
  typedef logic [NUM_W-1:0] ncnum_t;

  typedef struct packed {
    logic [15:0] r;
    logic [15:0] g;
    logic [15:0] b;
  } rgb_t;

  // Features of one projected (2D) Gaussian, 160 bits = 20 bytes.
  typedef struct packed {
    logic signed [15:0] mx;    // mean x, Q12.4
    logic signed [15:0] my;    // mean y, Q12.4
    logic signed [15:0] ca;    // conic a, Q4.12
    logic signed [15:0] cb;    // conic b, Q4.12
    logic signed [15:0] cc;    // conic c, Q4.12
    logic        [15:0] opac;  // opacity, Q0.16
    rgb_t               col;   // colour, Q0.16 per channel
    logic        [15:0] rsvd;  // padding to 20 bytes
  } gfeat_t;

  // One non-contributory record of the GS logging / skipping tables
  typedef struct packed {
    gid_t   id;
    ncnum_t num;
  } ncrec_t;

  // Per-frame decision of the FC detection engine
  typedef struct packed {
    logic refine;     // covisibility below Thresh_T: run fine-grained refinement
    logic key_frame;  // covisibility below Thresh_M: key frame, full mapping
  } fc_dec_t;

  // Working state of a GPE in the workload table
  typedef enum logic [1:0] {
    GPE_AUTO = 2'd0,   // renders its own pixel
    GPE_ASST = 2'd1,   // computes alphas for another GPE
    GPE_IDLE = 2'd2    // finished, nothing to assist
  } gpe_state_e;

endpackage
