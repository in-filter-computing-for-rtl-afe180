// svm_pkg -- shared widths, defaults and types of the in-filter SVM classifier.
//
// The classifier folds an acoustic front end (a cascade of asymmetric
// resonators followed by half-wave rectifying inner hair cells, CAR-IHC) into
// the kernel of a template SVM: each of the P resonator channels is summed over
// a window of W samples, standardised, weighted by a trained Q_p and summed with
// a bias b. The widths here follow the published fixed-point design: 12-bit
// input samples, kernel data and filter coefficients, a 26-bit window sum cut
// to 12 bits by a right shift of 14, 12-bit mean and deviation, a 12-bit
// standardised value cut to 8 bits by a shift of 4, and 8-bit weights and bias.
// The fraction bits of the coefficients and of the standardised value are not
// published; the choices below (Q2.10 coefficients, 8 fraction bits for the
// standardised value, a MAC rescale of 6) are this design's own.
package svm_pkg;

  // Published sizes
  localparam int unsigned P_FILTERS = 30;     // number of CAR filters / templates
  localparam int unsigned W_SAMPLES = 16000;  // window length, 1 s at 16 kHz
  localparam int unsigned CLK_PER_SAMPLE = 1562; // 25 MHz / 16 kHz

  localparam int unsigned DW      = 12;  // input sample, b_{p,n}, d_{p,n}
  localparam int unsigned CW      = 12;  // filter coefficient width
  localparam int unsigned ACC_W   = 26;  // window sum s_p
  localparam int unsigned S_SHIFT = 14;  // s_p >> 14 -> 12 bit
  localparam int unsigned SW      = 12;  // quantised s_p, mu_p, sigma_p
  localparam int unsigned PHI_W   = 12;  // standardised value
  localparam int unsigned PHI_SHIFT = 4; // Phi_p >> 4 -> 8 bit
  localparam int unsigned PHI8_W  = 8;
  localparam int unsigned QW      = 8;   // weights Q_p
  localparam int unsigned BW      = 8;   // bias b

  // Own choices (not published)
  localparam int unsigned CF        = 10; // coefficient fraction bits, Q2.10
  localparam int unsigned PHI_FRAC  = 8;  // fraction bits of the 12-bit Phi_p
  localparam int unsigned MAC_SHIFT = 6;  // sum(Q*Phi) >>> 6 before the 8-bit bias add
  localparam int unsigned MUL_LAT   = 2;  // register stages per pipelined multiplier

  typedef logic signed [DW-1:0] sample_t;
  typedef logic signed [CW-1:0] coef_t;

  // One FCMEM word: the five coefficients of filter p (eq. 5)
  typedef struct packed {
    coef_t a0;  // cos(theta_R)
    coef_t c0;  // sin(theta_R)
    coef_t r;   // pole/zero radius
    coef_t k;   // zero offset
    coef_t g;   // DC gain
  } car_coef_t;

  // One SMEM word: standardisation parameters of channel p (eq. 9)
  typedef struct packed {
    logic [SW-1:0] mu;
    logic [SW-1:0] sigma;
  } std_par_t;

  // Target of a configuration write
  typedef enum logic [1:0] {
    CFG_FCMEM = 2'd0,
    CFG_SMEM  = 2'd1,
    CFG_WMEM  = 2'd2,
    CFG_BMEM  = 2'd3
  } cfg_target_t;

  localparam int unsigned CFG_DW = $bits(car_coef_t);

endpackage
