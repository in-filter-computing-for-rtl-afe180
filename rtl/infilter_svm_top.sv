// infilter_svm_top -- in-filter computing template-SVM acoustic classifier.
//
// Streams audio samples through a time-multiplexed cascade of P asymmetric
// resonators (CAR) with half-wave-rectifying inner hair cells (IHC), sums each
// channel over a window of W samples, standardises the P sums with stored mean
// and deviation, weights them with trained template weights Q_p, adds a bias b
// and outputs a score f and label sgn(f) once per window. The block structure
// (CAR-IHC kernel with FCMEM, window sum and >>14, STD with SMEM, >>4, MAC
// with WMEM, bias add with BMEM) and all widths follow the published FPGA
// block diagram.
//
// Interfaces:
//  * x_valid / x_data / x_ready: one 12-bit signed sample per handshake. The
//    published system supplies one sample every 1562 cycles (16 kHz at
//    25 MHz); the kernel needs P*(4*MUL_LAT+1)+1 = 271 cycles per sample.
//  * cfg_*: configuration writes of the offline-trained parameters; cfg_sel
//    picks FCMEM / SMEM / WMEM / BMEM, cfg_addr the filter, cfg_data the word
//    (low bits used for the narrower memories). This port is this design's
//    own; the published system only says the parameters are stored.
//  * res_valid / res_score / res_label: one result per window.
// After each window the filter states are cleared (CLEAR_PER_WINDOW), so each
// window is classified from rest; that choice is this design's own.
module infilter_svm_top
  import svm_pkg::*;
#(
  parameter int unsigned P                = P_FILTERS,
  parameter int unsigned W                = W_SAMPLES,
  parameter bit          CLEAR_PER_WINDOW = 1'b1,
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // audio samples
  input  logic                 x_valid,
  input  logic signed [DW-1:0] x_data,
  output logic                 x_ready,
  // parameter configuration
  input  logic                 cfg_we,
  input  cfg_target_t          cfg_sel,
  input  logic [PW-1:0]        cfg_addr,
  input  logic [CFG_DW-1:0]    cfg_data,
  // classification result
  output logic                 res_valid,
  output logic signed [BW:0]   res_score,
  output logic                 res_label,
  // status
  output logic                 car_done,
  output logic                 window_done
);

  localparam int unsigned NW = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned MW = PHI8_W + QW + $clog2(P + 1);

  // FCMEM
  logic [PW-1:0] coef_addr;
  car_coef_t     coef;
  fcmem #(.P(P)) u_fcmem (
    .clk, .we(cfg_we && cfg_sel == CFG_FCMEM), .waddr(cfg_addr),
    .wdata(car_coef_t'(cfg_data)), .raddr(coef_addr), .rdata(coef)
  );

  // CAR-IHC kernel
  logic                 d_valid, d_last, clearing, last_sample;
  logic signed [DW-1:0] d_data;
  logic [PW-1:0]        d_p;
  car_ihc_kernel #(.P(P)) u_kernel (
    .clk, .rst_n,
    .x_valid, .x_data, .x_ready,
    .clear_after(CLEAR_PER_WINDOW && last_sample),
    .coef_addr, .coef,
    .d_valid, .d_data, .d_p, .d_last,
    .car_done, .clearing
  );

  // Window summation
  logic [PW-1:0] be_addr;
  logic [SW-1:0] s_q;
  logic [NW-1:0] n_cnt;
  window_accum #(.P(P), .W(W)) u_accum (
    .clk, .rst_n,
    .d_valid, .d_data, .d_p, .d_last,
    .rd_addr(be_addr), .s_q, .window_done, .n_cnt, .last_sample
  );

  // SMEM, WMEM, BMEM
  std_par_t             spar;
  logic signed [QW-1:0] q;
  logic signed [BW-1:0] b;
  smem #(.P(P)) u_smem (
    .clk, .we(cfg_we && cfg_sel == CFG_SMEM), .waddr(cfg_addr),
    .wdata(std_par_t'(cfg_data[$bits(std_par_t)-1:0])), .raddr(be_addr), .rdata(spar)
  );
  wmem #(.P(P)) u_wmem (
    .clk, .we(cfg_we && cfg_sel == CFG_WMEM), .waddr(cfg_addr),
    .wdata(cfg_data[QW-1:0]), .raddr(be_addr), .rdata(q)
  );
  bmem u_bmem (
    .clk, .rst_n, .we(cfg_we && cfg_sel == CFG_BMEM),
    .wdata(cfg_data[BW-1:0]), .b
  );

  // STD + MAC + bias
  logic                 be_busy;
  logic signed [MW-1:0] mac_acc;
  svm_backend #(.P(P)) u_backend (
    .clk, .rst_n,
    .start(window_done), .rd_addr(be_addr), .s_q, .spar, .q, .b,
    .busy(be_busy), .res_valid, .score(res_score), .label(res_label), .mac_acc
  );

  // Internal observation only; kept for waveform debugging.
  logic unused_ok;
  assign unused_ok = ^{clearing, n_cnt, be_busy, mac_acc};

endmodule
