// svm_backend -- once-per-window classifier: standardisation, MAC, bias.
//
// When a window's P quantised sums s_p are ready (start), the back end walks
// p = 0..P-1: it reads s_p from the window buffer, mu_p and sigma_p from SMEM
// and Q_p from WMEM at the shared address rd_addr, runs the STD block, and
// feeds the resulting 8-bit Phi_p with Q_p into the MAC block. After the last
// template the bias b is added and the score and label are produced. The
// published flow chart gives this order (standardisation, then MAC with
// weights and bias, then output); the serial, one-template-at-a-time schedule
// is this design's simplest fit for it.
//
// Timing: per template 1 issue cycle + 21 divider cycles (20 steps, then done)
// with the MAC step overlapping the next issue: res_valid comes 22*P + 2 cycles
// after start (662 for P = 30), well inside one 1562-cycle
// sample period; res_valid pulses once with score and label.
module svm_backend
  import svm_pkg::*;
#(
  parameter int unsigned P = P_FILTERS,
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned MW = PHI8_W + QW + $clog2(P + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic [PW-1:0]        rd_addr,
  input  logic [SW-1:0]        s_q,
  input  std_par_t             spar,
  input  logic signed [QW-1:0] q,
  input  logic signed [BW-1:0] b,
  output logic                 busy,
  output logic                 res_valid,
  output logic signed [BW:0]   score,
  output logic                 label,
  output logic signed [MW-1:0] mac_acc
);

  typedef enum logic [1:0] {B_IDLE, B_ISSUE, B_WAIT, B_FIN} bstate_t;
  bstate_t state;
  logic [PW-1:0] p;

  logic std_start, std_busy, std_done;
  logic signed [PHI_W-1:0]  phi12;
  logic signed [PHI8_W-1:0] phi8;
  logic mac_clr, mac_en, mac_fin;

  assign rd_addr   = p;
  assign busy      = (state != B_IDLE);
  assign std_start = (state == B_ISSUE);
  assign mac_en    = (state == B_WAIT) && std_done;
  assign mac_fin   = (state == B_FIN);
  assign mac_clr   = (state == B_IDLE) && start;

  std_block u_std (
    .clk, .rst_n,
    .start (std_start),
    .s     (s_q),
    .mu    (spar.mu),
    .sigma (spar.sigma),
    .busy  (std_busy),
    .done  (std_done),
    .phi12 (phi12),
    .phi8  (phi8)
  );

  mac_block #(.P(P)) u_mac (
    .clk, .rst_n,
    .clr       (mac_clr),
    .en        (mac_en),
    .phi       (phi8),
    .q         (q),
    .fin       (mac_fin),
    .b         (b),
    .acc       (mac_acc),
    .score     (score),
    .label     (label),
    .res_valid (res_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= B_IDLE;
      p     <= '0;
    end else begin
      unique case (state)
        B_IDLE:  if (start) begin p <= '0; state <= B_ISSUE; end
        B_ISSUE: state <= B_WAIT;
        B_WAIT:  if (std_done) begin
                   if (p == PW'(P-1)) state <= B_FIN;
                   else begin p <= p + 1'b1; state <= B_ISSUE; end
                 end
        B_FIN:   state <= B_IDLE;
        default: state <= B_IDLE;
      endcase
    end
  end

  // A new window must not arrive while the previous one is still classified.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == B_IDLE)
    else $error("svm_backend: start while busy");

  // phi12 and std_busy are observed through phi8 and done only.
  logic unused_ok;
  assign unused_ok = ^{phi12[PHI_SHIFT-1:0], std_busy};

endmodule
