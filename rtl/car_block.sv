// car_block -- time-multiplexed Cascade-of-Asymmetric-Resonators (CAR) datapath.
//
// One two-pole two-zero resonator stage, shared by all P filters of the
// cascade. It realises
//     H_p(z) = g [z^2 + (-2 a0 + k c0) r z + r^2] / [z^2 - 2 a0 r z + r^2]
// in the coupled form drawn in the published micro-architecture:
//     A' = sel1 ? r (a0 A - c0 B) + u : 0
//     B' = sel2 ? r (c0 A + a0 B)     : 0
//     y  = g (u + k B')
// where u is the stage input (x_n for the first filter, b_{p-1,n} otherwise),
// A, B are the two state variables of filter p and y is b_{p,n}. With
// a0 = cos(theta), c0 = sin(theta) this is exactly the transfer function above.
// The products, the subtract/add signs, the sel1/sel2 zero muxes and the
// coefficient set (a0, c0, r, k, g) follow the figure. The state
// memory (one A and one B per filter, indexed by p), the fixed-point format
// (12-bit signed data and states saturated at each write, Q2.10
// coefficients, truncating arithmetic shifts) are this design's own choices.
//
// Multiplier reuse: the eight products of one filter step are computed on
// four pipelined multipliers (M0..M3), as the published design reuses its
// multipliers over several cycles and reports 4 DSP slices. The operands
// are switched by phase of the step counter (L = MUL_LAT):
//     steps 0 .. L-1   M0 = a0*A   M1 = c0*B   M2 = a0*B    M3 = c0*A
//     steps L .. 2L-1  M0 = r*(a0 A - c0 B)    M1 = r*(c0 A + a0 B)
//     steps >= 2L      M2 = k*B'
//     steps >= 3L      M3 = g*(u + k B')
// The r products appear at step 2L and are held in a register from then on,
// since M0/M1 inputs are no longer valid after that. The exact schedule and
// the register are this design's own; the arithmetic is identical to one
// multiplier per product.
//
// Timing: step counts cycles since p, coef, u, sel1 and sel2 became stable
// (0 in the first such cycle); the controller holds those inputs and counts
// step up to 4*L. y, a_new and b_new are valid at step 4*L, and st_we then
// stores a_new/b_new as filter p's state. st_we with sel1 = sel2 = 0 clears
// filter p's state whatever the step.
module car_block #(
  parameter int unsigned P       = svm_pkg::P_FILTERS,
  parameter int unsigned MUL_LAT = svm_pkg::MUL_LAT,
  localparam int unsigned DW     = svm_pkg::DW,
  localparam int unsigned CW     = svm_pkg::CW,
  localparam int unsigned CF     = svm_pkg::CF,
  localparam int unsigned PW     = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned STW    = $clog2(4 * MUL_LAT + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [PW-1:0]         p,       // filter being processed
  input  logic [STW-1:0]        step,    // cycles since the inputs became stable
  input  svm_pkg::car_coef_t    coef,    // FCMEM word of filter p
  input  logic signed [DW-1:0]  u,       // stage input
  input  logic                  sel1,    // 1: pass A', 0: force 0
  input  logic                  sel2,    // 1: pass B', 0: force 0
  input  logic                  st_we,   // store A', B' as state of filter p
  output logic signed [DW-1:0]  y,       // b_{p,n}
  output logic signed [DW-1:0]  a_new,
  output logic signed [DW-1:0]  b_new
);

  localparam int unsigned M1W = DW + CW - CF;        // a0*A etc.
  localparam int unsigned S1W = M1W + 1;             // sum/difference
  localparam int unsigned M2W = S1W + CW - CF;       // r*(...)
  localparam int unsigned KW  = DW + CW - CF;        // k*B'
  localparam int unsigned UKW = KW + 1;              // u + k*B'
  localparam int unsigned GW  = UKW + CW - CF;       // g*(...)
  localparam int unsigned MAW = (S1W > UKW) ? S1W : UKW;  // shared operand width
  localparam int unsigned MOW = MAW + CW - CF;       // shared product width
  localparam int unsigned L   = MUL_LAT;

  function automatic logic signed [DW-1:0] sat(input logic signed [31:0] v);
    localparam logic signed [31:0] MAXV = (32'sd1 <<< (DW-1)) - 1;
    localparam logic signed [31:0] MINV = -(32'sd1 <<< (DW-1));
    if (v > MAXV)      return DW'(MAXV);
    else if (v < MINV) return DW'(MINV);
    else               return DW'(v);
  endfunction

  // Per-filter state memory
  logic signed [DW-1:0] st_a [P];
  logic signed [DW-1:0] st_b [P];
  logic signed [DW-1:0] a_cur, b_cur;

  assign a_cur = st_a[p];
  assign b_cur = st_b[p];

  // Four shared multipliers
  logic signed [MAW-1:0] ma [4];
  logic signed [CW-1:0]  mb [4];
  logic signed [MOW-1:0] my [4];

  for (genvar i = 0; i < 4; i++) begin : g_mul
    pipe_mult #(.AW(MAW), .BW(CW), .FRAC(CF), .LAT(L)) u_m (
      .clk, .rst_n, .a(ma[i]), .b(mb[i]), .y(my[i]));
  end

  logic ph1, ph2, ph3, ph4;   // operand phases, see header
  always_comb begin
    ph1 = (step < STW'(L));
    ph2 = !ph1 && (step < STW'(2 * L));
    ph3 = (step >= STW'(2 * L));
    ph4 = (step >= STW'(3 * L));
  end

  // Stage 1 results (M0..M3 outputs during steps L .. 2L-1)
  logic signed [S1W-1:0] diff_l, sum_r;
  always_comb begin
    diff_l = S1W'(M1W'(my[0])) - S1W'(M1W'(my[1]));
    sum_r  = S1W'(M1W'(my[2])) + S1W'(M1W'(my[3]));
  end

  // r products: live at step 2L, held afterwards
  logic signed [M2W-1:0] rl_q, rr_q, rl, rr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rl_q <= '0;
      rr_q <= '0;
    end else if (step == STW'(2 * L)) begin
      rl_q <= M2W'(my[0]);
      rr_q <= M2W'(my[1]);
    end
  end
  always_comb begin
    rl = (step == STW'(2 * L)) ? M2W'(my[0]) : rl_q;
    rr = (step == STW'(2 * L)) ? M2W'(my[1]) : rr_q;
  end

  // New states through the sel1 / sel2 zero muxes
  always_comb begin
    a_new = sel1 ? sat(32'(rl) + 32'(u)) : '0;
    b_new = sel2 ? sat(32'(rr)) : '0;
  end

  // u + k*B' (M2 output from step 3L on)
  logic signed [UKW-1:0] ukb;
  always_comb ukb = UKW'(u) + UKW'(KW'(my[2]));

  // Operand multiplexers
  always_comb begin
    ma[0] = MAW'(a_cur);  mb[0] = coef.a0;
    ma[1] = MAW'(b_cur);  mb[1] = coef.c0;
    ma[2] = MAW'(b_cur);  mb[2] = coef.a0;
    ma[3] = MAW'(a_cur);  mb[3] = coef.c0;
    if (ph2) begin
      ma[0] = MAW'(diff_l); mb[0] = coef.r;
      ma[1] = MAW'(sum_r);  mb[1] = coef.r;
    end
    if (ph3) begin
      ma[2] = MAW'(b_new);  mb[2] = coef.k;
    end
    if (ph4) begin
      ma[3] = MAW'(ukb);    mb[3] = coef.g;
    end
  end

  always_comb y = sat(32'(GW'(my[3])));

  // State write-back
  always_ff @(posedge clk) begin
    if (st_we) begin
      st_a[p] <= a_new;
      st_b[p] <= b_new;
    end
  end

endmodule
