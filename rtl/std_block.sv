// std_block -- standardisation Phi_p = (s_p - mu_p) / sigma_p.
//
// Implements the published standardisation with the 12-bit quantised window
// sum s_p and the 12-bit mu_p, sigma_p from SMEM. The published design gives
// the formula and the widths (12-bit result, then >> 4 to 8 bits) but not the
// divider; this one is the simplest fit, a sequential restoring divider that
// produces one quotient bit per cycle. The magnitude |s - mu| is scaled by
// 2^PHI_FRAC (8 fraction bits, own choice) so that the 12-bit Phi_p is in
// Q3.8 and the 8-bit Phi_p (Phi_p >>> 4) in Q3.4. The quotient saturates
// symmetrically at +-2047; sigma = 0 gives the saturated value.
//
// Timing: start is taken in IDLE; done pulses NB+1 = 21 cycles later with phi12
// and phi8 valid (they hold until the next start). busy is high for NB cycles.
module std_block
  import svm_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [SW-1:0]            s,
  input  logic [SW-1:0]            mu,
  input  logic [SW-1:0]            sigma,
  output logic                     busy,
  output logic                     done,
  output logic signed [PHI_W-1:0]  phi12,
  output logic signed [PHI8_W-1:0] phi8
);

  localparam int unsigned NB   = SW + PHI_FRAC;      // numerator bits
  localparam int unsigned CNTW = $clog2(NB + 1);
  localparam int unsigned RW   = SW + 1;             // remainder bits
  localparam logic [NB-1:0] QMAX = NB'((1 << (PHI_W - 1)) - 1);

  logic [NB-1:0]   num, quo;
  logic [RW-1:0]   rem;
  logic [SW-1:0]   den;
  logic            neg;
  logic [CNTW-1:0] cnt;

  logic [RW-1:0]   rem_sh;
  logic            ge;
  logic signed [SW:0] diff;
  logic [SW-1:0]      mag;

  always_comb begin
    diff   = $signed({1'b0, s}) - $signed({1'b0, mu});
    mag    = diff[SW] ? SW'(-diff) : SW'(diff);
    rem_sh = {rem[RW-2:0], num[NB-1]};
    ge     = (rem_sh >= RW'(den));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      num   <= '0;
      quo   <= '0;
      rem   <= '0;
      den   <= '0;
      neg   <= 1'b0;
      cnt   <= '0;
      phi12 <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          neg  <= diff[SW];
          num  <= {mag, PHI_FRAC'(0)};
          den  <= sigma;
          rem  <= '0;
          quo  <= '0;
          cnt  <= '0;
        end
      end else begin
        rem <= ge ? rem_sh - RW'(den) : rem_sh;
        quo <= {quo[NB-2:0], ge};
        num <= num << 1;
        cnt <= cnt + 1'b1;
        if (cnt == CNTW'(NB-1)) begin
          logic [NB-1:0]        q_fin;
          logic [PHI_W-1:0]     q_sat;
          q_fin = {quo[NB-2:0], ge};
          q_sat = (q_fin > QMAX) ? PHI_W'(QMAX) : PHI_W'(q_fin);
          phi12 <= neg ? -$signed(q_sat) : $signed(q_sat);
          busy  <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end

  assign phi8 = PHI8_W'(phi12 >>> PHI_SHIFT);

endmodule
