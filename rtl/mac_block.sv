// mac_block -- multiply-accumulate and bias add: f = sum_p Q_p Phi_p + b.
//
// Accumulates the products of the 8-bit standardised template outputs Phi_p
// and the 8-bit weights Q_p over the P templates (eq. 3 of the template SVM),
// then, on fin, rescales the sum to the published 8-bit MAC output
// (arithmetic shift by MAC_SHIFT = 6 and saturation, both own choices), adds
// the 8-bit bias b and gives the 9-bit score f and the label y = sgn(f)
// (label = 1 for f >= 0, own choice for f = 0).
//
// Timing: clr restarts the sum; each cycle with en adds one product; fin
// (after the last en) registers score/label and pulses res_valid one cycle
// later.
module mac_block
  import svm_pkg::*;
#(
  parameter int unsigned P = P_FILTERS,
  localparam int unsigned MW = PHI8_W + QW + $clog2(P + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     en,
  input  logic signed [PHI8_W-1:0] phi,
  input  logic signed [QW-1:0]     q,
  input  logic                     fin,
  input  logic signed [BW-1:0]     b,
  output logic signed [MW-1:0]     acc,
  output logic signed [BW:0]       score,
  output logic                     label,
  output logic                     res_valid
);

  localparam logic signed [MW-1:0] M8MAX = MW'((1 << (BW - 1)) - 1);
  localparam logic signed [MW-1:0] M8MIN = -MW'(1 << (BW - 1));

  logic signed [MW-1:0] acc_sh;
  logic signed [BW-1:0] mac8;
  logic signed [BW:0]   f;

  always_comb begin
    acc_sh = acc >>> MAC_SHIFT;
    if (acc_sh > M8MAX)      mac8 = BW'(M8MAX);
    else if (acc_sh < M8MIN) mac8 = BW'(M8MIN);
    else                     mac8 = BW'(acc_sh);
    f = (BW+1)'(mac8) + (BW+1)'(b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      score     <= '0;
      label     <= 1'b0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      if (clr)     acc <= '0;
      else if (en) acc <= acc + MW'(phi * q);
      if (fin) begin
        score     <= f;
        label     <= ~f[BW];
        res_valid <= 1'b1;
      end
    end
  end

endmodule
