// ihc_block -- inner hair cell model: half-wave rectifier d = max(0, b).
//
// Follows the published IHC: the sign bit (MSB) of the CAR output b_{p,n}
// selects between b_{p,n} and zero, so negative values are discarded. A second
// select, en (the inverse of the CAR Done select in the micro-architecture
// figure), forces the output to zero while the kernel is not processing a
// filter. Purely combinational.
module ihc_block #(
  parameter int unsigned DW = svm_pkg::DW
) (
  input  logic signed [DW-1:0] b,    // CAR output b_{p,n}
  input  logic                 en,   // kernel is processing (CAR not done)
  output logic signed [DW-1:0] d     // IHC output d_{p,n} >= 0
);

  logic signed [DW-1:0] gated;

  always_comb begin
    gated = en ? b : '0;
    d     = gated[DW-1] ? '0 : gated;
  end

endmodule
