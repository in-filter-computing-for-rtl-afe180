// wmem -- template weight memory (WMEM).
//
// Holds the trained 8-bit signed weight Q_p of each of the P templates, read
// by the MAC block. Written from the configuration port, read asynchronously
// (distributed RAM). The write port is this design's choice; the contents are
// not reset.
module wmem #(
  parameter int unsigned P  = svm_pkg::P_FILTERS,
  localparam int unsigned QW = svm_pkg::QW,
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [PW-1:0]        waddr,
  input  logic signed [QW-1:0] wdata,
  input  logic [PW-1:0]        raddr,
  output logic signed [QW-1:0] rdata
);

  logic signed [QW-1:0] mem [P];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
