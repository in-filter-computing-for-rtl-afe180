// smem -- standardisation parameter memory (SMEM).
//
// Holds the 12-bit mean mu_p and standard deviation sigma_p of each channel,
// computed offline over the training set and read by the STD block. One
// word {mu, sigma} per channel, written from the configuration port and read
// asynchronously (distributed RAM). The write port is this design's choice;
// the contents are not reset.
module smem #(
  parameter int unsigned P  = svm_pkg::P_FILTERS,
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1
) (
  input  logic              clk,
  input  logic              we,
  input  logic [PW-1:0]     waddr,
  input  svm_pkg::std_par_t wdata,
  input  logic [PW-1:0]     raddr,
  output svm_pkg::std_par_t rdata
);

  svm_pkg::std_par_t mem [P];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
