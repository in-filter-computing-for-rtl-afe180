// fcmem -- filter coefficient memory (FCMEM).
//
// Holds the five CAR coefficients (a0, c0, r, k, g), 12 bits each, for each of
// the P filters, as in the published block diagram. Written one whole filter
// word at a time from the configuration port (coefficients are computed
// offline); read asynchronously by the kernel at address raddr, which suits a
// LUT-based distributed RAM (the published design uses no block RAM). The
// write port is this design's own choice; the contents are not reset.
module fcmem #(
  parameter int unsigned P  = svm_pkg::P_FILTERS,
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1
) (
  input  logic               clk,
  input  logic               we,
  input  logic [PW-1:0]      waddr,
  input  svm_pkg::car_coef_t wdata,
  input  logic [PW-1:0]      raddr,
  output svm_pkg::car_coef_t rdata
);

  svm_pkg::car_coef_t mem [P];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
