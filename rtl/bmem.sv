// bmem -- bias register (BMEM).
//
// Holds the trained 8-bit signed SVM bias b that is added to the MAC result.
// A single word, written from the configuration port and cleared by reset
// (reset value is this design's choice).
module bmem #(
  localparam int unsigned BW = svm_pkg::BW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic signed [BW-1:0] wdata,
  output logic signed [BW-1:0] b
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  b <= '0;
    else if (we) b <= wdata;
  end

endmodule
