// pipe_mult -- signed multiplier with a fixed-latency register pipeline.
//
// y = (a * b) >>> FRAC, with the full-width product kept (no saturation), is
// presented LAT clock cycles after a and b. The pipeline runs freely: there is
// no valid signal, the caller holds a and b steady and waits LAT cycles. This
// models the "pipelined multiplier" of the CAR-IHC micro-architecture, whose
// exact depth is not published; LAT = 2 (input product registered, then one
// more stage) is this design's choice. Arithmetic shift rounds toward minus
// infinity. Reset clears the pipeline.
module pipe_mult #(
  parameter int unsigned AW   = 12,
  parameter int unsigned BW   = 12,
  parameter int unsigned FRAC = 10,
  parameter int unsigned LAT  = 2,
  localparam int unsigned OW  = AW + BW - FRAC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [AW-1:0] a,
  input  logic signed [BW-1:0] b,
  output logic signed [OW-1:0] y
);

  logic signed [AW+BW-1:0] prod;
  logic signed [OW-1:0]    pipe [LAT];

  always_comb prod = a * b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe[i] <= '0;
    end else begin
      pipe[0] <= OW'(prod >>> FRAC);
      for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
    end
  end

  assign y = pipe[LAT-1];

  initial assert (LAT >= 1) else $error("pipe_mult: LAT must be at least 1");

endmodule
