// window_accum -- per-channel window summation s_p = sum_{n=1..W} d_{p,n}.
//
// Every IHC output d_{p,n} is added to the 26-bit accumulator of its channel
// p. A sample counter advances when the last filter of a sample arrives. On
// the W-th sample of a window each channel's final sum is cut to 12 bits by
// the published right shift of 14 (26 - 14 = 12 bits, so no saturation is
// needed) and stored in an output buffer, and the
// accumulator restarts from zero for the next window. When the last channel of
// the last sample is stored, window_done pulses for one cycle. The output
// buffer (read asynchronously at rd_addr by the back end) lets the next window
// start at once while the back end works; it is this design's own choice.
module window_accum #(
  parameter int unsigned P  = svm_pkg::P_FILTERS,
  parameter int unsigned W  = svm_pkg::W_SAMPLES,
  localparam int unsigned DW = svm_pkg::DW,
  localparam int unsigned AW = svm_pkg::ACC_W,
  localparam int unsigned SW = svm_pkg::SW,
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned NW = (W > 1) ? $clog2(W) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 d_valid,
  input  logic signed [DW-1:0] d_data,    // d_{p,n}, non-negative
  input  logic [PW-1:0]        d_p,
  input  logic                 d_last,    // last filter of the sample
  input  logic [PW-1:0]        rd_addr,
  output logic [SW-1:0]        s_q,       // quantised s_p of the last window
  output logic                 window_done,
  output logic [NW-1:0]        n_cnt,     // samples summed so far in this window
  output logic                 last_sample // the sample in progress ends the window
);

  logic [AW-1:0] acc  [P];
  logic [SW-1:0] sbuf [P];
  logic [AW-1:0] sum;

  assign last_sample = (n_cnt == NW'(W-1));
  assign sum = acc[d_p] + AW'(unsigned'(d_data[DW-2:0]));  // d_data[DW-1] is 0 after the IHC

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < P; i++) acc[i] <= '0;
      n_cnt       <= '0;
      window_done <= 1'b0;
    end else begin
      window_done <= 1'b0;
      if (d_valid) begin
        if (last_sample) begin
          acc[d_p]  <= '0;
          sbuf[d_p] <= SW'(sum >> svm_pkg::S_SHIFT);
        end else begin
          acc[d_p] <= sum;
        end
        if (d_last) begin
          if (last_sample) begin
            n_cnt       <= '0;
            window_done <= 1'b1;
          end else begin
            n_cnt <= n_cnt + 1'b1;
          end
        end
      end
    end
  end

  assign s_q = sbuf[rd_addr];

endmodule
