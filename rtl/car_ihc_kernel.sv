// car_ihc_kernel -- sequencer of the time-multiplexed CAR-IHC kernel.
//
// For each input sample x_n the single car_block is run over filters
// p = 0..P-1 in cascade order: filter 0 receives x_n, filter p receives the
// output of filter p-1 (the CAR Done multiplexer of the published
// micro-architecture). Each filter output b_{p,n} is rectified by the IHC
// block and handed on as d_{p,n} with its filter index. When the last filter
// is done, CAR Done is raised again and the next sample may enter; this
// follows the published flow chart. The filter coefficients are read from
// FCMEM at address p.
//
// Interface: x_valid/x_ready handshake for samples (x_ready is the CAR Done
// state). If clear_after is high when the last filter of a sample is written
// back, the kernel then runs a clear pass that writes zero to the state of
// every filter through the sel1/sel2 zero muxes before it takes the next
// sample; a clear pass also runs after reset. Using sel1/sel2 for this is
// this design's reading of the figure.
//
// Timing: a sample is accepted in one cycle, then every filter takes
// 4*MUL_LAT+1 cycles (4*MUL_LAT for the multiplier chain, 1 to write back), so
// a sample occupies P*(4*MUL_LAT+1)+1 cycles: 271 for P = 30, against the
// "about 300" cycles published. A clear pass takes P cycles.
module car_ihc_kernel #(
  parameter int unsigned P       = svm_pkg::P_FILTERS,
  parameter int unsigned MUL_LAT = svm_pkg::MUL_LAT,
  localparam int unsigned DW     = svm_pkg::DW,
  localparam int unsigned PW     = (P > 1) ? $clog2(P) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // sample input
  input  logic                  x_valid,
  input  logic signed [DW-1:0]  x_data,
  output logic                  x_ready,     // CAR Done: ready for x_{n+1}
  input  logic                  clear_after, // clear all filter states after this sample
  // FCMEM read port
  output logic [PW-1:0]         coef_addr,
  input  svm_pkg::car_coef_t    coef,
  // IHC output stream
  output logic                  d_valid,
  output logic signed [DW-1:0]  d_data,      // d_{p,n}
  output logic [PW-1:0]         d_p,
  output logic                  d_last,      // last filter of this sample
  output logic                  car_done,    // pulse: all P filters done
  output logic                  clearing
);

  localparam int unsigned STEP = 4 * MUL_LAT;
  localparam int unsigned CNTW = $clog2(STEP + 1);

  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_RUN} state_t;
  state_t state;

  logic [PW-1:0]        p;
  logic [CNTW-1:0]      cnt;
  logic signed [DW-1:0] u_reg;
  logic signed [DW-1:0] y, a_new, b_new;
  logic                 st_we, sel, wb;
  logic signed [DW-1:0] d_ihc;

  assign coef_addr = p;
  assign sel       = (state == S_RUN);
  assign wb        = (state == S_RUN) && (cnt == CNTW'(STEP));
  assign st_we     = wb || (state == S_CLEAR);
  assign x_ready   = (state == S_IDLE);
  assign clearing  = (state == S_CLEAR);

  car_block #(.P(P), .MUL_LAT(MUL_LAT)) u_car (
    .clk, .rst_n,
    .p     (p),
    .step  (cnt),
    .coef  (coef),
    .u     (u_reg),
    .sel1  (sel),
    .sel2  (sel),
    .st_we (st_we),
    .y     (y),
    .a_new (a_new),
    .b_new (b_new)
  );

  ihc_block #(.DW(DW)) u_ihc (.b(y), .en(wb), .d(d_ihc));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_CLEAR;
      p        <= '0;
      cnt      <= '0;
      u_reg    <= '0;
      car_done <= 1'b0;
    end else begin
      car_done <= 1'b0;
      unique case (state)
        S_CLEAR: begin
          if (p == PW'(P-1)) begin
            p     <= '0;
            state <= S_IDLE;
          end else begin
            p <= p + 1'b1;
          end
        end
        S_IDLE: begin
          if (x_valid) begin
            u_reg <= x_data;
            p     <= '0;
            cnt   <= '0;
            state <= S_RUN;
          end
        end
        S_RUN: begin
          if (cnt == CNTW'(STEP)) begin
            cnt   <= '0;
            u_reg <= y;                 // cascade: b_{p,n} feeds filter p+1
            if (p == PW'(P-1)) begin
              p        <= '0;
              car_done <= 1'b1;
              state    <= clear_after ? S_CLEAR : S_IDLE;
            end else begin
              p <= p + 1'b1;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    d_valid = wb;
    d_data  = d_ihc;
    d_p     = p;
    d_last  = wb && (p == PW'(P-1));
  end

endmodule
