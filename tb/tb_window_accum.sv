// tb_window_accum -- window sums with P = 3 channels and W = 40 samples:
// random d_{p,n} in 0..2047 (all 2047 in one window), four windows. Checks the
// running 26-bit sum of every channel after every sample, every quantised
// s_p = sum >> 14 at window end, that the accumulators restart each window,
// one window_done pulse per window, n_cnt and last_sample.
`timescale 1ns/1ps
module tb_window_accum;
  import svm_pkg::*;
  localparam int P = 3, W = 40;
  localparam int PW = $clog2(P), NW = $clog2(W);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic d_valid = 0, d_last = 0;
  logic signed [DW-1:0] d_data = '0;
  logic [PW-1:0] d_p = '0, rd_addr = '0;
  logic [SW-1:0] s_q;
  logic window_done, last_sample;
  logic [NW-1:0] n_cnt;
  int checks = 0, failures = 0, n_done = 0;

  window_accum #(.P(P), .W(W)) dut (.*);

  always @(posedge clk) if (rst_n && window_done) n_done++;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    int sum[P];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 4; w++) begin
      for (int p = 0; p < P; p++) sum[p] = 0;
      for (int n = 0; n < W; n++) begin
        chk(n_cnt == NW'(n), $sformatf("n_cnt %0d exp %0d", n_cnt, n));
        chk(last_sample == (n == W - 1), $sformatf("last_sample n=%0d", n));
        for (int p = 0; p < P; p++) begin
          int v;
          v = (w == 2) ? 2047 : int'($urandom_range(2047));
          sum[p] += v;
          d_valid = 1; d_p = PW'(p); d_last = (p == P - 1); d_data = DW'(v);
          @(negedge clk);
          d_valid = 0; d_last = 0;
          if (n < W - 1) chk(dut.acc[p] == 26'(sum[p]), $sformatf("acc w=%0d n=%0d p=%0d", w, n, p));
          if ($urandom_range(1) == 1) @(negedge clk);
        end
      end
      @(negedge clk);
      chk(n_done == w + 1, $sformatf("window_done count %0d", n_done));
      for (int p = 0; p < P; p++) begin
        rd_addr = PW'(p);
        #1;
        chk(s_q == SW'(sum[p] >> S_SHIFT), $sformatf("w=%0d p=%0d s=%0d exp=%0d", w, p, s_q, sum[p] >> S_SHIFT));
        chk(dut.acc[p] == 0, $sformatf("acc %0d not restarted", p));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
