// tb_std_block -- standardisation: random and corner (s, mu, sigma) triples,
// including sigma = 0 and saturating quotients. Expected phi12 is computed
// with integer division: q = min(2047, |s-mu|*256/sigma), signed as s-mu;
// phi8 = phi12 >>> 4. Checks the 21-cycle start-to-done latency.
`timescale 1ns/1ps
module tb_std_block;
  import svm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [SW-1:0] s = '0, mu = '0, sigma = '0;
  logic busy, done;
  logic signed [PHI_W-1:0] phi12;
  logic signed [PHI8_W-1:0] phi8;
  int checks = 0, failures = 0;
  int n_sat = 0;

  std_block dut (.*);

  task automatic run(int sv, int mv, int gv);
    int diff, mag, q, e12, t0, t;
    @(negedge clk);
    s = SW'(sv); mu = SW'(mv); sigma = SW'(gv); start = 1;
    @(negedge clk);
    start = 0;
    t = 1;
    while (!done) begin @(negedge clk); t++; end
    diff = sv - mv;
    mag = diff < 0 ? -diff : diff;
    q = (gv == 0) ? 2047 : (mag * 256) / gv;
    if (q > 2047) begin q = 2047; n_sat++; end
    e12 = diff < 0 ? -q : q;
    checks += 3;
    if (phi12 != PHI_W'(e12)) begin failures++; $display("FAIL s=%0d mu=%0d sg=%0d phi12=%0d exp=%0d", sv, mv, gv, phi12, e12); end
    if (phi8 != PHI8_W'(e12 >>> 4)) begin failures++; $display("FAIL phi8 %0d exp %0d", phi8, e12 >>> 4); end
    if (t != SW + PHI_FRAC + 1) begin failures++; $display("FAIL latency %0d", t); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(100, 100, 10);
    run(4095, 0, 1);
    run(0, 4095, 4095);
    run(50, 10, 0);
    run(10, 50, 0);
    run(300, 200, 100);
    run(100, 300, 100);
    for (int i = 0; i < 300; i++)
      run(int'($urandom_range(4095)), int'($urandom_range(4095)), int'($urandom_range(4095)));
    for (int i = 0; i < 300; i++)
      run(int'($urandom_range(600)), int'($urandom_range(600)), int'($urandom_range(200)) + 1);
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
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
