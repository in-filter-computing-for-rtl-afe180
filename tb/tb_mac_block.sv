// tb_mac_block -- MAC and bias add over P = 30 templates: random Phi_p, Q_p
// and b; checks the running sum, the 9-bit score sat8(sum >>> 6) + b, the
// label (f >= 0) and that res_valid follows fin by one cycle. Large operands
// force the 8-bit saturation in both directions.
`timescale 1ns/1ps
module tb_mac_block;
  import svm_pkg::*;
  localparam int P = P_FILTERS;
  localparam int MW = PHI8_W + QW + $clog2(P + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, en = 0, fin = 0;
  logic signed [PHI8_W-1:0] phi = '0;
  logic signed [QW-1:0] q = '0;
  logic signed [BW-1:0] b = '0;
  logic signed [MW-1:0] acc;
  logic signed [BW:0] score;
  logic label, res_valid;
  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0;

  mac_block #(.P(P)) dut (.*);

  task automatic one(int scale);
    int sum = 0, m8, f;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int p = 0; p < P; p++) begin
      phi = PHI8_W'($signed($urandom_range(2 * scale)) - scale);
      q   = QW'($signed($urandom_range(255)) - 128);
      sum += int'(phi) * int'(q);
      en = 1;
      @(negedge clk);
      en = 0;
    end
    checks++;
    if (acc != MW'(sum)) begin failures++; $display("FAIL acc %0d exp %0d", acc, sum); end
    b = BW'($urandom);
    fin = 1;
    @(negedge clk);
    fin = 0;
    m8 = sum >>> MAC_SHIFT;
    if (m8 > 127) m8 = 127;
    if (m8 < -128) m8 = -128;
    f = m8 + int'(b);
    checks += 3;
    if (!res_valid) begin failures++; $display("FAIL res_valid"); end
    if (score != (BW+1)'(f)) begin failures++; $display("FAIL score %0d exp %0d", score, f); end
    if (label != (f >= 0)) begin failures++; $display("FAIL label"); end
    if (f >= 0) n_pos++; else n_neg++;
    @(negedge clk);
    checks++;
    if (res_valid) begin failures++; $display("FAIL res_valid not a pulse"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 100; i++) one(4);
    for (int i = 0; i < 100; i++) one(128);
    checks++;
    if (n_pos == 0 || n_neg == 0) begin failures++; $display("FAIL one label never seen"); end
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
