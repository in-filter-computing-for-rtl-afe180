// tb_svm_backend -- once-per-window classifier with P = 5 templates. The window
// buffer, SMEM and WMEM are arrays read at rd_addr; random s_p, mu_p, sigma_p,
// Q_p and b are drawn for 40 windows. Score and label are compared with an
// integer model (standardise, >>> 4, MAC, >>> 6, saturate, + b) and the
// start-to-result time must be 22*P + 2 cycles.
`timescale 1ns/1ps
module tb_svm_backend;
  import svm_pkg::*;
  localparam int P = 5;
  localparam int PW = $clog2(P);
  localparam int MW = PHI8_W + QW + $clog2(P + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [PW-1:0] rd_addr;
  logic [SW-1:0] s_q;
  std_par_t spar;
  logic signed [QW-1:0] q;
  logic signed [BW-1:0] b = '0;
  logic busy, res_valid, label;
  logic signed [BW:0] score;
  logic signed [MW-1:0] mac_acc;
  int checks = 0, failures = 0;
  int sv[P], mv[P], gv[P], qv[P];
  int n_lab[2] = '{0, 0};

  svm_backend #(.P(P)) dut (.*);

  always_comb begin
    s_q  = SW'(sv[rd_addr]);
    spar = '{mu: SW'(mv[rd_addr]), sigma: SW'(gv[rd_addr])};
    q    = QW'(qv[rd_addr]);
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 40; w++) begin
      automatic int acc = 0, m8, f, t;
      for (int p = 0; p < P; p++) begin
        int diff, mag, qq;
        sv[p] = int'($urandom_range(400));
        mv[p] = int'($urandom_range(400));
        gv[p] = int'($urandom_range(100)) + 1;
        qv[p] = int'($urandom_range(255)) - 128;
        diff = sv[p] - mv[p];
        mag = diff < 0 ? -diff : diff;
        qq = (mag * 256) / gv[p];
        if (qq > 2047) qq = 2047;
        if (diff < 0) qq = -qq;
        acc += (qq >>> 4) * qv[p];
      end
      b = BW'($urandom);
      m8 = acc >>> MAC_SHIFT;
      if (m8 > 127) m8 = 127;
      if (m8 < -128) m8 = -128;
      f = m8 + int'(b);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      t = 1;
      chk(busy, "busy after start");
      while (!res_valid) begin @(negedge clk); t++; end
      chk(t == 22 * P + 2, $sformatf("latency %0d", t));
      chk(score == (BW+1)'(f), $sformatf("score %0d exp %0d", score, f));
      chk(label == (f >= 0), "label");
      n_lab[label]++;
      @(negedge clk);
      chk(!busy, "busy after result");
    end
    chk(n_lab[0] > 0 && n_lab[1] > 0, "both labels");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
