// tb_infilter_svm_top -- end-to-end test of the classifier at its default size
// (P = 30 filters, W = 16000-sample windows, 12-bit data).
//
// Filter coefficients are derived here from the Greenwood place-frequency map
// f = 165.4 (10^(2.1 x) - 1), 6 kHz down to 100 Hz, with a0 = cos(theta),
// c0 = sin(theta), r = 1 - damping*theta, k = c0 and g set for unity DC gain,
// and quantised to Q2.10. Two one-second windows are streamed: a 300 Hz tone
// and a 3 kHz tone, each with pseudo-random noise. The first window is fed at
// the published rate (one sample per 1562 cycles, where the kernel must always
// be ready), the second back to back so that samples wait on CAR Done. A bit-exact integer model
// written in this file computes the channel sums of both windows first; from
// them a two-example "training" sets mu_p, sigma_p and Q_p = +-8 so the two
// windows should land on opposite labels. The design is then run and every
// IHC output d_{p,n}, the quantised sums, the scores and labels are compared
// with the model. Cycle checks: 271 cycles from sample accept to CAR Done, and
// each result ready within one 1562-cycle sample period of its window's end.
// Mechanisms counted (each must occur): state clear passes through the
// sel1/sel2 zero muxes, CAR Done per sample, HWR zeroing of negative b_{p,n},
// input stall (sample offered while the kernel is busy), window end, both
// labels.
`timescale 1ns/1ps
module tb_infilter_svm_top;
  import svm_pkg::*;

  localparam int P  = P_FILTERS;
  localparam int W  = W_SAMPLES;
  localparam int NWIN = 2;
  localparam int PW = $clog2(P);
  localparam int SAMPLE_LAT = P * (4 * MUL_LAT + 1) + 1;

  logic clk = 0, rst_n = 0;
  always #20 clk = ~clk;   // 25 MHz

  logic                 x_valid = 0, x_ready;
  logic signed [DW-1:0] x_data = '0;
  logic                 cfg_we = 0;
  cfg_target_t          cfg_sel = CFG_FCMEM;
  logic [PW-1:0]        cfg_addr = '0;
  logic [CFG_DW-1:0]    cfg_data = '0;
  logic                 res_valid, res_label, car_done, window_done;
  logic signed [BW:0]   res_score;

  infilter_svm_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---------------- reference model ----------------
  int ca0[P], cc0[P], cr[P], ck[P], cg[P];
  int mA[P], mB[P], macc[P];
  int mu[P], sg[P], qw[P], bias;
  int stim[NWIN*W];

  function automatic int sat12(int v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return v;
  endfunction

  // one sample through the cascade; returns the IHC outputs
  function automatic void model_sample(input int x, output int d[P]);
    int u = x;
    for (int p = 0; p < P; p++) begin
      int t1, t2, t3, t4, rl, rr, an, bn, kb, gy, y;
      t1 = (mA[p] * ca0[p]) >>> CF;
      t2 = (mB[p] * cc0[p]) >>> CF;
      t3 = (mB[p] * ca0[p]) >>> CF;
      t4 = (mA[p] * cc0[p]) >>> CF;
      rl = ((t1 - t2) * cr[p]) >>> CF;
      rr = ((t3 + t4) * cr[p]) >>> CF;
      an = sat12(rl + u);
      bn = sat12(rr);
      kb = (bn * ck[p]) >>> CF;
      gy = ((u + kb) * cg[p]) >>> CF;
      y  = sat12(gy);
      mA[p] = an; mB[p] = bn;
      d[p] = (y < 0) ? 0 : y;
      u = y;
    end
  endfunction

  function automatic void model_reset();
    for (int p = 0; p < P; p++) begin mA[p] = 0; mB[p] = 0; macc[p] = 0; end
  endfunction

  function automatic int std_phi8(int s, int m, int sig);
    int diff = s - m;
    int mag = (diff < 0) ? -diff : diff;
    int q;
    if (sig == 0) q = 2047;
    else q = (mag * 256) / sig;
    if (q > 2047) q = 2047;
    if (diff < 0) q = -q;
    return q >>> 4;
  endfunction

  function automatic int classify(input int s[P], output int label);
    int acc = 0, m8, f;
    for (int p = 0; p < P; p++) acc += std_phi8(s[p], mu[p], sg[p]) * qw[p];
    m8 = acc >>> MAC_SHIFT;
    if (m8 > 127) m8 = 127;
    if (m8 < -128) m8 = -128;
    f = m8 + bias;
    label = (f >= 0);
    return f;
  endfunction

  function automatic int q10(real v);
    int i = $rtoi(v * 1024.0 + ((v >= 0) ? 0.5 : -0.5));
    if (i > 2047) i = 2047;
    if (i < -2048) i = -2048;
    return i;
  endfunction

  // ---------------- stimulus / expectation ----------------
  int s_exp[NWIN][P];
  int f_exp[NWIN], l_exp[NWIN];
  int d_q[$];

  initial begin : setup
    real pi = 3.14159265358979;
    real fs = 16000.0, damping = 0.25;
    real x_hi, x_lo, xpos, f, th, a0, c0, r, k, g;
    int d[P];
    x_hi = $log10(6000.0 / 165.4 + 1.0) / 2.1;
    x_lo = $log10(100.0 / 165.4 + 1.0) / 2.1;
    for (int p = 0; p < P; p++) begin
      xpos = x_hi - (x_hi - x_lo) * p / (P - 1);
      f  = 165.4 * ($pow(10.0, 2.1 * xpos) - 1.0);
      th = 2.0 * pi * f / fs;
      a0 = $cos(th); c0 = $sin(th);
      r  = 1.0 - damping * th;
      k  = c0;
      g  = (1.0 - 2.0 * a0 * r + r * r) / (1.0 - (2.0 * a0 - k * c0) * r + r * r);
      ca0[p] = q10(a0); cc0[p] = q10(c0); cr[p] = q10(r); ck[p] = q10(k); cg[p] = q10(g);
    end
    for (int n = 0; n < NWIN * W; n++) begin
      real ft;
      int noise;
      ft = (n < W) ? 300.0 : 3000.0;
      noise = int'($urandom_range(100)) - 50;
      stim[n] = $rtoi(400.0 * $sin(2.0 * pi * ft * n / fs)) + noise;
    end
    // model pass over both windows
    for (int w = 0; w < NWIN; w++) begin
      model_reset();
      for (int n = 0; n < W; n++) begin
        model_sample(stim[w * W + n], d);
        for (int p = 0; p < P; p++) macc[p] += d[p];
      end
      for (int p = 0; p < P; p++) s_exp[w][p] = macc[p] >>> S_SHIFT;
    end
    // two-example training of the standardisation and weights
    for (int p = 0; p < P; p++) begin
      int dd;
      dd = s_exp[0][p] - s_exp[1][p];
      mu[p] = (s_exp[0][p] + s_exp[1][p]) / 2;
      sg[p] = (dd < 0 ? -dd : dd) / 2;
      if (sg[p] == 0) sg[p] = 1;
      qw[p] = (dd > 0) ? 8 : (dd < 0) ? -8 : 0;
    end
    bias = 3;
    for (int w = 0; w < NWIN; w++) f_exp[w] = classify(s_exp[w], l_exp[w]);
    model_reset();
  end

  // ---------------- monitors ----------------
  longint cyc = 0;
  always @(posedge clk) cyc++;

  int n_clear = 0, n_done = 0, n_hwr0 = 0, n_stall = 0, n_win = 0, n_res = 0;
  int n_lab[2] = '{0, 0};
  longint t_acc, t_win;
  bit clearing_d = 0;

  always @(posedge clk) if (rst_n) begin
    clearing_d <= dut.u_kernel.clearing;
    if (dut.u_kernel.clearing && !clearing_d) n_clear++;
    if (x_valid && !x_ready) n_stall++;
    if (car_done) begin
      n_done++;
      check(cyc - t_acc == SAMPLE_LAT, $sformatf("sample latency %0d", cyc - t_acc));
    end
    if (x_valid && x_ready) t_acc = cyc;
    if (dut.u_kernel.d_valid) begin
      int e;
      if (dut.u_kernel.y < 0) n_hwr0++;
      if (d_q.size() == 0) check(0, "unexpected d_valid");
      else begin
        e = d_q.pop_front();
        check(dut.u_kernel.d_data == DW'(e),
              $sformatf("d n=%0d p=%0d got %0d exp %0d", n_done, dut.u_kernel.d_p, dut.u_kernel.d_data, e));
      end
    end
    if (window_done) begin
      n_win++;
      t_win = cyc;
    end
    if (res_valid) begin
      check(n_res < NWIN, "extra result");
      if (n_res < NWIN) begin
        for (int p = 0; p < P; p++)
          check(dut.u_accum.sbuf[p] == SW'(s_exp[n_res][p]), $sformatf("s_%0d window %0d", p, n_res));
        check(res_score == (BW+1)'(f_exp[n_res]),
              $sformatf("score window %0d got %0d exp %0d", n_res, res_score, f_exp[n_res]));
        check(res_label == l_exp[n_res][0], $sformatf("label window %0d", n_res));
        check(cyc - t_win <= CLK_PER_SAMPLE, $sformatf("back-end time %0d", cyc - t_win));
        $display("window %0d: score %0d label %0d (after %0d cycles)", n_res, res_score, res_label, cyc - t_win);
      end
      n_lab[res_label]++;
      n_res++;
    end
  end

  // ---------------- driver ----------------
  task automatic cfg_write(cfg_target_t sel, int addr, logic [CFG_DW-1:0] data);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_addr = PW'(addr); cfg_data = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin : main
    int d[P];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < P; p++) begin
      cfg_write(CFG_FCMEM, p, {CW'(ca0[p]), CW'(cc0[p]), CW'(cr[p]), CW'(ck[p]), CW'(cg[p])});
      cfg_write(CFG_SMEM, p, CFG_DW'({SW'(mu[p]), SW'(sg[p])}));
      cfg_write(CFG_WMEM, p, CFG_DW'(QW'(qw[p])));
    end
    cfg_write(CFG_BMEM, 0, CFG_DW'(BW'(bias)));
    for (int w = 0; w < NWIN; w++) begin
      model_reset();
      for (int n = 0; n < W; n++) begin
        model_sample(stim[w * W + n], d);
        for (int p = 0; p < P; p++) d_q.push_back(d[p]);
        if (w == 0) begin
          // published rate: one sample every CLK_PER_SAMPLE cycles
          @(posedge clk);
          while (cyc % CLK_PER_SAMPLE != 0) @(posedge clk);
        end
        @(negedge clk);
        x_valid = 1; x_data = DW'(stim[w * W + n]);
        if (w == 0) check(x_ready, "kernel busy at the published sample rate");
        @(posedge clk);
        while (!x_ready) @(posedge clk);
        @(negedge clk);
        x_valid = 0;
      end
    end
    wait (n_res == NWIN);
    repeat (50) @(negedge clk);
    check(d_q.size() == 0, "IHC outputs missing");
    check(n_done == NWIN * W, $sformatf("CAR Done count %0d", n_done));
    check(n_win == NWIN, "window count");
    $display("mechanisms: clear passes %0d, CAR Done %0d, HWR zeroed %0d, stall cycles %0d, windows %0d, labels +1:%0d -1:%0d",
             n_clear, n_done, n_hwr0, n_stall, n_win, n_lab[1], n_lab[0]);
    check(n_clear == 1 + NWIN, "clear passes");
    check(n_hwr0 > 0, "HWR never zeroed");
    check(n_stall > 0, "no input stall");
    check(n_lab[0] > 0 && n_lab[1] > 0, "both labels");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
