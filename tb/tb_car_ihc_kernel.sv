// tb_car_ihc_kernel -- the time-multiplexed CAR-IHC kernel with P = 4 filters.
// FCMEM is modelled by an array read at coef_addr. Random samples are offered
// with random gaps; every d_{p,n} (cascade order, filter index, d_last) is
// compared with an integer cascade model, the accept-to-CAR-Done latency must
// be P*(4*MUL_LAT+1)+1 cycles, x_ready must be low while a sample is being
// processed, and clear_after on one sample must zero all filter states (the
// model is cleared too) with a P-cycle clear pass.
`timescale 1ns/1ps
module tb_car_ihc_kernel;
  import svm_pkg::*;
  localparam int P = 4, LAT = MUL_LAT;
  localparam int PW = $clog2(P);
  localparam int SAMPLE_LAT = P * (4 * LAT + 1) + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic x_valid = 0, x_ready, clear_after = 0;
  logic signed [DW-1:0] x_data = '0, d_data;
  logic [PW-1:0] coef_addr, d_p;
  car_coef_t coef;
  logic d_valid, d_last, car_done, clearing;
  int checks = 0, failures = 0;
  int ca0[P], cc0[P], cr[P], ck[P], cg[P], mA[P], mB[P];
  int d_q[$];
  longint cyc = 0, t_acc = 0;
  int n_clear_cyc = 0, n_hwr = 0, n_busy_offer = 0;

  car_ihc_kernel #(.P(P), .MUL_LAT(LAT)) dut (.*);

  always_comb coef = {CW'(ca0[coef_addr]), CW'(cc0[coef_addr]), CW'(cr[coef_addr]),
                      CW'(ck[coef_addr]), CW'(cg[coef_addr])};

  function automatic int sat12(int v);
    return (v > 2047) ? 2047 : (v < -2048) ? -2048 : v;
  endfunction

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  function automatic void model(int x);
    int u = x;
    for (int p = 0; p < P; p++) begin
      int t1, t2, t3, t4, an, bn, kb, y;
      t1 = (mA[p] * ca0[p]) >>> CF;  t2 = (mB[p] * cc0[p]) >>> CF;
      t3 = (mB[p] * ca0[p]) >>> CF;  t4 = (mA[p] * cc0[p]) >>> CF;
      an = sat12((((t1 - t2) * cr[p]) >>> CF) + u);
      bn = sat12(((t3 + t4) * cr[p]) >>> CF);
      kb = (bn * ck[p]) >>> CF;
      y  = sat12(((u + kb) * cg[p]) >>> CF);
      mA[p] = an; mB[p] = bn;
      d_q.push_back(y < 0 ? 0 : y);
      u = y;
    end
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (clearing) n_clear_cyc++;
      if (car_done) chk(cyc - t_acc == SAMPLE_LAT, $sformatf("latency %0d", cyc - t_acc));
      if (x_valid && x_ready) t_acc = cyc;
      if (x_valid && !x_ready) n_busy_offer++;
      if (d_valid) begin
        int e, idx;
        idx = P - d_q.size();
        if (d_q.size() == 0) chk(0, "unexpected d_valid");
        else begin
          e = d_q.pop_front();
          if (e == 0) n_hwr++;
          chk(d_data == DW'(e), $sformatf("d got %0d exp %0d", d_data, e));
          chk(d_p == PW'(idx), $sformatf("d_p %0d exp %0d", d_p, idx));
          chk(d_last == (idx == P - 1), "d_last");
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < P; i++) begin
      automatic real th = 0.1 + 2.0 * i / P;
      ca0[i] = $rtoi($cos(th) * 1024.0);  cc0[i] = $rtoi($sin(th) * 1024.0);
      cr[i] = 900;  ck[i] = cc0[i];  cg[i] = 700;
      mA[i] = 0; mB[i] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      automatic int x = int'($urandom_range(1600)) - 800;
      repeat ($urandom_range(3)) @(negedge clk);
      model(x);
      x_valid = 1; x_data = DW'(x);
      clear_after = (n == 99);
      @(posedge clk);
      while (!x_ready) @(posedge clk);
      @(negedge clk);
      x_valid = 0;
      chk(!x_ready, "x_ready high while processing");
      while (!x_ready) @(negedge clk);
      if (n == 99) for (int p = 0; p < P; p++) begin mA[p] = 0; mB[p] = 0; end
    end
    repeat (5) @(negedge clk);
    chk(d_q.size() == 0, "missing outputs");
    chk(n_clear_cyc == 2 * P, $sformatf("clear cycles %0d", n_clear_cyc));
    chk(n_hwr > 0, "HWR never zeroed");
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
