// tb_car_block -- the shared CAR resonator datapath with P = 4 filter slots.
// Random stable-ish coefficients (a0 = cos, c0 = sin of a random angle, r in
// 0.5..0.99, k = c0, g in 0.5..1) and random inputs u are applied to random
// filter slots. After 4*MUL_LAT cycles y, A' and B' are compared with an
// integer model of
//   A' = sat(r(a0 A - c0 B) + u), B' = sat(r(c0 A + a0 B)), y = sat(g(u + k B'))
// and the state is written back. Some steps hold sel1/sel2 low and must give
// zero states. Large inputs exercise saturation. The step input counts the
// cycles since the inputs were applied, as the kernel's controller does.
`timescale 1ns/1ps
module tb_car_block;
  import svm_pkg::*;
  localparam int P = 4, LAT = MUL_LAT;
  localparam int PW = $clog2(P);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PW-1:0] p = '0;
  car_coef_t coef = '0;
  logic signed [DW-1:0] u = '0, y, a_new, b_new;
  logic sel1 = 0, sel2 = 0, st_we = 0;
  logic [$clog2(4 * LAT + 1)-1:0] step = '0;
  int checks = 0, failures = 0, n_sat = 0;
  int mA[P], mB[P];
  int ca0[P], cc0[P], cr[P], ck[P], cg[P];

  car_block #(.P(P), .MUL_LAT(LAT)) dut (.*);

  function automatic int sat12(int v);
    if (v > 2047) begin n_sat++; return 2047; end
    if (v < -2048) begin n_sat++; return -2048; end
    return v;
  endfunction

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic run_step(int pi, int uv, bit sel);
    int t1, t2, t3, t4, an, bn, kb, ey;
    @(negedge clk);
    p = PW'(pi); u = DW'(uv); sel1 = sel; sel2 = sel;
    coef = {CW'(ca0[pi]), CW'(cc0[pi]), CW'(cr[pi]), CW'(ck[pi]), CW'(cg[pi])};
    step = '0;
    repeat (4 * LAT) begin @(negedge clk); step++; end
    t1 = (mA[pi] * ca0[pi]) >>> CF;  t2 = (mB[pi] * cc0[pi]) >>> CF;
    t3 = (mB[pi] * ca0[pi]) >>> CF;  t4 = (mA[pi] * cc0[pi]) >>> CF;
    an = sel ? sat12((((t1 - t2) * cr[pi]) >>> CF) + uv) : 0;
    bn = sel ? sat12(((t3 + t4) * cr[pi]) >>> CF) : 0;
    kb = (bn * ck[pi]) >>> CF;
    ey = sat12(((uv + kb) * cg[pi]) >>> CF);
    chk(a_new == DW'(an), $sformatf("A' p=%0d got %0d exp %0d", pi, a_new, an));
    chk(b_new == DW'(bn), $sformatf("B' p=%0d got %0d exp %0d", pi, b_new, bn));
    chk(y == DW'(ey), $sformatf("y p=%0d got %0d exp %0d", pi, y, ey));
    st_we = 1;
    @(negedge clk);
    st_we = 0;
    mA[pi] = an; mB[pi] = bn;
  endtask

  initial begin
    for (int i = 0; i < P; i++) begin
      automatic real th = 0.05 + 2.5 * $urandom_range(1000) / 1000.0;
      ca0[i] = $rtoi($cos(th) * 1024.0);
      cc0[i] = $rtoi($sin(th) * 1024.0);
      cr[i]  = 512 + int'($urandom_range(500));
      ck[i]  = cc0[i];
      cg[i]  = 512 + int'($urandom_range(500));
      mA[i] = 0; mB[i] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < P; i++) run_step(i, 0, 1'b0);   // clear all slots
    for (int n = 0; n < 400; n++) begin
      automatic int amp = (n < 200) ? 300 : 2047;
      run_step(n % P, int'($urandom_range(2 * amp)) - amp, (n % 97) != 96);
    end
    chk(n_sat > 0, "saturation never exercised");
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
