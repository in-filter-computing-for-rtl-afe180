// tb_rate_limits -- the two scaling points stated for the design: 120 filters
// at the 16 kHz rate (one sample per 1562 cycles of 25 MHz) and 30 filters at
// an 80 kHz rate (one sample per 312 cycles). Two classifier instances are fed
// on those fixed periods; at every sample tick the kernel must already be
// ready (no sample waits), every sample must produce P IHC outputs and reach
// CAR Done, and each short window (W = 4) must give one result. Coefficients
// are a mild resonator (a0 = 0.9, c0 = 0.44, r = 0.9, k = c0, g = 0.5) in
// every filter; weights and statistics are arbitrary since only timing is
// checked here. The backend takes 22P+2 cycles per window (2642 at P = 120),
// which overlaps the next window since the window sums are buffered.
`timescale 1ns/1ps
module tb_rate_limits;
  import svm_pkg::*;
  localparam int W = 4;
  localparam int NSAMP = 3 * W;

  logic clk = 0, rst_n = 0;
  always #20 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // instance A: P = 120 at 1562 cycles per sample
  localparam int PA = 120, PWA = $clog2(PA);
  logic a_valid = 0, a_ready, a_we = 0, a_res, a_lab, a_done, a_win;
  logic signed [DW-1:0] a_x = '0;
  cfg_target_t a_sel = CFG_FCMEM;
  logic [PWA-1:0] a_addr = '0;
  logic [CFG_DW-1:0] a_data = '0;
  logic signed [BW:0] a_score;
  infilter_svm_top #(.P(PA), .W(W)) dut_a (
    .clk, .rst_n, .x_valid(a_valid), .x_data(a_x), .x_ready(a_ready),
    .cfg_we(a_we), .cfg_sel(a_sel), .cfg_addr(a_addr), .cfg_data(a_data),
    .res_valid(a_res), .res_score(a_score), .res_label(a_lab), .car_done(a_done), .window_done(a_win));

  // instance B: P = 30 at 312 cycles per sample
  localparam int PB = 30, PWB = $clog2(PB);
  logic b_valid = 0, b_ready, b_we = 0, b_res, b_lab, b_done, b_win;
  logic signed [DW-1:0] b_x = '0;
  cfg_target_t b_sel = CFG_FCMEM;
  logic [PWB-1:0] b_addr = '0;
  logic [CFG_DW-1:0] b_data = '0;
  logic signed [BW:0] b_score;
  infilter_svm_top #(.P(PB), .W(W)) dut_b (
    .clk, .rst_n, .x_valid(b_valid), .x_data(b_x), .x_ready(b_ready),
    .cfg_we(b_we), .cfg_sel(b_sel), .cfg_addr(b_addr), .cfg_data(b_data),
    .res_valid(b_res), .res_score(b_score), .res_label(b_lab), .car_done(b_done), .window_done(b_win));

  int a_nd = 0, a_nr = 0, a_nv = 0, b_nd = 0, b_nr = 0, b_nv = 0;
  always @(posedge clk) if (rst_n) begin
    if (a_done) a_nd++;
    if (a_res) a_nr++;
    if (dut_a.d_valid) a_nv++;
    if (b_done) b_nd++;
    if (b_res) b_nr++;
    if (dut_b.d_valid) b_nv++;
  end

  localparam logic [CFG_DW-1:0] COEF = {12'sd922, 12'sd451, 12'sd922, 12'sd451, 12'sd512};
  localparam logic [CFG_DW-1:0] SPAR = CFG_DW'({12'd2, 12'd3});

  initial begin : cfg_and_drive_a
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < PA; p++) begin
      a_we = 1; a_addr = PWA'(p);
      a_sel = CFG_FCMEM; a_data = COEF; @(negedge clk);
      a_sel = CFG_SMEM;  a_data = SPAR; @(negedge clk);
      a_sel = CFG_WMEM;  a_data = CFG_DW'(p % 7 - 3); @(negedge clk);
    end
    a_we = 0;
    for (int n = 0; n < NSAMP; n++) begin
      repeat (1562 - 1) @(negedge clk);
      chk(a_ready, $sformatf("P=120: kernel busy at sample %0d", n));
      a_valid = 1; a_x = DW'((n % 2) ? 600 : -500);
      @(negedge clk);
      a_valid = 0;
    end
  end

  initial begin : cfg_and_drive_b
    repeat (3) @(negedge clk);
    for (int p = 0; p < PB; p++) begin
      b_we = 1; b_addr = PWB'(p);
      b_sel = CFG_FCMEM; b_data = COEF; @(negedge clk);
      b_sel = CFG_SMEM;  b_data = SPAR; @(negedge clk);
      b_sel = CFG_WMEM;  b_data = CFG_DW'(p % 5 - 2); @(negedge clk);
    end
    b_we = 0;
    for (int n = 0; n < NSAMP; n++) begin
      repeat (312 - 1) @(negedge clk);
      chk(b_ready, $sformatf("80 kHz: kernel busy at sample %0d", n));
      b_valid = 1; b_x = DW'((n % 2) ? 600 : -500);
      @(negedge clk);
      b_valid = 0;
    end
  end

  initial begin : finish
    repeat (3 + 3 * PA + (NSAMP + 1) * 1562 + 22 * PA + 1000) @(negedge clk);
    chk(a_nd == NSAMP, $sformatf("P=120 CAR Done %0d", a_nd));
    chk(a_nv == NSAMP * PA, $sformatf("P=120 IHC outputs %0d", a_nv));
    chk(a_nr == NSAMP / W, $sformatf("P=120 results %0d", a_nr));
    chk(b_nd == NSAMP, $sformatf("80 kHz CAR Done %0d", b_nd));
    chk(b_nv == NSAMP * PB, $sformatf("80 kHz IHC outputs %0d", b_nv));
    chk(b_nr == NSAMP / W, $sformatf("80 kHz results %0d", b_nr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
