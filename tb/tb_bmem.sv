// tb_bmem -- bias register: reset value 0, holds without we, loads with we.
`timescale 1ns/1ps
module tb_bmem;
  import svm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic signed [BW-1:0] wdata = '0, b;
  logic signed [BW-1:0] expv = '0;
  int checks = 0, failures = 0;

  bmem dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    checks++; if (b != 0) begin failures++; $display("FAIL reset value %0d", b); end
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      we = ($urandom_range(1) == 1);
      wdata = BW'($urandom);
      if (we) expv = wdata;
      @(negedge clk);
      we = 0;
      checks++;
      if (b != expv) begin failures++; $display("FAIL i=%0d b=%0d exp=%0d", i, b, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
