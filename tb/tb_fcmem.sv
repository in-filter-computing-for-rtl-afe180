// tb_fcmem -- writes a random coefficient word to every filter address, then
// reads all back (twice, in different orders) and compares.
`timescale 1ns/1ps
module tb_fcmem;
  import svm_pkg::*;
  localparam int P = P_FILTERS;
  localparam int PW = $clog2(P);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [PW-1:0] waddr = '0, raddr = '0;
  car_coef_t wdata = '0, rdata;
  car_coef_t ref_mem [P];
  int checks = 0, failures = 0;

  fcmem #(.P(P)) dut (.*);

  initial begin
    for (int i = 0; i < P; i++) begin
      @(negedge clk);
      we = 1; waddr = PW'(i);
      wdata = car_coef_t'({$urandom, $urandom});
      ref_mem[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int pass = 0; pass < 2; pass++)
      for (int i = 0; i < P; i++) begin
        automatic int a = pass ? P - 1 - i : i;
        raddr = PW'(a);
        #1;
        checks++;
        if (rdata != ref_mem[a]) begin failures++; $display("FAIL addr %0d", a); end
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
