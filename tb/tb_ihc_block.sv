// tb_ihc_block -- exhaustive check of the half-wave rectifier: d = b when en
// and b >= 0, otherwise 0.
`timescale 1ns/1ps
module tb_ihc_block;
  localparam int DW = 12;
  logic signed [DW-1:0] b, d;
  logic en;
  int checks = 0, failures = 0;

  ihc_block #(.DW(DW)) dut (.*);

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int v = -(1 << (DW-1)); v < (1 << (DW-1)); v++) begin
        int expv;
        en = e[0];
        b = DW'(v);
        #1;
        expv = (e == 1 && v > 0) ? v : 0;
        checks++;
        if (d != DW'(expv)) begin
          failures++;
          if (failures < 10) $display("FAIL en=%0d b=%0d d=%0d", e, v, d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
