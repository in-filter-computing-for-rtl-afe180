// tb_pipe_mult -- checks the pipelined multiplier against (a*b)>>>FRAC delayed
// by exactly LAT cycles, with random signed operands including the extremes.
`timescale 1ns/1ps
module tb_pipe_mult;
  localparam int AW = 12, BW = 12, FRAC = 10, LAT = 2;
  localparam int OW = AW + BW - FRAC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [AW-1:0] a = '0;
  logic signed [BW-1:0] b = '0;
  logic signed [OW-1:0] y;
  int checks = 0, failures = 0;
  longint exp_q[$];

  pipe_mult #(.AW(AW), .BW(BW), .FRAC(FRAC), .LAT(LAT)) dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // result of the operands applied LAT cycles ago
      if (exp_q.size() == LAT) begin
        automatic longint e = exp_q.pop_front();
        checks++;
        if (y != OW'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL i=%0d y=%0d exp=%0d", i, y, e);
        end
      end
      case (i % 50)
        0: begin a = -2048; b = -2048; end
        1: begin a = 2047;  b = -2048; end
        default: begin a = AW'($urandom); b = BW'($urandom); end
      endcase
      exp_q.push_back((longint'(a) * longint'(b)) >>> FRAC);
    end
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
