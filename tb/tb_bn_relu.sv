// tb_bn_relu: bn_relu in its default configuration (64 elements, 64 lanes)
// and with 20 elements on 8 lanes (three groups), each through
// bn_relu_check.
module tb_bn_relu;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int c0, f0, c1, f1;
  logic fin0, fin1;

  bn_relu_check #(.N(64), .LANES(64)) u0 (.clk, .rst_n, .checks(c0), .failures(f0), .fin(fin0));
  bn_relu_check #(.N(20), .LANES(8))  u1 (.clk, .rst_n, .checks(c1), .failures(f1), .fin(fin1));

  initial begin
    #2ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin0 && fin1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
