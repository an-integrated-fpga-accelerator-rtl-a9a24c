// tb_fc_layer: fc_layer in its default configuration FC(2,64) with 64
// lanes (the first ENetLite layer) and in a multi-group configuration
// FC(16,40) with 16 lanes, each through fc_layer_check.
module tb_fc_layer;
  timeunit 1ns;
  timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int c0, f0, c1, f1;
  logic fin0, fin1;

  fc_layer_check #(.IN_DIM(2),  .OUT_DIM(64), .LANES(64)) u0 (.clk, .rst_n, .checks(c0), .failures(f0), .fin(fin0));
  fc_layer_check #(.IN_DIM(16), .OUT_DIM(40), .LANES(16)) u1 (.clk, .rst_n, .checks(c1), .failures(f1), .fin(fin1));

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
