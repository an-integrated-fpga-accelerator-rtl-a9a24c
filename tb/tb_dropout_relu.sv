// tb_dropout_relu: random inputs and random words in all enable
// combinations; the output and drop flag one cycle later are compared with
// the rule y = 0 if (relu_en and x < 0) or (drop_en and r < 2^31), else x.
module tb_dropout_relu;
  import p3net_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, relu_en = 0, drop_en = 0, out_valid, dropped;
  fx_t x = 0, y;
  logic [31:0] rnd = 0;
  dropout_relu dut (.*);
  initial begin
    #10ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    fx_t ex;
    logic ed, ev;
    int ndrop = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      relu_en  = $urandom_range(0, 1);
      drop_en  = relu_en ? $urandom_range(0, 1) : 1'b0;
      x        = fx_t'($urandom);
      rnd      = $urandom;
      ev = in_valid;
      ed = drop_en && rnd < 32'h8000_0000 && !(relu_en && x < 0);
      ex = ((relu_en && x < 0) || (drop_en && rnd < 32'h8000_0000)) ? fx_t'(0) : x;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (out_valid != ev || (ev && (y != ex || dropped != ed))) begin
        failures++;
        $display("FAIL: x=%h r=%h en=%b%b y=%h dropped=%b", x, rnd, relu_en, drop_en, y, dropped);
      end
      ndrop += ed;
    end
    checks++;
    if (ndrop < 100) begin failures++; $display("FAIL: only %0d drops", ndrop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
