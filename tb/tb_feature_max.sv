// tb_feature_max: a stream of random non-negative and negative feature
// vectors with random gaps; after every update the running maximum is
// compared with a reference, and clear is checked to restart from zero.
module tb_feature_max;
  import p3net_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  localparam int N = 252;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0;
  fx_t [N-1:0] in_vec = '0, phi;
  logic [31:0] upd_count;
  fx_t ref_max [N];
  feature_max dut (.*);

  initial begin
    #1ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int bad, nupd;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      @(negedge clk);
      clear = 1;
      for (int c = 0; c < N; c++) ref_max[c] = '0;
      @(negedge clk);
      clear = 0;
      nupd = 0;
      for (int p = 0; p < 40; p++) begin
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        for (int c = 0; c < N; c++) begin
          in_vec[c] = fx_t'($signed($urandom_range(0, 200000)) - 20000);
          if (in_vec[c] > ref_max[c]) ref_max[c] = in_vec[c];
        end
        in_valid = 1;
        nupd++;
        @(negedge clk);
        in_valid = 0;
        @(negedge clk);
        bad = 0;
        for (int c = 0; c < N; c++) if (phi[c] != ref_max[c]) bad++;
        checks++;
        if (bad != 0) begin
          failures++;
          $display("FAIL: round %0d point %0d: %0d mismatches", round, p, bad);
        end
      end
      checks++;
      if (upd_count != 32'(nupd)) begin
        failures++;
        $display("FAIL: upd_count %0d", upd_count);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
