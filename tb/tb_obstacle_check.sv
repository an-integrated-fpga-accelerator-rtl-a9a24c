// tb_obstacle_check: random points and boxes against a reference
// containment test, plus boundary points and the valid input.
module tb_obstacle_check;
  import p3net_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic valid;
  fx_t [1:0] pt, bmin, bmax;
  logic hit;
  obstacle_check #(.D(2)) dut (.valid, .pt, .box_min(bmin), .box_max(bmax), .hit);
  initial begin
    #1000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    int nhit = 0;
    for (int n = 0; n < 2000; n++) begin
      logic exp;
      valid = ($urandom_range(0, 7) != 0);
      for (int k = 0; k < 2; k++) begin
        bmin[k] = fx_t'($signed($urandom_range(0, 2000)) - 1000);
        bmax[k] = bmin[k] + fx_t'($urandom_range(0, 800));
        case ($urandom_range(0, 3))
          0: pt[k] = bmin[k];
          1: pt[k] = bmax[k];
          default: pt[k] = fx_t'($signed($urandom_range(0, 2000)) - 1000);
        endcase
      end
      #1;
      exp = valid && pt[0] >= bmin[0] && pt[0] <= bmax[0] && pt[1] >= bmin[1] && pt[1] <= bmax[1];
      checks++;
      if (hit != exp) begin
        failures++;
        $display("FAIL: pt %0d,%0d box %0d..%0d %0d..%0d hit %b", pt[0], pt[1], bmin[0], bmax[0], bmin[1], bmax[1], hit);
      end
      nhit += exp;
    end
    checks++;
    if (nhit < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
