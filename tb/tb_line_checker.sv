// tb_line_checker: random segments against random obstacle sets of 1 to
// 100 boxes (one or two buffer chunks) held in a behavioural DRAM. The
// reference discretises the segment into M = ceil(|p1-p0|/delta) pieces,
// with M computed exactly in integers (and compared with n_mid), and tests
// the M+1 points in real arithmetic; cases that a 2-LSB change of the boxes
// would flip are counted as ambiguous and not compared. Also checks that
// boxes are not reloaded while they fit in the buffer, and that invalidate
// forces a reload.
module tb_line_checker;
  import p3net_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        invalidate = 0, start = 0, done, collide;
  fx_t [1:0]   p0 = '0, p1 = '0;
  logic [31:0] n_obs = 0, n_mid, n_loads;
  fx_t         delta = 0;
  addr_t       addr_obs = 32'h1000;
  mem_m2s_t    mo;
  mem_s2m_t    mi;

  line_checker dut (.clk, .rst_n, .invalidate, .start, .p0, .p1, .n_obs, .delta,
                    .addr_obs, .done, .collide, .n_mid, .n_loads, .mem_o(mo), .mem_i(mi));
  mem_model #(.DEPTH(1024)) u_mem (.clk, .rst_n, .m(mo), .s(mi));

  initial begin
    #50ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  real bx0 [100], by0 [100], bx1 [100], by1 [100];

  function automatic logic [63:0] isqrt(input logic [63:0] v);
    logic [63:0] r = 64'($rtoi($sqrt(real'(v))));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  function automatic bit ref_hit(input int nb, input real m, input real grow);
    real ax = real'(p0[0]) / 65536.0, ay = real'(p0[1]) / 65536.0;
    real ex = real'(p1[0]) / 65536.0, ey = real'(p1[1]) / 65536.0;
    for (int i = 0; i <= int'(m); i++) begin
      real x = ax + (ex - ax) * i / m, y = ay + (ey - ay) * i / m;
      for (int o = 0; o < nb; o++)
        if (x >= bx0[o] - grow && x <= bx1[o] + grow && y >= by0[o] - grow && y <= by1[o] + grow)
          return 1'b1;
    end
    return 1'b0;
  endfunction

  task automatic run_check(output bit c, output int m);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    c = collide;
    m = int'(n_mid);
  endtask

  initial begin
    int nhit = 0, nfree = 0, namb = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int nb = (t % 3 == 2) ? $urandom_range(65, 100) : $urandom_range(1, 64);
      automatic logic [63:0] sq;
      automatic logic [63:0] len;
      automatic int mexp, mgot, loads0;
      automatic bit c, e_lo, e_hi;
      // obstacles in a 40 x 40 workspace, size 1..5
      for (int o = 0; o < nb; o++) begin
        automatic fx_t x0 = fx_t'($signed($urandom_range(0, 35 << 16)) - (20 << 16));
        automatic fx_t y0 = fx_t'($signed($urandom_range(0, 35 << 16)) - (20 << 16));
        automatic fx_t x1 = x0 + fx_t'($urandom_range(1 << 16, 5 << 16));
        automatic fx_t y1 = y0 + fx_t'($urandom_range(1 << 16, 5 << 16));
        u_mem.mem[32'h100 + 2 * o]     = {64'b0, y0, x0};
        u_mem.mem[32'h100 + 2 * o + 1] = {64'b0, y1, x1};
        bx0[o] = real'(x0) / 65536.0; by0[o] = real'(y0) / 65536.0;
        bx1[o] = real'(x1) / 65536.0; by1[o] = real'(y1) / 65536.0;
      end
      n_obs = nb;
      invalidate = 1;
      @(negedge clk);
      invalidate = 0;
      delta = fx_t'($urandom_range(655, 65536));   // 0.01 .. 1.0
      for (int s = 0; s < 4; s++) begin
        for (int k = 0; k < 2; k++) begin
          p0[k] = fx_t'($signed($urandom_range(0, 40 << 16)) - (20 << 16));
          p1[k] = (s == 3) ? p0[k] : fx_t'($signed($urandom_range(0, 40 << 16)) - (20 << 16));
        end
        if (s == 2) p1 = p0 + {fx_t'(3 << 14), fx_t'(1 << 14)};
        sq = 64'((64'(p1[0]) - 64'(p0[0])) * (64'(p1[0]) - 64'(p0[0])))
           + 64'((64'(p1[1]) - 64'(p0[1])) * (64'(p1[1]) - 64'(p0[1])));
        len = isqrt(sq);
        mexp = int'((len + 64'(delta) - 1) / 64'(delta));
        if (mexp == 0) mexp = 1;
        loads0 = int'(n_loads);
        run_check(c, mgot);
        checks++;
        if (mgot != mexp) begin
          failures++;
          $display("FAIL: M = %0d, expected %0d", mgot, mexp);
        end
        if (s > 0 && nb <= 64) begin
          checks++;
          if (int'(n_loads) != loads0) begin
            failures++;
            $display("FAIL: boxes reloaded although they fit");
          end
        end
        if (s == 0) begin
          checks++;
          if (int'(n_loads) == loads0) begin
            failures++;
            $display("FAIL: no reload after invalidate");
          end
        end
        e_lo = ref_hit(nb, real'(mexp), -3.0 / 65536.0);
        e_hi = ref_hit(nb, real'(mexp), 3.0 / 65536.0);
        if (e_lo != e_hi) namb++;
        else begin
          checks++;
          if (c != e_lo) begin
            failures++;
            $display("FAIL: test %0d.%0d nb=%0d collide=%b expected %b", t, s, nb, c, e_lo);
          end
          if (e_lo) nhit++; else nfree++;
        end
      end
    end
    $display("hits %0d, free %0d, ambiguous %0d", nhit, nfree, namb);
    checks++;
    if (nhit < 10 || nfree < 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
