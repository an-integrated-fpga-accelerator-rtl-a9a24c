// tb_collision_checker: random paths of 1 to 150 waypoints (up to three
// overlapping path chunks) against random obstacle sets in a behavioural
// DRAM. The reference checks every edge, discretised as in the hardware,
// in real arithmetic and stops at the first colliding edge; its result and
// the number of edges tested are compared. Cases that a 2-LSB change of the
// boxes would flip are not compared.
module tb_collision_checker;
  import p3net_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start = 0, done, collide;
  addr_t       addr_path = 32'h4000, addr_obs = 32'h1000;
  logic [31:0] path_len = 0, n_obs = 0, n_edges, n_points, obs_loads;
  fx_t         delta = 0;
  mem_m2s_t    mo;
  mem_s2m_t    mi;

  collision_checker dut (.clk, .rst_n, .start, .addr_path, .path_len, .addr_obs, .n_obs,
                         .delta, .done, .collide, .n_edges, .n_points, .obs_loads,
                         .mem_o(mo), .mem_i(mi));
  mem_model #(.DEPTH(2048)) u_mem (.clk, .rst_n, .m(mo), .s(mi));

  initial begin
    #200ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  real bx0 [80], by0 [80], bx1 [80], by1 [80];
  fx_t wp [150][2];

  function automatic logic [63:0] isqrt(input logic [63:0] v);
    logic [63:0] r = 64'($rtoi($sqrt(real'(v))));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // 1 if the edge a-b collides, with boxes grown by g
  function automatic bit edge_hit(input int a, input int b, input int nb, input real g);
    logic [63:0] sq = 64'((64'(wp[b][0]) - 64'(wp[a][0])) * (64'(wp[b][0]) - 64'(wp[a][0])))
                    + 64'((64'(wp[b][1]) - 64'(wp[a][1])) * (64'(wp[b][1]) - 64'(wp[a][1])));
    logic [63:0] len = isqrt(sq);
    int m = int'((len + 64'(delta) - 1) / 64'(delta));
    real ax = real'(wp[a][0]) / 65536.0, ay = real'(wp[a][1]) / 65536.0;
    real ex = real'(wp[b][0]) / 65536.0, ey = real'(wp[b][1]) / 65536.0;
    if (m == 0) m = 1;
    for (int i = 0; i <= m; i++) begin
      real x = ax + (ex - ax) * i / m, y = ay + (ey - ay) * i / m;
      for (int o = 0; o < nb; o++)
        if (x >= bx0[o] - g && x <= bx1[o] + g && y >= by0[o] - g && y <= by1[o] + g) return 1'b1;
    end
    return 1'b0;
  endfunction

  initial begin
    int nhit = 0, nfree = 0, namb = 0, nlong = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int nb = $urandom_range(1, 80);
      automatic int np = (t % 4 == 0) ? $urandom_range(65, 150) : $urandom_range(1, 20);
      automatic int e_edges = 0, amb = 0;
      automatic bit e_col = 0;
      for (int o = 0; o < nb; o++) begin
        automatic fx_t x0 = fx_t'($signed($urandom_range(0, 38 << 16)) - (20 << 16));
        automatic fx_t y0 = fx_t'($signed($urandom_range(0, 38 << 16)) - (20 << 16));
        automatic fx_t x1 = x0 + fx_t'($urandom_range(1 << 14, 2 << 16));
        automatic fx_t y1 = y0 + fx_t'($urandom_range(1 << 14, 2 << 16));
        u_mem.mem[32'h100 + 2 * o]     = {64'b0, y0, x0};
        u_mem.mem[32'h100 + 2 * o + 1] = {64'b0, y1, x1};
        bx0[o] = real'(x0) / 65536.0; by0[o] = real'(y0) / 65536.0;
        bx1[o] = real'(x1) / 65536.0; by1[o] = real'(y1) / 65536.0;
      end
      // a random walk with short steps
      wp[0][0] = fx_t'($signed($urandom_range(0, 30 << 16)) - (15 << 16));
      wp[0][1] = fx_t'($signed($urandom_range(0, 30 << 16)) - (15 << 16));
      for (int i = 1; i < np; i++)
        for (int k = 0; k < 2; k++)
          wp[i][k] = wp[i-1][k] + fx_t'($signed($urandom_range(0, 1 << 16)) - (1 << 15));
      for (int i = 0; i < np; i++) u_mem.mem[32'h400 + i] = {64'b0, wp[i][1], wp[i][0]};
      n_obs = nb;
      path_len = np;
      delta = fx_t'($urandom_range(655, 16384));
      // reference
      if (np == 1) begin
        e_edges = 1;
        e_col = edge_hit(0, 0, nb, -3.0 / 65536.0);
        amb = (e_col != edge_hit(0, 0, nb, 3.0 / 65536.0));
      end else begin
        for (int i = 0; i + 1 < np && !e_col && !amb; i++) begin
          automatic bit lo = edge_hit(i, i + 1, nb, -3.0 / 65536.0);
          automatic bit hi = edge_hit(i, i + 1, nb, 3.0 / 65536.0);
          e_edges++;
          if (lo != hi) amb = 1;
          e_col = lo;
        end
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      if (amb) namb++;
      else begin
        checks += 2;
        if (collide != e_col || int'(n_edges) != e_edges) begin
          failures++;
          $display("FAIL: path %0d (%0d points, %0d boxes): collide %b/%b edges %0d/%0d",
                   t, np, nb, collide, e_col, n_edges, e_edges);
        end
        if (e_col) nhit++; else nfree++;
        if (e_edges > 63) nlong++;
      end
    end
    $display("hits %0d, free %0d, ambiguous %0d, multi-chunk %0d", nhit, nfree, namb, nlong);
    checks++;
    if (nhit < 3 || nfree < 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
