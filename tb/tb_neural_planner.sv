// tb_neural_planner: the planner with a behavioural DRAM. Init PNet loads a
// model whose weights are zero, hidden biases one and output bias P, so
// every proposal is P while dropout still acts; Init MT seeds the
// generator. Four tasks from c_s = (-10,0) to c_g = (10,0) with P = (0,8):
// obstacles chosen so that the first free segment is (N_a, C_b), then
// (C_a, N_b), then (N_a, N_b), and finally none at all (P inside a box,
// failure after I = 2 iterations). Success flags, iterations, the status
// buffer, the waypoints written and the connection counters are checked.
module tb_neural_planner;
  import p3net_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int A_PRM = 0, A_OBS = 30000, A_TASK = 30100, A_PA = 30200,
                 A_PB = 30400, A_ST = 30600;

  logic        init_pnet_start = 0, mt_init_start = 0, run_start = 0, done, success;
  logic [31:0] seed = 32'd1234, n_obs = 0, max_iter = 0, n_iter, drop_count, obs_loads, last_nmid;
  logic [31:0] conn_kind [3];
  fx_t         delta = 32'd655;
  fx_t [PHI_DIM-1:0] phi = '0;
  mem_m2s_t    mo;
  mem_s2m_t    mi;

  neural_planner dut (
    .clk, .rst_n, .init_pnet_start, .mt_init_start, .run_start,
    .addr_params(A_PRM * 16), .seed, .addr_task(A_TASK * 16), .addr_obs(A_OBS * 16),
    .addr_path_a(A_PA * 16), .addr_path_b(A_PB * 16), .addr_status(A_ST * 16),
    .n_obs, .max_iter, .delta, .phi, .done, .success, .n_iter, .conn_kind,
    .drop_count, .obs_loads, .last_nmid, .mem_o(mo), .mem_i(mi)
  );
  mem_model #(.DEPTH(32768)) u_mem (.clk, .rst_n, .m(mo), .s(mi));

  initial begin
    #30ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic fx_t fx(input real r);
    return fx_t'($rtoi(r * 65536.0));
  endfunction
  function automatic logic [31:0] word(input int base, input int idx);
    return u_mem.mem[base + idx / 4][32*(idx % 4) +: 32];
  endfunction
  task automatic box(input int o, input real x0, input real y0, input real x1, input real y1);
    u_mem.mem[A_OBS + 2 * o]     = {64'b0, fx(y0), fx(x0)};
    u_mem.mem[A_OBS + 2 * o + 1] = {64'b0, fx(y1), fx(x1)};
  endtask
  task automatic go(ref logic sig);
    @(negedge clk);
    sig = 1;
    @(negedge clk);
    sig = 0;
    while (!done) @(negedge clk);
  endtask

  // run one task and check the status of pair 0 and the other pairs
  task automatic plan(input int nb, input int iters, input bit exp_ok, input int la, input int lb,
                      input string name);
    n_obs = nb;
    max_iter = iters;
    for (int i = 0; i < 16; i++) u_mem.mem[A_ST + i] = '1;
    go(run_start);
    check(success == exp_ok, {name, ": success"});
    check(int'(n_iter) == (exp_ok ? 1 : iters), $sformatf("%s: %0d iterations", name, n_iter));
    check(word(A_ST, 0) == 32'(exp_ok) && word(A_ST, 1) == la && word(A_ST, 2) == lb,
          $sformatf("%s: status %0d %0d %0d", name, word(A_ST, 0), word(A_ST, 1), word(A_ST, 2)));
    for (int j = 1; j < 4; j++)
      check(word(A_ST, 3*j) == 0 && word(A_ST, 3*j+1) == (exp_ok ? 1 : iters + 1),
            {name, ": status of other pairs"});
    check(word(A_PA, 0) == fx(-10.0) && word(A_PB, 0) == fx(10.0), {name, ": waypoint 0"});
    if (la > 1) check(word(A_PA + 1, 0) == fx(0.0) && word(A_PA + 1, 1) == fx(8.0), {name, ": forward waypoint P"});
    if (lb > 1) check(word(A_PB + 1, 0) == fx(0.0) && word(A_PB + 1, 1) == fx(8.0), {name, ": backward waypoint P"});
  endtask

  initial begin
    #1;
    for (int l = 0; l < PN_NL; l++) begin
      automatic int bofs = pn_off(l) + PN_DIM[l] * PN_DIM[l+1];
      for (int o = 0; o < PN_DIM[l+1]; o++) begin
        automatic int i = bofs + o;
        u_mem.mem[A_PRM + i / 4][32*(i % 4) +: 32] =
          (l == PN_NL - 1) ? ((o == 0) ? fx(0.0) : fx(8.0)) : 32'h0001_0000;
      end
    end
    u_mem.mem[A_TASK]     = {64'b0, fx(0.0), fx(-10.0)};
    u_mem.mem[A_TASK + 1] = {64'b0, fx(0.0), fx(10.0)};
    for (int c = 0; c < PHI_DIM; c++) phi[c] = fx_t'($urandom_range(0, 1 << 16));
    repeat (3) @(posedge clk);
    rst_n = 1;
    go(init_pnet_start);
    go(mt_init_start);
    box(0, -1, -5, 1, 5);
    plan(1, 5, 1'b1, 2, 1, "kind 0");
    check(conn_kind[0] == 1 && conn_kind[1] == 0 && conn_kind[2] == 0, "kind 0 counted");
    box(1, 4, 1, 6, 6);
    plan(2, 5, 1'b1, 1, 2, "kind 1");
    check(conn_kind[1] == 1, "kind 1 counted");
    box(2, -6, 1, -4, 6);
    plan(3, 5, 1'b1, 2, 2, "kind 2");
    check(conn_kind[2] == 1, "kind 2 counted");
    box(3, -1, 7, 1, 9);
    plan(4, 2, 1'b0, 3, 3, "no connection");
    for (int j = 0; j < 4; j++)
      for (int t = 1; t < 3; t++)
        check(word(A_PA, 4 * (3 * j + t) + 1) == fx(8.0) && word(A_PB, 4 * (3 * j + t) + 1) == fx(8.0),
              "all paths extended by P");
    check(drop_count > 0, "dropout active");
    check(last_nmid > 0, "discretisation count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
