// tb_p3net_core: end-to-end and full-size testbench of the accelerator at
// its default configuration (B = 4, 64-point / 64-obstacle / 64-waypoint
// chunks, 8 Check units). A behavioural AXI4 DRAM is attached to the master
// port and the host is modelled by AXI4-Lite register accesses.
//
// Sequence: Init ENet with random parameters; Run encoder on 130 random
// points (three point chunks), phi compared with a fixed-point reference
// computed here, and the cycles per point checked against the slowest
// layer (FC(128,252): 128 * 252/64 = 512 cycles); Init MT; Init PNet with a
// model whose weights are zero, hidden biases one and output bias P, so
// every proposal is the point P while dropout still acts on the hidden
// units; Run planner on a task that connects in the first iteration through
// (P, c_g) and on a task with P inside a wall, the last of 70 obstacles (two
// obstacle chunks per check) that fails after I iterations; Run collision checks on a free and
// a colliding 70-waypoint path. DRAM results, result registers, the
// interrupt and the activity counters are checked, and each mechanism must
// have been seen at least once.
module tb_p3net_core;
  import p3net_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2.5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- DUT
  logic [7:0]   s_awaddr = '0, s_araddr = '0;
  logic         s_awvalid = 1'b0, s_wvalid = 1'b0, s_bready = 1'b0;
  logic         s_arvalid = 1'b0, s_rready = 1'b0;
  logic [31:0]  s_wdata = '0;
  logic [3:0]   s_wstrb = 4'hF;
  logic         s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0]   s_bresp, s_rresp;
  logic [31:0]  s_rdata;
  logic [31:0]  m_araddr, m_awaddr;
  logic [7:0]   m_arlen, m_awlen;
  logic [2:0]   m_arsize, m_awsize;
  logic [1:0]   m_arburst, m_awburst, m_rresp, m_bresp;
  logic         m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic         m_awvalid, m_awready, m_wlast, m_wvalid, m_wready;
  logic         m_bvalid, m_bready, irq;
  logic [127:0] m_rdata, m_wdata;
  logic [15:0]  m_wstrb;

  p3net_core dut (.*);

  axi_mem_model #(.DEPTH(65536)) u_mem (
    .clk, .rst_n,
    .araddr(m_araddr), .arlen(m_arlen), .arsize(m_arsize), .arburst(m_arburst),
    .arvalid(m_arvalid), .arready(m_arready), .rdata(m_rdata), .rresp(m_rresp),
    .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize), .awburst(m_awburst),
    .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata), .wstrb(m_wstrb),
    .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp),
    .bvalid(m_bvalid), .bready(m_bready)
  );

  // watchdog
  initial begin
    #40ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ---------------------------------------------------------------- host
  task automatic reg_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1'b1; s_wdata = d; s_wvalid = 1'b1; s_bready = 1'b1;
    fork
      begin do @(posedge clk); while (!s_awready); @(negedge clk); s_awvalid = 1'b0; end
      begin do @(posedge clk); while (!s_wready);  @(negedge clk); s_wvalid  = 1'b0; end
    join
    while (!s_bvalid) @(negedge clk);
    check(s_bresp == 2'b00, "write response");
    @(posedge clk);
    @(negedge clk);
    s_bready = 1'b0;
  endtask

  task automatic reg_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1'b1; s_rready = 1'b1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 1'b0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(posedge clk);
    @(negedge clk);
    s_rready = 1'b0;
  endtask

  int cycle = 0;
  always @(posedge clk) cycle++;

  // run one mode; returns its duration in cycles
  task automatic run_mode(input mode_e m, output int cyc);
    logic [31:0] st;
    int t0;
    reg_wr(8'h04, 32'(m));
    t0 = cycle;
    reg_wr(8'h00, 32'h9);              // start, interrupt enabled
    while (!irq) @(negedge clk);
    cyc = cycle - t0;
    reg_rd(8'h00, st);
    check(st[1] == 1'b1 && st[2] == 1'b1, $sformatf("done/idle after mode %0d", m));
  endtask

  // ---------------------------------------------------------------- layout
  localparam int A_ENET = 0;           // beat indices
  localparam int A_PNET = 16384;
  localparam int A_PTS  = 48000;
  localparam int A_OBS  = 52000;
  localparam int A_TASK = 53000;
  localparam int A_PA   = 54000;
  localparam int A_PB   = 56000;
  localparam int A_ST   = 58000;
  localparam int A_PATH = 59000;
  localparam int NPTS   = 130;

  function automatic fx_t fx(input real r);
    return fx_t'($rtoi(r * 65536.0));
  endfunction

  function automatic logic [31:0] word(input int beat, input int w);
    return u_mem.mem[beat][32*w +: 32];
  endfunction

  task automatic put_word(input int base, input int idx, input logic [31:0] v);
    u_mem.mem[base + idx / 4][32*(idx % 4) +: 32] = v;
  endtask

  task automatic put_pt(input int beat, input fx_t x, input fx_t y);
    u_mem.mem[beat] = {64'b0, y, x};
  endtask

  // ---------------------------------------------------------------- ENet reference
  prm_t eprm [ENC_NPARAM];
  fx_t  pts  [NPTS][2];
  fx_t  phi_ref [PHI_DIM];

  function automatic prm_t rnd_prm(input int lo, input int hi);
    return prm_t'($signed($urandom_range(0, hi - lo)) + lo);
  endfunction

  task automatic enc_reference();
    fx_t v [256];
    fx_t u [256];
    for (int c = 0; c < PHI_DIM; c++) phi_ref[c] = '0;
    for (int p = 0; p < NPTS; p++) begin
      v[0] = pts[p][0];
      v[1] = pts[p][1];
      for (int k = 0; k < ENC_NL; k++) begin
        int di = ENC_DIM[k], dout = ENC_DIM[k+1];
        int fo = enc_fc_off(k), bo = enc_bn_off(k);
        for (int o = 0; o < dout; o++) begin
          logic signed [63:0] acc = 64'(eprm[fo + di*dout + o]) <<< 16;
          for (int i = 0; i < di; i++) acc += 64'(v[i]) * 64'(eprm[fo + o*di + i]);
          u[o] = fx_t'(acc >>> 16);
        end
        for (int o = 0; o < dout; o++) begin
          logic signed [63:0] d = 64'(u[o]) - 64'(eprm[bo + o]);
          logic signed [63:0] s = d * 64'(eprm[bo + dout + o]) + (64'(eprm[bo + 2*dout + o]) <<< 16);
          v[o] = (s < 0) ? fx_t'(0) : fx_t'(s >>> 16);
        end
      end
      for (int c = 0; c < PHI_DIM; c++) if (v[c] > phi_ref[c]) phi_ref[c] = v[c];
    end
  endtask

  // ---------------------------------------------------------------- mechanisms
  int m_enc_init, m_enc_run, m_phi_ok, m_pt_chunks, m_mt, m_pn_init, m_plan_ok,
      m_plan_fail, m_drop, m_obs_reload, m_cc_free, m_cc_hit, m_irq, m_path_chunks;

  initial begin
    int cyc;
    logic [31:0] r;
    fx_t px, py;
    int bad;
    m_enc_init = 0; m_enc_run = 0; m_phi_ok = 0; m_pt_chunks = 0; m_mt = 0;
    m_pn_init = 0; m_plan_ok = 0; m_plan_fail = 0; m_drop = 0; m_obs_reload = 0;
    m_cc_free = 0; m_cc_hit = 0; m_irq = 0; m_path_chunks = 0;
    #1;                                         // after the DRAM model is cleared

    // ENet parameters: FC weights in [-0.125, 0.125], biases small,
    // BN mu small, s in [0.5, 1.5], beta small
    for (int k = 0; k < ENC_NL; k++) begin
      automatic int di = ENC_DIM[k], dout = ENC_DIM[k+1];
      automatic int fo = enc_fc_off(k), bo = enc_bn_off(k);
      for (int i = 0; i < di * dout; i++) eprm[fo + i] = rnd_prm(-8192, 8192);
      for (int o = 0; o < dout; o++) begin
        eprm[fo + di*dout + o] = rnd_prm(-4096, 4096);
        eprm[bo + o]           = rnd_prm(-4096, 4096);
        eprm[bo + dout + o]    = rnd_prm(32768, 98304);
        eprm[bo + 2*dout + o]  = rnd_prm(-2048, 8192);
      end
    end
    for (int i = 0; i < ENC_NPARAM; i++) put_word(A_ENET, i, 32'(eprm[i]));
    for (int p = 0; p < NPTS; p++) begin
      pts[p][0] = fx_t'($signed($urandom_range(0, 40 * 65536)) - 20 * 65536);
      pts[p][1] = fx_t'($signed($urandom_range(0, 40 * 65536)) - 20 * 65536);
      put_pt(A_PTS + p, pts[p][0], pts[p][1]);
    end
    // PNet parameters: zero weights, hidden biases 1.0, output bias P
    px = fx(0.0);
    py = fx(8.0);
    for (int l = 0; l < PN_NL; l++) begin
      automatic int bofs = pn_off(l) + PN_DIM[l] * PN_DIM[l+1];
      for (int o = 0; o < PN_DIM[l+1]; o++)
        put_word(A_PNET, bofs + o, (l == PN_NL - 1) ? ((o == 0) ? px : py) : 32'h0001_0000);
    end

    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    reg_wr(8'h08, NPTS);
    reg_wr(8'h10, 32'd3);                       // I
    reg_wr(8'h14, fx(0.01));                    // delta
    reg_wr(8'h18, 32'd5489);                    // seed
    reg_wr(8'h28, A_PTS * 16);
    reg_wr(8'h2C, A_ENET * 16);
    reg_wr(8'h30, A_PNET * 16);
    reg_wr(8'h34, A_OBS * 16);
    reg_wr(8'h38, A_TASK * 16);
    reg_wr(8'h3C, A_PA * 16);
    reg_wr(8'h40, A_PB * 16);
    reg_wr(8'h44, A_ST * 16);
    reg_wr(8'h48, A_PATH * 16);
    reg_rd(8'h2C, r);
    check(r == A_ENET * 16, "register read back");

    // ---------------- Init ENet, Run encoder
    run_mode(MODE_INIT_ENET, cyc);
    m_enc_init++;
    m_irq += irq;
    check(cyc >= ENC_NPARAM / 4 && cyc < 2 * ENC_NPARAM, $sformatf("Init ENet cycles %0d", cyc));
    enc_reference();
    run_mode(MODE_RUN_ENCODER, cyc);
    m_enc_run++;
    $display("encoder: %0d cycles for %0d points (%0d per point)", cyc, NPTS, cyc / NPTS);
    check(cyc >= 512 * NPTS && cyc <= 512 * NPTS + 6000, $sformatf("encoder cycles %0d", cyc));
    bad = 0;
    for (int c = 0; c < PHI_DIM; c++) if (dut.phi[c] != phi_ref[c]) bad++;
    check(bad == 0, $sformatf("phi mismatches %0d", bad));
    r = 0;
    for (int c = 0; c < PHI_DIM; c++) if (phi_ref[c] != 0) r++;
    check(r > PHI_DIM / 4, $sformatf("phi has %0d non-zero features", r));
    if (bad == 0) m_phi_ok++;
    reg_rd(8'h50 + 4 * 2, r);                    // read beats
    check(r > 0, "read beats counted");
    m_pt_chunks = (NPTS + 63) / 64;

    // ---------------- Init MT, Init PNet
    run_mode(MODE_INIT_MT, cyc);
    m_mt++;
    check(cyc >= 624 && cyc < 800, $sformatf("Init MT cycles %0d", cyc));
    run_mode(MODE_INIT_PNET, cyc);
    m_pn_init++;
    check(cyc >= PN_NPARAM / 4 && cyc < 2 * PN_NPARAM, $sformatf("Init PNet cycles %0d", cyc));

    // ---------------- planner, task 1: one wall segment, success via (P, c_g)
    put_pt(A_TASK, fx(-10.0), fx(0.0));
    put_pt(A_TASK + 1, fx(10.0), fx(0.0));
    put_pt(A_OBS, fx(-1.0), fx(-5.0));
    put_pt(A_OBS + 1, fx(1.0), fx(5.0));
    reg_wr(8'h0C, 32'd1);
    run_mode(MODE_RUN_PLANNER, cyc);
    $display("planner task 1: %0d cycles", cyc);
    reg_rd(8'h24, r);
    check(r == 1, "task 1 succeeds");
    if (r == 1) m_plan_ok++;
    reg_rd(8'h4C, r);
    check(r == 1, $sformatf("task 1 iterations %0d", r));
    check(word(A_ST, 0) == 1 && word(A_ST, 1) == 2 && word(A_ST, 2) == 1, "task 1 status of pair 0");
    for (int j = 1; j < 4; j++) begin
      automatic int w = 3 * j;
      check(word(A_ST + w / 4, w % 4) == 0, "task 1 flag of other pairs");
      check(word(A_ST + (w + 1) / 4, (w + 1) % 4) == 1, "task 1 l_a of other pairs");
    end
    check(word(A_PA, 0) == fx(-10.0) && word(A_PA, 1) == 0, "path a waypoint 0");
    check(word(A_PA + 1, 0) == px && word(A_PA + 1, 1) == py, $sformatf("path a waypoint 1 is P: %h %h", word(A_PA + 1, 0), word(A_PA + 1, 1)));
    check(word(A_PB, 0) == fx(10.0), "path b waypoint 0");
    check(word(A_PA + 4, 0) == fx(-10.0) && word(A_PB + 4, 0) == fx(10.0), "pair 1 waypoint 0");
    reg_rd(8'h50 + 4 * 7, r);
    check(r == 1, "connection kind (N_a, C_b) counted");
    reg_rd(8'h50 + 4 * 4, r);
    check(r > 0, "dropout zeroed activations");
    m_drop = r;

    // ---------------- planner, task 2: P inside a wall, 70 obstacles, fails
    put_pt(A_OBS + 2 * 69, fx(-1.0), fx(-30.0));
    put_pt(A_OBS + 2 * 69 + 1, fx(1.0), fx(30.0));
    for (int o = 0; o < 69; o++) begin
      put_pt(A_OBS + 2 * o, fx(25.0 + o), fx(25.0));
      put_pt(A_OBS + 2 * o + 1, fx(25.5 + o), fx(26.0));
    end
    reg_wr(8'h0C, 32'd70);
    reg_rd(8'h50 + 4 * 5, r);
    bad = int'(r);
    run_mode(MODE_RUN_PLANNER, cyc);
    $display("planner task 2: %0d cycles", cyc);
    reg_rd(8'h24, r);
    check(r == 0, "task 2 fails");
    if (r == 0) m_plan_fail++;
    reg_rd(8'h4C, r);
    check(r == 3, $sformatf("task 2 iterations %0d", r));
    for (int j = 0; j < 4; j++) begin
      check(word(A_ST + (3*j) / 4, (3*j) % 4) == 0, "task 2 flags");
      check(word(A_ST + (3*j+1) / 4, (3*j+1) % 4) == 4, "task 2 l_a");
      check(word(A_ST + (3*j+2) / 4, (3*j+2) % 4) == 4, "task 2 l_b");
      for (int t = 1; t < 4; t++) begin
        check(word(A_PA + 4*j + t, 1) == py, "task 2 forward waypoints");
        check(word(A_PB + 4*j + t, 1) == py, "task 2 backward waypoints");
      end
    end
    reg_rd(8'h50 + 4 * 5, r);
    $display("planner obstacle loads: %0d", int'(r) - bad);
    check(int'(r) - bad >= 2 * 3 * 3 * 4, "obstacle chunks reloaded per check");
    if (int'(r) - bad >= 2 * 3 * 3 * 4) m_obs_reload++;

    // ---------------- collision checks on 70-waypoint paths
    reg_wr(8'h0C, 32'd1);
    put_pt(A_OBS, fx(-1.0), fx(-5.0));
    put_pt(A_OBS + 1, fx(1.0), fx(5.0));
    reg_wr(8'h1C, 32'd70);
    for (int t = 0; t < 70; t++) put_pt(A_PATH + t, fx(-17.25 + 0.5 * t), fx(-15.0));
    run_mode(MODE_RUN_CCHECK, cyc);
    reg_rd(8'h20, r);
    check(r == 0, "free path");
    if (r == 0) m_cc_free++;
    reg_rd(8'h50 + 4 * 10, r);
    check(r == 69, $sformatf("edges of free path %0d", r));
    if (r == 69) m_path_chunks++;
    for (int t = 0; t < 70; t++) put_pt(A_PATH + t, fx(-17.25 + 0.5 * t), fx(-3.0 + 0.1 * t));
    run_mode(MODE_RUN_CCHECK, cyc);
    reg_rd(8'h20, r);
    check(r == 1, "colliding path");
    if (r == 1) m_cc_hit++;
    m_irq += irq;

    check(u_mem.n_proto_err == 0, "AXI protocol");
    reg_rd(8'h50 + 4 * 1, r);
    check(r == 0, "no AXI error");
    // mode 0 finishes at once
    run_mode(MODE_NONE, cyc);
    check(cyc < 20, "mode 0");

    $display("mechanisms: enc_init=%0d enc_run=%0d phi_ok=%0d pt_chunks=%0d mt=%0d pn_init=%0d plan_ok=%0d plan_fail=%0d drop=%0d obs_reload=%0d cc_free=%0d cc_hit=%0d path_chunks=%0d irq=%0d",
             m_enc_init, m_enc_run, m_phi_ok, m_pt_chunks, m_mt, m_pn_init, m_plan_ok,
             m_plan_fail, m_drop, m_obs_reload, m_cc_free, m_cc_hit, m_path_chunks, m_irq);
    check(m_enc_init > 0 && m_enc_run > 0 && m_phi_ok > 0 && m_pt_chunks > 1 && m_mt > 0 &&
          m_pn_init > 0 && m_plan_ok > 0 && m_plan_fail > 0 && m_drop > 0 &&
          m_obs_reload > 0 && m_cc_free > 0 && m_cc_hit > 0 && m_path_chunks > 0 && m_irq > 0,
          "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
