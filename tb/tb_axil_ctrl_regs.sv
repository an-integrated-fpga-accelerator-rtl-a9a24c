// tb_axil_ctrl_regs: AXI4-Lite accesses to every register: write and read
// back of all settings (with address and data in either order and byte
// strobes), read-only result registers, the start pulse and its blocking
// while busy, the sticky done bit, the interrupt and the STAT registers.
module tb_axil_ctrl_regs;
  import p3net_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  s_awaddr = 0, s_araddr = 0;
  logic        s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [3:0]  s_wstrb = 4'hF;
  logic        s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0]  s_bresp, s_rresp;
  ctrl_cfg_t   cfg;
  logic        start, busy = 0, op_done = 0, collide = 0, success = 0, irq;
  logic [31:0] n_iter = 0;
  logic [31:0] stats [13];
  int          n_start = 0;

  axil_ctrl_regs dut (.*);

  always @(posedge clk) if (start) n_start++;

  initial begin
    #1ms;
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

  task automatic wr(input logic [7:0] a, input logic [31:0] d, input int order = 0,
                    input logic [3:0] strb = 4'hF);
    @(negedge clk);
    s_bready = 1;
    s_wstrb = strb;
    fork
      begin
        if (order == 2) repeat (2) @(negedge clk);
        s_awaddr = a;
        s_awvalid = 1;
        while (!s_awready) @(negedge clk);
        @(negedge clk);
        s_awvalid = 0;
      end
      begin
        if (order == 1) repeat (2) @(negedge clk);
        s_wdata = d;
        s_wvalid = 1;
        while (!s_wready) @(negedge clk);
        @(negedge clk);
        s_wvalid = 0;
      end
    join
    while (!s_bvalid) @(negedge clk);
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a;
    s_arvalid = 1;
    s_rready = 1;
    while (!s_arready) @(negedge clk);
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk);
    s_rready = 0;
  endtask

  initial begin
    logic [31:0] v, vals [32];
    for (int k = 0; k < 13; k++) stats[k] = 32'h100 + k;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // settings 0x08..0x1C and 0x28..0x48
    for (int r = 2; r <= 18; r++) begin
      if (r == 8 || r == 9) continue;
      vals[r] = $urandom;
      wr(8'(4 * r), vals[r], r % 3);
    end
    wr(8'h04, 32'd5);
    for (int r = 2; r <= 18; r++) begin
      if (r == 8 || r == 9) continue;
      rd(8'(4 * r), v);
      check(v == vals[r], $sformatf("register 0x%0h: %h, expected %h", 4 * r, v, vals[r]));
    end
    rd(8'h04, v);
    check(v == 5 && cfg.mode == MODE_RUN_PLANNER, "mode register");
    check(cfg.n_points == vals[2] && cfg.delta == vals[5] && cfg.addr_path == vals[18] &&
          cfg.addr_obs == vals[13], "settings reach the core");
    // byte strobes
    wr(8'h08, 32'hAABBCCDD, 0, 4'b0101);
    rd(8'h08, v);
    check(v == {vals[2][31:24], 8'hBB, vals[2][15:8], 8'hDD}, "byte strobes");
    // read-only registers
    wr(8'h20, 32'hFFFF_FFFF);
    rd(8'h20, v);
    check(v == 0, "collide is read only");
    // start, done, irq
    wr(8'h00, 32'h9);
    check(n_start == 1, "start pulse");
    busy = 1;
    rd(8'h00, v);
    check(v[2] == 0 && v[1] == 0 && v[3] == 1, "busy status");
    wr(8'h00, 32'h9);
    check(n_start == 1, "no start while busy");
    @(negedge clk);
    collide = 1;
    success = 1;
    n_iter = 32'd17;
    op_done = 1;
    @(negedge clk);
    op_done = 0;
    busy = 0;
    collide = 0;
    @(negedge clk);
    check(irq == 1, "interrupt raised");
    rd(8'h00, v);
    check(v[1] == 1 && v[2] == 1, "done and idle");
    rd(8'h20, v);
    check(v == 1, "collide captured at done");
    rd(8'h24, v);
    check(v == 1, "success captured at done");
    rd(8'h4C, v);
    check(v == 17, "iterations");
    for (int k = 0; k < 13; k++) begin
      rd(8'(8'h50 + 4 * k), v);
      check(v == 32'h100 + k, $sformatf("STAT %0d", k));
    end
    rd(8'h90, v);
    check(v == 0, "unmapped reads zero");
    wr(8'h00, 32'h1);
    check(n_start == 2 && irq == 0, "restart clears done, irq disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
