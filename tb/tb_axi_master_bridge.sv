// tb_axi_master_bridge: random write bursts of 1 to 64 beats through the
// bridge into a behavioural AXI4 DRAM, then read bursts of the same areas;
// data read back, burst attributes and WLAST placement (checked by the DRAM
// model), wdone pulses and the beat counters are compared.
module tb_axi_master_bridge;
  import p3net_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mem_m2s_t     mi;
  mem_s2m_t     mo;
  logic [31:0]  m_araddr, m_awaddr;
  logic [7:0]   m_arlen, m_awlen;
  logic [2:0]   m_arsize, m_awsize;
  logic [1:0]   m_arburst, m_awburst, m_rresp, m_bresp;
  logic         m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic         m_awvalid, m_awready, m_wlast, m_wvalid, m_wready;
  logic         m_bvalid, m_bready, err;
  logic [127:0] m_rdata, m_wdata;
  logic [15:0]  m_wstrb;
  logic [31:0]  rd_beats, wr_beats;

  axi_master_bridge dut (.clk, .rst_n, .mem_i(mi), .mem_o(mo), .*);

  axi_mem_model #(.DEPTH(4096)) u_mem (
    .clk, .rst_n,
    .araddr(m_araddr), .arlen(m_arlen), .arsize(m_arsize), .arburst(m_arburst),
    .arvalid(m_arvalid), .arready(m_arready), .rdata(m_rdata), .rresp(m_rresp),
    .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize), .awburst(m_awburst),
    .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata), .wstrb(m_wstrb),
    .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp),
    .bvalid(m_bvalid), .bready(m_bready)
  );

  initial begin
    #5ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  beat_t shadow [4096];
  int    n_wdone = 0;
  always @(posedge clk) if (mo.wdone) n_wdone++;

  task automatic wr_burst(input int beat, input int len);
    @(negedge clk);
    mi.wreq_valid = 1;
    mi.wreq.addr = addr_t'(beat * 16);
    mi.wreq.len = LEN_W'(len);
    while (!mo.wreq_ready) @(negedge clk);
    @(negedge clk);
    mi.wreq_valid = 0;
    for (int i = 0; i < len; i++) begin
      automatic beat_t d = {$urandom, $urandom, $urandom, $urandom};
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      mi.wvalid = 1;
      mi.wdata = d;
      while (!mo.wready) @(negedge clk);
      shadow[beat + i] = d;
      @(negedge clk);
      mi.wvalid = 0;
    end
    while (!mo.wdone) @(negedge clk);
  endtask

  task automatic rd_burst(input int beat, input int len, output int bad);
    int got = 0;
    bad = 0;
    @(negedge clk);
    mi.rreq_valid = 1;
    mi.rreq.addr = addr_t'(beat * 16);
    mi.rreq.len = LEN_W'(len);
    while (!mo.rreq_ready) @(negedge clk);
    @(negedge clk);
    mi.rreq_valid = 0;
    while (got < len) begin
      mi.rready = ($urandom_range(0, 3) != 0);
      #1;
      if (mo.rvalid && mi.rready) begin
        if (mo.rdata != shadow[beat + got]) bad++;
        if (mo.rlast != (got == len - 1)) bad++;
        got++;
      end
      @(negedge clk);
    end
    mi.rready = 0;
  endtask

  initial begin
    int nwb = 0, nrb = 0, bad;
    int starts [20], lens [20];
    mi = MEM_M2S_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      starts[t] = 64 * t + $urandom_range(0, 63);
      lens[t] = (t == 0) ? 64 : (t == 1) ? 1 : $urandom_range(1, 64);
      wr_burst(starts[t], lens[t]);
      nwb += lens[t];
    end
    repeat (2) @(negedge clk);
    checks++;
    if (n_wdone != 20) begin failures++; $display("FAIL: %0d wdone pulses", n_wdone); end
    for (int t = 19; t >= 0; t--) begin
      rd_burst(starts[t], lens[t], bad);
      nrb += lens[t];
      checks++;
      if (bad != 0) begin failures++; $display("FAIL: burst %0d: %0d bad beats", t, bad); end
    end
    checks += 4;
    if (u_mem.n_proto_err != 0) begin failures++; $display("FAIL: AXI attribute or WLAST errors"); end
    if (u_mem.n_aw != 20 || u_mem.n_ar != 20) begin failures++; $display("FAIL: burst counts"); end
    if (int'(wr_beats) != nwb || int'(rd_beats) != nrb) begin failures++; $display("FAIL: beat counters"); end
    if (err) begin failures++; $display("FAIL: error flag"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
