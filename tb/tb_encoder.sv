// tb_encoder: Init ENet with a random parameter image, then Run encoder on
// point clouds of 1, 64 and 150 points (one, one full and three chunks)
// from a behavioural DRAM. phi is compared with a fixed-point reference of
// ENetLite2D with max pooling written here, and the run time with the rate
// of the slowest layer, FC(128,252) on 64 lanes: 512 cycles per point.
module tb_encoder;
  import p3net_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int A_PRM = 0;          // beat indices
  localparam int A_PTS = 14000;
  localparam int MAXP  = 150;

  logic        init_start = 0, run_start = 0, done;
  addr_t       addr_params = A_PRM * 16, addr_points = A_PTS * 16;
  logic [31:0] n_points = 0;
  fx_t [PHI_DIM-1:0] phi;
  mem_m2s_t    mo;
  mem_s2m_t    mi;

  encoder dut (.clk, .rst_n, .init_start, .run_start, .addr_params, .addr_points,
               .n_points, .done, .phi, .mem_o(mo), .mem_i(mi));
  mem_model #(.DEPTH(16384)) u_mem (.clk, .rst_n, .m(mo), .s(mi));

  initial begin
    #20ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  prm_t eprm [ENC_NPARAM];
  fx_t  pts [MAXP][2];
  fx_t  phi_ref [PHI_DIM];
  int   cycle = 0;
  always @(posedge clk) cycle++;

  function automatic prm_t rnd_prm(input int lo, input int hi);
    return prm_t'($signed($urandom_range(0, hi - lo)) + lo);
  endfunction

  task automatic enc_reference(input int np);
    fx_t v [256];
    fx_t u [256];
    for (int c = 0; c < PHI_DIM; c++) phi_ref[c] = '0;
    for (int p = 0; p < np; p++) begin
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

  task automatic pulse(ref logic sig);
    @(negedge clk);
    sig = 1;
    @(negedge clk);
    sig = 0;
  endtask

  initial begin
    int t0, bad, nz;
    int sizes [3] = '{1, 64, 150};
    #1;
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
    for (int i = 0; i < ENC_NPARAM; i++) u_mem.mem[A_PRM + i / 4][32*(i % 4) +: 32] = 32'(eprm[i]);
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cycle;
    pulse(init_start);
    while (!done) @(negedge clk);
    checks++;
    if (cycle - t0 < ENC_NPARAM / 4) begin failures++; $display("FAIL: Init ENet too fast"); end
    for (int s = 0; s < 3; s++) begin
      automatic int np = sizes[s];
      for (int p = 0; p < np; p++) begin
        pts[p][0] = fx_t'($signed($urandom_range(0, 40 << 16)) - (20 << 16));
        pts[p][1] = fx_t'($signed($urandom_range(0, 40 << 16)) - (20 << 16));
        u_mem.mem[A_PTS + p] = {64'b0, pts[p][1], pts[p][0]};
      end
      enc_reference(np);
      n_points = np;
      t0 = cycle;
      pulse(run_start);
      while (!done) @(negedge clk);
      $display("%0d points: %0d cycles", np, cycle - t0);
      bad = 0;
      nz = 0;
      for (int c = 0; c < PHI_DIM; c++) begin
        if (phi[c] != phi_ref[c]) bad++;
        if (phi_ref[c] != 0) nz++;
      end
      checks += 3;
      if (bad != 0) begin failures++; $display("FAIL: %0d points: %0d phi mismatches", np, bad); end
      if (nz < PHI_DIM / 4) begin failures++; $display("FAIL: phi mostly zero"); end
      if (np > 1 && (cycle - t0 < 512 * np || cycle - t0 > 512 * np + 4000)) begin
        failures++;
        $display("FAIL: %0d cycles for %0d points", cycle - t0, np);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
