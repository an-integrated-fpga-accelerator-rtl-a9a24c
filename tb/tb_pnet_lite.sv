// tb_pnet_lite: PNetLite2D inference on 2B = 8 rows with random weights,
// random phi and random endpoints, run twice after seeding the generator.
// The reference computes the six FC layers in fixed point and applies
// Dropout-ReLU with its own MT19937 model, words taken in the order layer,
// row, channel; the next waypoints and the number of dropped activations
// must match exactly. The inference time must equal the FC schedule,
// 8 rows * sum_l IN_l * ceil(OUT_l/16) = 57,856 cycles, plus a small
// pipeline overhead.
module tb_pnet_lite;
  import p3net_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;
  localparam int NR = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        prm_we = 0, mt_init = 0, mt_busy, start = 0, done;
  logic [31:0] prm_addr = 0, seed = 0, drop_count;
  prm_t        prm_data = 0;
  fx_t [PHI_DIM-1:0] phi = '0;
  fx_t [NR-1:0][1:0] cur = '0, goal = '0, next;

  pnet_lite dut (.*);

  initial begin
    #30ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int cycle = 0;
  always @(posedge clk) cycle++;

  // MT19937 reference
  logic [31:0] st [624];
  int          mti;
  task automatic ref_seed(input logic [31:0] s);
    st[0] = s;
    for (int i = 1; i < 624; i++) st[i] = 32'd1812433253 * (st[i-1] ^ (st[i-1] >> 30)) + i;
    mti = 624;
  endtask
  function automatic logic [31:0] ref_next();
    logic [31:0] y;
    if (mti >= 624) begin
      for (int k = 0; k < 624; k++) begin
        y = (st[k] & 32'h8000_0000) | (st[(k+1) % 624] & 32'h7fff_ffff);
        st[k] = st[(k+397) % 624] ^ (y >> 1) ^ (y[0] ? 32'h9908_b0df : 32'h0);
      end
      mti = 0;
    end
    y = st[mti];
    mti++;
    y ^= (y >> 11);
    y ^= (y << 7) & 32'h9d2c_5680;
    y ^= (y << 15) & 32'hefc6_0000;
    y ^= (y >> 18);
    return y;
  endfunction

  prm_t w [PN_NPARAM];
  fx_t  exp_next [NR][2];
  int   exp_drops;

  task automatic reference();
    fx_t a [NR][256];
    fx_t b [NR][256];
    exp_drops = 0;
    for (int r = 0; r < NR; r++) begin
      for (int c = 0; c < PHI_DIM; c++) a[r][c] = phi[c];
      a[r][252] = cur[r][0];
      a[r][253] = cur[r][1];
      a[r][254] = goal[r][0];
      a[r][255] = goal[r][1];
    end
    for (int l = 0; l < PN_NL; l++) begin
      int di = PN_DIM[l], dout = PN_DIM[l+1], off = pn_off(l);
      for (int r = 0; r < NR; r++)
        for (int o = 0; o < dout; o++) begin
          logic signed [63:0] acc = 64'(w[off + di * dout + o]) <<< 16;
          for (int i = 0; i < di; i++) acc += 64'(a[r][i]) * 64'(w[off + o * di + i]);
          b[r][o] = fx_t'(acc >>> 16);
        end
      if (l < PN_NL - 1) begin
        for (int r = 0; r < NR; r++)
          for (int o = 0; o < dout; o++) begin
            logic [31:0] rn = ref_next();
            if (b[r][o] < 0) b[r][o] = 0;
            else if (rn < 32'h8000_0000) begin
              b[r][o] = 0;
              exp_drops++;
            end
          end
      end
      a = b;
    end
    for (int r = 0; r < NR; r++) begin
      exp_next[r][0] = a[r][0];
      exp_next[r][1] = a[r][1];
    end
  endtask

  initial begin
    int t0, bad, d0, spread;
    #1;
    for (int i = 0; i < PN_NPARAM; i++) w[i] = prm_t'($signed($urandom_range(0, 8192)) - 4096);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < PN_NPARAM; i++) begin
      @(negedge clk);
      prm_we = 1;
      prm_addr = i;
      prm_data = w[i];
    end
    @(negedge clk);
    prm_we = 0;
    seed = $urandom;
    ref_seed(seed);
    mt_init = 1;
    @(negedge clk);
    mt_init = 0;
    @(negedge clk);
    while (mt_busy) @(negedge clk);
    for (int run = 0; run < 2; run++) begin
      for (int c = 0; c < PHI_DIM; c++) phi[c] = fx_t'($urandom_range(0, 4 << 16));
      for (int r = 0; r < NR; r++)
        for (int k = 0; k < 2; k++) begin
          cur[r][k]  = fx_t'($signed($urandom_range(0, 40 << 16)) - (20 << 16));
          goal[r][k] = fx_t'($signed($urandom_range(0, 40 << 16)) - (20 << 16));
        end
      reference();
      d0 = int'(drop_count);
      t0 = cycle;
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      $display("inference %0d: %0d cycles, %0d dropped", run, cycle - t0, int'(drop_count) - d0);
      bad = 0;
      spread = 0;
      for (int r = 0; r < NR; r++)
        for (int k = 0; k < 2; k++) begin
          if (next[r][k] != exp_next[r][k]) bad++;
          if (exp_next[r][k] != exp_next[0][k]) spread++;
        end
      checks += 4;
      if (bad != 0) begin failures++; $display("FAIL: %0d wrong outputs", bad); end
      if (spread == 0) begin failures++; $display("FAIL: all rows equal"); end
      if (int'(drop_count) - d0 != exp_drops) begin
        failures++;
        $display("FAIL: %0d drops, expected %0d", int'(drop_count) - d0, exp_drops);
      end
      if (cycle - t0 < 57856 || cycle - t0 > 57856 + 1000) begin
        failures++;
        $display("FAIL: inference took %0d cycles", cycle - t0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
