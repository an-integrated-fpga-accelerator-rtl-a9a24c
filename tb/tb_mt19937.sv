// tb_mt19937: the generator against the published MT19937 sequence for the
// default seed 5489 (first five words and the 10000th word), and against a
// reference model written here for a random seed, including random gaps in
// rnd_take and a reseed. Also checks that seeding takes 624 cycles.
module tb_mt19937;
  timeunit 1ns;
  timeprecision 1ps;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init_start = 0, busy, rnd_valid, rnd_take = 0;
  logic [31:0] seed = 0, rnd;
  mt19937 dut (.*);

  initial begin
    #5ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // reference model
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

  task automatic do_seed(input logic [31:0] s);
    int c = 0;
    @(negedge clk);
    seed = s;
    init_start = 1;
    @(negedge clk);
    init_start = 0;
    while (busy) begin
      @(negedge clk);
      c++;
    end
    checks++;
    if (c < 623 || c > 626) begin
      failures++;
      $display("FAIL: seeding took %0d cycles", c);
    end
  endtask

  task automatic take(output logic [31:0] v, input bit gaps);
    @(negedge clk);
    if (gaps) while ($urandom_range(0, 2) == 0) @(negedge clk);
    while (!rnd_valid) @(negedge clk);
    v = rnd;
    rnd_take = 1;
    @(negedge clk);
    rnd_take = 0;
  endtask

  initial begin
    logic [31:0] v, e;
    logic [31:0] golden [5] = '{32'd3499211612, 32'd581869302, 32'd3890346734,
                                32'd3586334585, 32'd545404204};
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_seed(32'd5489);
    for (int i = 0; i < 10000; i++) begin
      take(v, 1'b0);
      if (i < 5) begin
        checks++;
        if (v != golden[i]) begin
          failures++;
          $display("FAIL: word %0d = %0d, expected %0d", i, v, golden[i]);
        end
      end
    end
    checks++;
    if (v != 32'd4123659995) begin
      failures++;
      $display("FAIL: word 10000 = %0d", v);
    end
    e = $urandom;
    do_seed(e);
    ref_seed(e);
    for (int i = 0; i < 1500; i++) begin
      take(v, 1'b1);
      e = ref_next();
      checks++;
      if (v != e) begin
        failures++;
        if (failures < 5) $display("FAIL: seeded word %0d = %h, expected %h", i, v, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
