// bn_relu_check: test harness for one bn_relu configuration. Loads random
// mu, s and beta, streams random vectors with random gaps and output
// back-pressure, and compares each result with the reference
// y = max(0, trunc(((x - mu) * s + beta * 2^16) / 2^16)). Checks that the
// first result is valid ceil(N/LANES) + 2 cycles after its input was taken.
// Reports its check and failure counts once fin is set.
module bn_relu_check
  import p3net_pkg::*;
#(
  parameter int N     = 64,
  parameter int LANES = 64,
  parameter int NVEC  = 40
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic fin
);

  localparam int PA_W   = $clog2(3 * N + 1);
  localparam int GROUPS = (N + LANES - 1) / LANES;

  logic            prm_we = 0;
  logic [PA_W-1:0] prm_addr = '0;
  prm_t            prm_data = '0;
  logic            in_valid = 0, in_ready, out_valid, out_ready = 0;
  fx_t [N-1:0]     in_vec = '0, out_vec;

  bn_relu #(.N(N), .LANES(LANES)) dut (.*);

  prm_t p [3 * N];
  fx_t  xin [NVEC][N];
  int   t_acc [NVEC];
  int   cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    int nzero;
    checks = 0;
    failures = 0;
    fin = 0;
    nzero = 0;
    for (int i = 0; i < 3 * N; i++) p[i] = prm_t'($signed($urandom_range(0, 1 << 19)) - (1 << 18));
    for (int v = 0; v < NVEC; v++)
      for (int i = 0; i < N; i++) xin[v][i] = fx_t'($signed($urandom_range(0, 1 << 22)) - (1 << 21));
    @(posedge rst_n);
    for (int i = 0; i < 3 * N; i++) begin
      @(negedge clk);
      prm_we = 1;
      prm_addr = PA_W'(i);
      prm_data = p[i];
    end
    @(negedge clk);
    prm_we = 0;
    fork
      for (int v = 0; v < NVEC; v++) begin
        if (v >= NVEC / 2) while ($urandom_range(0, 1) == 0) @(negedge clk);
        in_valid = 1;
        for (int i = 0; i < N; i++) in_vec[i] = xin[v][i];
        do @(posedge clk); while (!in_ready);
        t_acc[v] = cycle;
        @(negedge clk);
        in_valid = 0;
      end
      for (int v = 0; v < NVEC; v++) begin
        automatic int bad = 0;
        if (v >= NVEC / 2) begin
          out_ready = 0;
          while ($urandom_range(0, 1) == 0) @(negedge clk);
        end
        out_ready = 1;
        do @(posedge clk); while (!out_valid);
        if (v == 0) begin
          checks++;
          if (cycle - t_acc[v] != GROUPS + 2) begin
            failures++;
            $display("FAIL: bn latency %0d", cycle - t_acc[v]);
          end
        end
        for (int o = 0; o < N; o++) begin
          automatic logic signed [63:0] s = (64'(xin[v][o]) - 64'(p[o])) * 64'(p[N + o])
                                            + (64'(p[2 * N + o]) <<< 16);
          automatic fx_t e = (s < 0) ? fx_t'(0) : fx_t'(s >>> 16);
          if (out_vec[o] != e) bad++;
          if (e == 0) nzero++;
        end
        checks++;
        if (bad != 0) begin
          failures++;
          $display("FAIL: bn(%0d) vector %0d: %0d mismatches", N, v, bad);
        end
        @(negedge clk);
        out_ready = 0;
      end
    join
    checks++;
    if (nzero == 0 || nzero == NVEC * N) failures++;
    fin = 1;
  end

endmodule
