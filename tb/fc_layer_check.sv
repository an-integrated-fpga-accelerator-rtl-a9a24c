// fc_layer_check: test harness for one fc_layer configuration. Loads random
// weights and biases, streams random vectors with random input gaps and
// output back-pressure, and compares each result with a reference
// y_o = trunc((b_o * 2^16 + sum_i x_i w_oi) / 2^16). Also measures the
// latency from input acceptance to a valid output, which must be
// IN_DIM*ceil(OUT_DIM/LANES) + 2 cycles when the output is free.
// Reports its check and failure counts once fin is set.
module fc_layer_check
  import p3net_pkg::*;
#(
  parameter int IN_DIM  = 2,
  parameter int OUT_DIM = 64,
  parameter int LANES   = 64,
  parameter int NVEC    = 40
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic fin
);

  localparam int NPRM   = IN_DIM * OUT_DIM + OUT_DIM;
  localparam int PA_W   = $clog2(NPRM + 1);
  localparam int GROUPS = (OUT_DIM + LANES - 1) / LANES;

  logic             prm_we = 0;
  logic [PA_W-1:0]  prm_addr = '0;
  prm_t             prm_data = '0;
  logic             in_valid = 0, in_ready, out_valid, out_ready = 0;
  fx_t [IN_DIM-1:0]  in_vec = '0;
  fx_t [OUT_DIM-1:0] out_vec;

  fc_layer #(.IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM), .LANES(LANES)) dut (.*);

  prm_t w [NPRM];
  fx_t  xin [NVEC][IN_DIM];
  int   t_acc [NVEC];

  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    checks = 0;
    failures = 0;
    fin = 0;
    for (int i = 0; i < NPRM; i++) w[i] = prm_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
    for (int v = 0; v < NVEC; v++)
      for (int i = 0; i < IN_DIM; i++) xin[v][i] = fx_t'($signed($urandom_range(0, 1 << 22)) - (1 << 21));
    @(posedge rst_n);
    for (int i = 0; i < NPRM; i++) begin
      @(negedge clk);
      prm_we = 1;
      prm_addr = PA_W'(i);
      prm_data = w[i];
    end
    @(negedge clk);
    prm_we = 0;
    fork
      // producer
      for (int v = 0; v < NVEC; v++) begin
        if (v >= NVEC / 2) while ($urandom_range(0, 1) == 0) @(negedge clk);
        in_valid = 1;
        in_vec = '0;
        for (int i = 0; i < IN_DIM; i++) in_vec[i] = xin[v][i];
        do @(posedge clk); while (!in_ready);
        t_acc[v] = cycle;
        @(negedge clk);
        in_valid = 0;
      end
      // consumer
      for (int v = 0; v < NVEC; v++) begin
        automatic int bad = 0;
        if (v >= NVEC / 2) begin
          out_ready = 0;
          while ($urandom_range(0, 1) == 0) @(negedge clk);
        end
        out_ready = 1;
        do @(posedge clk); while (!out_valid);
        if (v < NVEC / 2 && v == 0) begin
          checks++;
          if (cycle - t_acc[v] != IN_DIM * GROUPS + 2) begin
            failures++;
            $display("FAIL: fc latency %0d", cycle - t_acc[v]);
          end
        end
        for (int o = 0; o < OUT_DIM; o++) begin
          automatic logic signed [63:0] acc = 64'(w[IN_DIM * OUT_DIM + o]) <<< 16;
          for (int i = 0; i < IN_DIM; i++) acc += 64'(xin[v][i]) * 64'(w[o * IN_DIM + i]);
          if (out_vec[o] != fx_t'(acc >>> 16)) bad++;
        end
        checks++;
        if (bad != 0) begin
          failures++;
          $display("FAIL: fc(%0d,%0d) vector %0d: %0d mismatches", IN_DIM, OUT_DIM, v, bad);
        end
        @(negedge clk);
        out_ready = 0;
      end
    join
    fin = 1;
  end

endmodule
