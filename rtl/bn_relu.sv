// bn_relu: fused batch normalisation and ReLU over an N-element vector,
// y = max(0, (x - mu) * s + beta).
//
// The scale s = gamma / sqrt(var + eps) is computed by the host, so the
// hardware needs one subtraction, one multiplication and one addition per
// element. LANES elements are processed per cycle; mu, s and beta live in
// per-lane banks in the 8.16 parameter format. The product of a 16.16
// difference and an 8.16 scale has 32 fraction bits; beta is aligned to it,
// the sum is truncated to 16.16 and negative values are clamped to zero.
//
// Interface: parameter writes with mu at 0..N-1, s at N..2N-1 and beta at
// 2N..3N-1; valid/ready handshakes on the input and output vectors; the
// output register doubles as the pipeline buffer to the next layer.
// Timing: ceil(N/LANES) cycles per vector plus one to move the result out.
// The formula and the host-side scale are the paper's; LANES and the
// arithmetic narrowing are this design's choices.
module bn_relu
  import p3net_pkg::*;
#(
  parameter int N     = 64,
  parameter int LANES = 64,
  localparam int GROUPS = (N + LANES - 1) / LANES,
  localparam int PA_W   = $clog2(3 * N + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           prm_we,
  input  logic [PA_W-1:0] prm_addr,
  input  prm_t           prm_data,
  input  logic           in_valid,
  output logic           in_ready,
  input  fx_t [N-1:0]    in_vec,
  output logic           out_valid,
  input  logic           out_ready,
  output fx_t [N-1:0]    out_vec
);

  localparam int GRP_W = (GROUPS > 1) ? $clog2(GROUPS) : 1;

  prm_t mu_mem   [LANES][GROUPS];
  prm_t s_mem    [LANES][GROUPS];
  prm_t beta_mem [LANES][GROUPS];

  always_ff @(posedge clk) begin
    if (prm_we) begin
      automatic int a = int'(prm_addr);
      if (a < N)            mu_mem  [a % LANES][a / LANES] <= prm_data;
      else if (a < 2 * N)   s_mem   [(a - N) % LANES][(a - N) / LANES] <= prm_data;
      else if (a < 3 * N)   beta_mem[(a - 2 * N) % LANES][(a - 2 * N) / LANES] <= prm_data;
    end
  end

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_HOLD} state_e;
  state_e state;
  fx_t [N-1:0] x_reg;
  fx_t [N-1:0] res;
  logic [GRP_W-1:0] grp;

  assign in_ready = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      grp       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_IDLE: if (in_valid) begin
          x_reg <= in_vec;
          grp   <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          for (int l = 0; l < LANES; l++) begin
            automatic int e = int'(grp) * LANES + l;
            if (e < N) begin
              automatic logic signed [63:0] diff, prod, sum;
              diff = 64'(x_reg[e]) - 64'(mu_mem[l][grp]);
              prod = diff * 64'(s_mem[l][grp]);
              sum  = prod + (64'(beta_mem[l][grp]) <<< FX_FRAC);
              res[e] <= (sum < 0) ? fx_t'(0) : fx_from_acc(sum);
            end
          end
          if (int'(grp) == GROUPS - 1) state <= S_HOLD;
          else grp <= grp + 1'b1;
        end
        S_HOLD: if (!out_valid || out_ready) begin
          out_vec   <= res;
          out_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
