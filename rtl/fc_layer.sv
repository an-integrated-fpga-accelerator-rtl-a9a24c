// fc_layer: fully-connected layer FC(IN_DIM, OUT_DIM) for one input vector,
// y = W^T x + b, the matrix-vector form used by both networks of the core.
//
// How it works: the layer keeps its own weight and bias buffer, split into
// LANES banks so that LANES output channels are computed side by side. Output
// channels are processed in groups of LANES; for each group the input vector
// is walked one element per cycle and every lane multiplies that element with
// its weight and accumulates at full precision (16.16 x 8.16 gives 32
// fraction bits). At the end of a group the bias is already included (it seeds
// the accumulator) and the lanes are narrowed to 16.16 by truncation.
// A finished vector is moved into the output register, which also acts as the
// pipeline buffer between layers: the layer accepts the next input while its
// previous result waits to be taken.
//
// Interface: parameter writes (prm_we, prm_addr, prm_data) with weight (o,i)
// at o*IN_DIM+i and bias o at IN_DIM*OUT_DIM+o; valid/ready handshakes on
// the input and output vectors.
// Timing: IN_DIM*ceil(OUT_DIM/LANES) cycles of computation per vector, plus
// one cycle to move the result out.
// The paper gives the layer's function, the number formats and that the loop
// is partially unrolled; the unroll factor LANES and the truncating
// arithmetic are this design's choices.
module fc_layer
  import p3net_pkg::*;
#(
  parameter int IN_DIM  = 2,
  parameter int OUT_DIM = 64,
  parameter int LANES   = 64,
  localparam int GROUPS = (OUT_DIM + LANES - 1) / LANES,
  localparam int NPRM   = IN_DIM * OUT_DIM + OUT_DIM,
  localparam int PA_W   = $clog2(NPRM + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // parameter load
  input  logic                 prm_we,
  input  logic [PA_W-1:0]      prm_addr,
  input  prm_t                 prm_data,
  // input vector
  input  logic                 in_valid,
  output logic                 in_ready,
  input  fx_t [IN_DIM-1:0]     in_vec,
  // output vector
  output logic                 out_valid,
  input  logic                 out_ready,
  output fx_t [OUT_DIM-1:0]    out_vec
);

  localparam int WDEPTH = GROUPS * IN_DIM;
  localparam int IDX_W  = (IN_DIM > 1) ? $clog2(IN_DIM) : 1;
  localparam int GRP_W  = (GROUPS > 1) ? $clog2(GROUPS) : 1;

  prm_t wmem [LANES][WDEPTH];
  prm_t bmem [LANES][GROUPS];

  // parameter write decode
  always_ff @(posedge clk) begin
    if (prm_we) begin
      if (int'(prm_addr) < IN_DIM * OUT_DIM) begin
        automatic int o = int'(prm_addr) / IN_DIM;
        automatic int i = int'(prm_addr) % IN_DIM;
        wmem[o % LANES][(o / LANES) * IN_DIM + i] <= prm_data;
      end else if (int'(prm_addr) < NPRM) begin
        automatic int o = int'(prm_addr) - IN_DIM * OUT_DIM;
        bmem[o % LANES][o / LANES] <= prm_data;
      end
    end
  end

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_HOLD} state_e;
  state_e state;

  fx_t [IN_DIM-1:0]  x_reg;
  fx_t [OUT_DIM-1:0] res;
  logic [IDX_W-1:0]  idx;
  logic [GRP_W-1:0]  grp;
  logic signed [63:0] acc [LANES];

  assign in_ready = (state == S_IDLE);

  wire out_free = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      idx       <= '0;
      grp       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_IDLE: if (in_valid) begin
          x_reg <= in_vec;
          idx   <= '0;
          grp   <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          for (int l = 0; l < LANES; l++) begin
            automatic logic signed [63:0] prod;
            automatic logic signed [63:0] base;
            prod = 64'(x_reg[idx]) * 64'(wmem[l][int'(grp) * IN_DIM + int'(idx)]);
            base = (idx == '0) ? (64'(bmem[l][grp]) <<< FX_FRAC) : acc[l];
            acc[l] <= base + prod;
            if (int'(idx) == IN_DIM - 1 && int'(grp) * LANES + l < OUT_DIM)
              res[int'(grp) * LANES + l] <= fx_from_acc(base + prod);
          end
          if (int'(idx) == IN_DIM - 1) begin
            idx <= '0;
            if (int'(grp) == GROUPS - 1) state <= S_HOLD;
            else grp <= grp + 1'b1;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_HOLD: if (out_free) begin
          out_vec   <= res;
          out_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
