// feature_max: the Max stage of the encoder, a running element-wise maximum
// that turns per-point features psi into the global feature phi.
//
// PointNet's max pooling over all points is computed one point at a time:
// clear sets phi to zero at the start of a run, and every accepted psi
// updates phi <- max(phi, psi). Zero is a correct starting value because psi
// comes out of a ReLU and is never negative. This keeps only one N-element
// feature on chip instead of one per point.
// Interface: clear (one cycle), in_valid/in_vec (always accepted), phi.
// Timing: one vector per cycle; phi reflects an update on the next cycle and
// upd_count counts the vectors taken since the last clear.
// Sequential update and zero initialisation follow the paper.
module feature_max
  import p3net_pkg::*;
#(
  parameter int N = 252
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  fx_t [N-1:0] in_vec,
  output fx_t [N-1:0] phi,
  output logic [31:0] upd_count
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phi       <= '0;
      upd_count <= '0;
    end else if (clear) begin
      phi       <= '0;
      upd_count <= '0;
    end else if (in_valid) begin
      for (int e = 0; e < N; e++)
        if (in_vec[e] > phi[e]) phi[e] <= in_vec[e];
      upd_count <= upd_count + 1;
    end
  end

endmodule
