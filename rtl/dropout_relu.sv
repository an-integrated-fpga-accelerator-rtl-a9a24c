// dropout_relu: fused ReLU and Monte Carlo dropout with rate p = 0.5, one
// element per cycle.
//
// PNetLite keeps dropout active at inference time so that each forward pass
// samples a different next waypoint. An element is replaced by zero when it
// is negative (ReLU) or when its 32-bit random word r is below 2^31, i.e.
// when the top bit of r is clear; otherwise it passes unchanged. With
// drop_en low the unit applies only the ReLU, and with relu_en low as well it
// is a plain register stage (used after the last FC layer).
// Interface: in_valid, x, rnd, enables; out_valid, y, one cycle later.
// The rule (zero if x < 0 or r < 2^31) is the paper's. Surviving elements are
// not rescaled by 1/(1-p), as the paper's rule does not mention it.
module dropout_relu
  import p3net_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  fx_t         x,
  input  logic [31:0] rnd,
  input  logic        relu_en,
  input  logic        drop_en,
  output logic        out_valid,
  output fx_t         y,
  output logic        dropped
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      dropped   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        automatic logic kill_relu = relu_en && (x < 0);
        automatic logic kill_drop = drop_en && (rnd < 32'h8000_0000);
        y       <= (kill_relu || kill_drop) ? fx_t'(0) : x;
        dropped <= kill_drop && !kill_relu;
      end
    end
  end

endmodule
