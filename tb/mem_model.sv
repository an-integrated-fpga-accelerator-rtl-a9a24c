// mem_model: behavioural DRAM for testbenches, serving the core's internal
// burst port (mem_m2s_t / mem_s2m_t). DEPTH beats of 128 bits from byte
// address 0. Read bursts return one beat per cycle after a short latency,
// with random one-cycle gaps when STALL is set; write bursts accept one beat
// per cycle and pulse wdone two cycles after the last beat. Counts the read
// and write requests it served. Testbenches fill and inspect mem directly.
module mem_model
  import p3net_pkg::*;
#(
  parameter int DEPTH = 16384,
  parameter bit STALL = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_m2s_t m,
  output mem_s2m_t s
);

  beat_t mem [DEPTH];
  int    n_rreq, n_wreq;

  logic        rd_act, wr_act;
  logic [31:0] rd_idx, rd_left, wr_idx, wr_left;
  logic [2:0]  wr_resp;
  logic        gap;

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_comb begin
    s = MEM_S2M_IDLE;
    s.rreq_ready = !rd_act;
    s.rvalid     = rd_act && !gap;
    s.rdata      = mem[rd_idx % DEPTH];
    s.rlast      = rd_act && (rd_left == 1);
    s.wreq_ready = !wr_act && (wr_resp == 0);
    s.wready     = wr_act;
    s.wdone      = (wr_resp == 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_act  <= 1'b0;
      wr_act  <= 1'b0;
      rd_idx  <= '0;
      rd_left <= '0;
      wr_idx  <= '0;
      wr_left <= '0;
      wr_resp <= '0;
      gap     <= 1'b1;
      n_rreq  <= 0;
      n_wreq  <= 0;
    end else begin
      gap <= STALL ? ($urandom_range(0, 3) == 0) : 1'b0;
      if (m.rreq_valid && s.rreq_ready) begin
        assert (m.rreq.addr[3:0] == 0) else $error("unaligned read");
        rd_act  <= 1'b1;
        rd_idx  <= m.rreq.addr / 16;
        rd_left <= 32'(m.rreq.len);
        n_rreq  <= n_rreq + 1;
      end
      if (s.rvalid && m.rready) begin
        rd_idx  <= rd_idx + 1;
        rd_left <= rd_left - 1;
        if (rd_left == 1) rd_act <= 1'b0;
      end
      if (wr_resp != 0) wr_resp <= wr_resp - 1'b1;
      if (m.wreq_valid && s.wreq_ready) begin
        assert (m.wreq.addr[3:0] == 0) else $error("unaligned write");
        wr_act  <= 1'b1;
        wr_idx  <= m.wreq.addr / 16;
        wr_left <= 32'(m.wreq.len);
        n_wreq  <= n_wreq + 1;
      end
      if (wr_act && m.wvalid) begin
        mem[wr_idx % DEPTH] <= m.wdata;
        wr_idx  <= wr_idx + 1;
        wr_left <= wr_left - 1;
        if (wr_left == 1) begin
          wr_act  <= 1'b0;
          wr_resp <= 3'd3;
        end
      end
    end
  end

endmodule
