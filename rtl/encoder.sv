// encoder: the Encoder module, ENetLite2D inference over a point cloud.
//
// ENetLite is a PointNet encoder: every obstacle point p goes through the
// same five building blocks BE(2,64), BE(64,64), BE(64,64), BE(64,128),
// BE(128,252), each an FC layer followed by BN-ReLU, and the 252-D point
// features are max-pooled into the global feature phi. Instead of keeping
// all N point features, the module computes them one point at a time and
// folds each into phi (feature_max), so its buffers do not depend on N.
// The ten layer units form a pipeline with valid/ready handshakes; each
// unit's output register is the buffer to the next one, so up to about
// ten points are in flight and the slowest layer sets the rate.
//
// Init ENet (init_start): the parameter image at addr_params is streamed
// into the layer buffers by param_loader. Order of the image: for each block
// k the FC weights (o-major), FC bias, then BN mu, s and beta.
// Run encoder (run_start): phi is cleared, then the N points at addr_points
// (one 128-bit beat per point, x and y in words 0 and 1) are fetched in
// chunks of NC points into the point buffer; each chunk is fed into the
// pipeline point by point before the next chunk is fetched. done pulses when
// all N points have reached the Max stage.
// Timing: with LANES = 64 the slowest layer, FC(128,252), needs 512 cycles
// per point, so a run takes about 512*N cycles.
// The dataflow structure, chunked input (NC = 64) and sequential max update
// follow the paper; the DRAM layouts, LANES and the single-buffered chunk
// are this design's choices.
module encoder
  import p3net_pkg::*;
#(
  parameter int NC    = 64,
  parameter int LANES = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             init_start,
  input  logic             run_start,
  input  addr_t            addr_params,
  input  addr_t            addr_points,
  input  logic [31:0]      n_points,
  output logic             done,
  output fx_t [PHI_DIM-1:0] phi,
  output mem_m2s_t         mem_o,
  input  mem_s2m_t         mem_i
);

  localparam int MAXD = 256;

  // ---------------------------------------------------------------- params
  logic        ld_done, ld_valid;
  logic [31:0] ld_idx;
  prm_t        ld_data;
  mem_m2s_t    ld_mem_o;
  logic        loading;

  param_loader #(.NWORDS(ENC_NPARAM)) u_loader (
    .clk, .rst_n, .start(init_start), .base(addr_params), .done(ld_done),
    .wr_valid(ld_valid), .wr_idx(ld_idx), .wr_data(ld_data),
    .mem_o(ld_mem_o), .mem_i(loading ? mem_i : MEM_S2M_IDLE)
  );

  // ---------------------------------------------------------------- pipeline
  fx_t [MAXD-1:0] fc_in  [ENC_NL];
  fx_t [MAXD-1:0] bn_out [ENC_NL];
  logic fc_in_valid [ENC_NL], fc_in_ready [ENC_NL];
  logic fc_out_valid[ENC_NL], bn_in_ready [ENC_NL];
  logic bn_out_valid[ENC_NL], bn_out_ready[ENC_NL];

  logic        feed_valid;
  fx_t [1:0]   feed_vec;
  logic        max_clear;
  logic [31:0] max_count;

  for (genvar k = 0; k < ENC_NL; k++) begin : g_layer
    localparam int DI = ENC_DIM[k];
    localparam int DO = ENC_DIM[k+1];
    localparam int FC_OFF = enc_fc_off(k);
    localparam int BN_OFF = enc_bn_off(k);
    localparam int FC_N   = enc_fc_size(k);
    localparam int BN_N   = enc_bn_size(k);
    localparam int FC_PA_W = $clog2(FC_N + 1);
    localparam int BN_PA_W = $clog2(BN_N + 1);

    logic fc_we, bn_we;
    assign fc_we = ld_valid && int'(ld_idx) >= FC_OFF && int'(ld_idx) < FC_OFF + FC_N;
    assign bn_we = ld_valid && int'(ld_idx) >= BN_OFF && int'(ld_idx) < BN_OFF + BN_N;

    if (k == 0) begin : g_first
      assign fc_in_valid[k] = feed_valid;
      always_comb begin
        fc_in[k] = '0;
        fc_in[k][1:0] = feed_vec;
      end
    end else begin : g_next
      assign fc_in_valid[k]    = bn_out_valid[k-1];
      assign bn_out_ready[k-1] = fc_in_ready[k];
      assign fc_in[k]          = bn_out[k-1];
    end

    fx_t [DO-1:0] fco, bno;

    fc_layer #(.IN_DIM(DI), .OUT_DIM(DO), .LANES(LANES)) u_fc (
      .clk, .rst_n,
      .prm_we(fc_we), .prm_addr(FC_PA_W'(ld_idx - FC_OFF)), .prm_data(ld_data),
      .in_valid(fc_in_valid[k]), .in_ready(fc_in_ready[k]), .in_vec(fc_in[k][DI-1:0]),
      .out_valid(fc_out_valid[k]), .out_ready(bn_in_ready[k]), .out_vec(fco)
    );

    bn_relu #(.N(DO), .LANES(LANES)) u_bn (
      .clk, .rst_n,
      .prm_we(bn_we), .prm_addr(BN_PA_W'(ld_idx - BN_OFF)), .prm_data(ld_data),
      .in_valid(fc_out_valid[k]), .in_ready(bn_in_ready[k]), .in_vec(fco),
      .out_valid(bn_out_valid[k]), .out_ready(bn_out_ready[k]), .out_vec(bno)
    );

    always_comb begin
      bn_out[k] = '0;
      bn_out[k][DO-1:0] = bno;
    end
  end

  assign bn_out_ready[ENC_NL-1] = 1'b1;

  feature_max #(.N(PHI_DIM)) u_max (
    .clk, .rst_n, .clear(max_clear),
    .in_valid(bn_out_valid[ENC_NL-1]), .in_vec(bn_out[ENC_NL-1][PHI_DIM-1:0]),
    .phi(phi), .upd_count(max_count)
  );

  // ---------------------------------------------------------------- control
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_REQ, S_RECV, S_FEED, S_DRAIN} state_e;
  state_e state;

  fx_t [1:0]   pbuf [NC];
  logic [31:0] n_total, n_fetched, chunk_n, recv_i, feed_i;

  assign loading = (state == S_LOAD);
  assign feed_valid = (state == S_FEED);
  assign feed_vec   = pbuf[feed_i[$clog2(NC)-1:0]];

  always_comb begin
    if (loading) mem_o = ld_mem_o;
    else begin
      mem_o = MEM_M2S_IDLE;
      mem_o.rreq_valid = (state == S_REQ);
      mem_o.rreq.addr  = addr_points + addr_t'(n_fetched) * 16;
      mem_o.rreq.len   = LEN_W'(chunk_n);
      mem_o.rready     = (state == S_RECV);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      max_clear <= 1'b0;
      n_total   <= '0;
      n_fetched <= '0;
      chunk_n   <= '0;
      recv_i    <= '0;
      feed_i    <= '0;
    end else begin
      done      <= 1'b0;
      max_clear <= 1'b0;
      case (state)
        S_IDLE: begin
          if (init_start) state <= S_LOAD;
          else if (run_start) begin
            max_clear <= 1'b1;
            n_total   <= n_points;
            n_fetched <= '0;
            chunk_n   <= (n_points > 32'(NC)) ? 32'(NC) : n_points;
            state     <= (n_points == 0) ? S_DRAIN : S_REQ;
          end
        end
        S_LOAD: if (ld_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_REQ: if (mem_i.rreq_ready) begin
          recv_i <= '0;
          state  <= S_RECV;
        end
        S_RECV: if (mem_i.rvalid) begin
          pbuf[recv_i[$clog2(NC)-1:0]] <= {beat_word(mem_i.rdata, 1), beat_word(mem_i.rdata, 0)};
          recv_i <= recv_i + 1;
          if (recv_i + 1 == chunk_n) begin
            feed_i <= '0;
            state  <= S_FEED;
          end
        end
        S_FEED: if (fc_in_ready[0]) begin
          feed_i <= feed_i + 1;
          if (feed_i + 1 == chunk_n) begin
            n_fetched <= n_fetched + chunk_n;
            if (n_fetched + chunk_n >= n_total) state <= S_DRAIN;
            else begin
              chunk_n <= ((n_total - n_fetched - chunk_n) > 32'(NC)) ? 32'(NC)
                                                                   : (n_total - n_fetched - chunk_n);
              state   <= S_REQ;
            end
          end
        end
        S_DRAIN: if (!max_clear && max_count == n_total) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
