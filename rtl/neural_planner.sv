// neural_planner: the NeuralPlanner module. It runs the batched bidirectional
// planner NeuralPlannerEx on chip: B forward paths grow from the start c_s
// towards the goal c_g and B backward paths from c_g towards c_s, until one
// forward/backward pair can be joined by a collision-free segment.
//
// Run planner (run_start):
//  1. reads c_s (beat 0) and c_g (beat 1) from addr_task;
//  2. initialises the endpoint buffer C (rows 2j and 2j+1 are c_s and c_g),
//     the destination buffer G (c_g and c_s), all path lengths l to 1, and
//     writes c_s / c_g as waypoint 0 of every forward / backward path;
//  3. runs PNetLite on (phi, C, G), giving the next waypoints N;
//  4. for j = 0..B-1 checks the segments (N_a, C_b), (C_a, N_b) and
//     (N_a, N_b) of pair j in this order; the first free one ends the task:
//     the new waypoints used by the connection are appended (only N_a, only
//     N_b or both) and the status is written with success;
//  5. otherwise every path gets its new waypoint appended, l is incremented,
//     C <- N, and the next iteration starts at 3, up to max_iter iterations.
// At the end the status buffer is written: B records of three 32-bit words
// {success flag, l_a, l_b}, packed four words per beat.
// DRAM result layout: waypoint t of forward path j at addr_path_a +
// 16*(j*(I+1)+t), backward paths likewise at addr_path_b; one beat per
// waypoint with x, y in words 0 and 1.
// Init PNet (init_pnet_start) streams the PNetLite parameter image from
// addr_params; Init MT (mt_init) seeds the dropout generator.
// Interface: one start pulse per operation, done pulses at the end; success
// is valid with done of a run. The memory port is shared in time between the
// parameter loader, the planner's own task/result transfers and the
// collision checker's obstacle reads.
// The algorithm, the on-chip buffers C, N, G, l and the DRAM buffer format
// follow the paper. When a pair connects, only that pair is extended, as in
// the paper's buffer illustration; the task layout and the addressing of the
// buffers through registers are this design's choices.
module neural_planner
  import p3net_pkg::*;
#(
  parameter int B     = 4,
  parameter int LANES = 16,
  localparam int NR   = 2 * B
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              init_pnet_start,
  input  logic              mt_init_start,
  input  logic              run_start,
  input  addr_t             addr_params,
  input  logic [31:0]       seed,
  input  addr_t             addr_task,
  input  addr_t             addr_obs,
  input  addr_t             addr_path_a,
  input  addr_t             addr_path_b,
  input  addr_t             addr_status,
  input  logic [31:0]       n_obs,
  input  logic [31:0]       max_iter,
  input  fx_t               delta,
  input  fx_t [PHI_DIM-1:0] phi,
  output logic              done,
  output logic              success,
  output logic [31:0]       n_iter,
  output logic [31:0]       conn_kind [3],
  output logic [31:0]       drop_count,
  output logic [31:0]       obs_loads,
  output logic [31:0]       last_nmid,
  output mem_m2s_t          mem_o,
  input  mem_s2m_t          mem_i
);

  localparam int BW  = $clog2(B + 1);
  localparam int NSB = (3 * B + 3) / 4;      // status beats

  typedef enum logic [4:0] {
    S_IDLE, S_LOAD, S_MT0, S_MT, S_TREQ, S_TRECV, S_INIT, S_PNET, S_PWAIT,
    S_CSTART, S_CWAIT, S_APPEND, S_SAPPEND, S_STATUS, S_WREQ, S_WDATA, S_WRESP,
    S_DONE
  } state_e;
  state_e state, ret;

  // -------------------------------------------------------------- buffers
  fx_t [NR-1:0][1:0] cbuf, gbuf, nbuf;
  logic [31:0]       plen [NR];
  fx_t [1:0]         cs, cg;

  // -------------------------------------------------------------- submodules
  logic        ld_done, ld_valid;
  logic [31:0] ld_idx;
  prm_t        ld_data;
  mem_m2s_t    ld_mem_o, lc_mem_o;
  logic        pn_start, pn_done, mt_busy;
  fx_t [NR-1:0][1:0] pn_next;

  param_loader #(.NWORDS(PN_NPARAM)) u_loader (
    .clk, .rst_n, .start(init_pnet_start && state == S_IDLE), .base(addr_params),
    .done(ld_done), .wr_valid(ld_valid), .wr_idx(ld_idx), .wr_data(ld_data),
    .mem_o(ld_mem_o), .mem_i(state == S_LOAD ? mem_i : MEM_S2M_IDLE)
  );

  pnet_lite #(.B(B), .LANES(LANES)) u_pnet (
    .clk, .rst_n, .prm_we(ld_valid), .prm_addr(ld_idx), .prm_data(ld_data),
    .mt_init(mt_init_start && state == S_IDLE), .seed, .mt_busy,
    .start(pn_start), .phi, .cur(cbuf), .goal(gbuf), .done(pn_done),
    .next(pn_next), .drop_count
  );

  logic      lc_start, lc_done, lc_collide;
  fx_t [1:0] lc_p0, lc_p1;
  line_checker u_lc (
    .clk, .rst_n, .invalidate(run_start && state == S_IDLE), .start(lc_start),
    .p0(lc_p0), .p1(lc_p1), .n_obs, .delta, .addr_obs,
    .done(lc_done), .collide(lc_collide), .n_mid(last_nmid), .n_loads(obs_loads),
    .mem_o(lc_mem_o), .mem_i(state == S_CWAIT ? mem_i : MEM_S2M_IDLE)
  );

  // -------------------------------------------------------------- control
  logic [31:0]  iter;
  logic [BW-1:0] cj;      // pair under test
  logic [1:0]   ck;       // which of the three segments
  logic [BW-1:0] sj;      // successful pair
  logic         exp_a, exp_b;
  logic [4:0]   wi;       // index over write list
  addr_t        w_addr;
  logic [LEN_W-1:0] w_len;
  logic [LEN_W-1:0] w_cnt;
  beat_t        w_beat;

  // segment endpoints for the current test
  always_comb begin
    lc_p0 = cbuf[2*cj];
    lc_p1 = cbuf[2*cj+1];
    case (ck)
      2'd0:    begin lc_p0 = nbuf[2*cj]; lc_p1 = cbuf[2*cj+1]; end
      2'd1:    begin lc_p0 = cbuf[2*cj]; lc_p1 = nbuf[2*cj+1]; end
      default: begin lc_p0 = nbuf[2*cj]; lc_p1 = nbuf[2*cj+1]; end
    endcase
  end

  function automatic addr_t wp_addr(input int row, input logic [31:0] t);
    addr_t base = row[0] ? addr_path_b : addr_path_a;
    return base + addr_t'((32'(row / 2) * (max_iter + 1) + t) * 16);
  endfunction

  function automatic beat_t pt_beat(input fx_t [1:0] p);
    return {64'b0, p[1], p[0]};
  endfunction

  // status words: {flag, l_a, l_b} per pair
  function automatic logic [31:0] status_word(input int w);
    int j = w / 3;
    if (j >= B) return '0;
    case (w % 3)
      0:       return {31'b0, success && (int'(sj) == j)};
      1:       return plen[2*j];
      default: return plen[2*j+1];
    endcase
  endfunction

  beat_t status_beat;
  always_comb begin
    for (int w = 0; w < 4; w++)
      status_beat[32*w +: 32] = status_word(4 * int'(w_cnt) + w);
  end

  always_comb begin
    mem_o = MEM_M2S_IDLE;
    case (state)
      S_LOAD:  mem_o = ld_mem_o;
      S_CWAIT: mem_o = lc_mem_o;
      S_TREQ: begin
        mem_o.rreq_valid = 1'b1;
        mem_o.rreq.addr  = addr_task;
        mem_o.rreq.len   = LEN_W'(2);
      end
      S_TRECV: mem_o.rready = 1'b1;
      S_WREQ: begin
        mem_o.wreq_valid = 1'b1;
        mem_o.wreq.addr  = w_addr;
        mem_o.wreq.len   = w_len;
      end
      S_WDATA: begin
        mem_o.wvalid = 1'b1;
        mem_o.wdata  = (ret == S_DONE) ? status_beat : w_beat;
      end
      default: ;
    endcase
  end

  assign pn_start = (state == S_PNET);
  assign lc_start = (state == S_CSTART);

  logic trecv_idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      ret     <= S_IDLE;
      done    <= 1'b0;
      success <= 1'b0;
      n_iter  <= '0;
      iter    <= '0;
      cj      <= '0;
      ck      <= '0;
      sj      <= '0;
      wi      <= '0;
      w_cnt   <= '0;
      trecv_idx <= 1'b0;
      for (int k = 0; k < 3; k++) conn_kind[k] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (init_pnet_start) state <= S_LOAD;
          else if (mt_init_start) state <= S_MT0;
          else if (run_start) begin
            success   <= 1'b0;
            iter      <= '0;
            trecv_idx <= 1'b0;
            state     <= S_TREQ;
          end
        end
        S_LOAD: if (ld_done) state <= S_DONE;
        S_MT0:  state <= S_MT;
        S_MT:   if (!mt_busy) state <= S_DONE;
        S_TREQ: if (mem_i.rreq_ready) state <= S_TRECV;
        S_TRECV: if (mem_i.rvalid) begin
          if (!trecv_idx) cs <= {beat_word(mem_i.rdata, 1), beat_word(mem_i.rdata, 0)};
          else            cg <= {beat_word(mem_i.rdata, 1), beat_word(mem_i.rdata, 0)};
          trecv_idx <= 1'b1;
          if (trecv_idx) begin
            wi    <= '0;
            state <= S_INIT;
          end
        end
        // buffers and waypoint 0 of every path
        S_INIT: begin
          for (int r = 0; r < NR; r++) begin
            cbuf[r] <= r[0] ? cg : cs;
            gbuf[r] <= r[0] ? cs : cg;
            plen[r] <= 32'd1;
          end
          if (int'(wi) == NR) begin
            state <= (max_iter == 0) ? S_STATUS : S_PNET;
          end else begin
            w_addr <= wp_addr(int'(wi), 32'd0);
            w_beat <= pt_beat(wi[0] ? cg : cs);
            w_len  <= LEN_W'(1);
            wi     <= wi + 1'b1;
            ret    <= S_INIT;
            state  <= S_WREQ;
          end
        end
        S_PNET: state <= S_PWAIT;
        S_PWAIT: if (pn_done) begin
          nbuf  <= pn_next;
          cj    <= '0;
          ck    <= '0;
          state <= S_CSTART;
        end
        S_CSTART: state <= S_CWAIT;
        S_CWAIT: if (lc_done) begin
          if (!lc_collide) begin
            sj      <= cj;
            success <= 1'b1;
            exp_a   <= (ck != 2'd1);
            exp_b   <= (ck != 2'd0);
            conn_kind[ck] <= conn_kind[ck] + 1;
            wi      <= '0;
            state   <= S_SAPPEND;
          end else if (ck != 2'd2) begin
            ck    <= ck + 1'b1;
            state <= S_CSTART;
          end else if (int'(cj) != B - 1) begin
            ck    <= '0;
            cj    <= cj + 1'b1;
            state <= S_CSTART;
          end else begin
            wi    <= '0;
            state <= S_APPEND;
          end
        end
        // no pair connected: extend every path, then iterate
        S_APPEND: begin
          if (int'(wi) == NR) begin
            for (int r = 0; r < NR; r++) plen[r] <= plen[r] + 1;
            cbuf   <= nbuf;
            iter   <= iter + 1;
            n_iter <= iter + 1;
            state  <= (iter + 1 >= max_iter) ? S_STATUS : S_PNET;
          end else begin
            w_addr <= wp_addr(int'(wi), plen[int'(wi)]);
            w_beat <= pt_beat(nbuf[wi]);
            w_len  <= LEN_W'(1);
            wi     <= wi + 1'b1;
            ret    <= S_APPEND;
            state  <= S_WREQ;
          end
        end
        // pair sj connected: extend only what the connection uses
        S_SAPPEND: begin
          if (wi == 5'd0) begin
            wi <= 5'd1;
            if (exp_a) begin
              w_addr <= wp_addr(2 * int'(sj), plen[2*sj]);
              w_beat <= pt_beat(nbuf[2*sj]);
              w_len  <= LEN_W'(1);
              plen[2*sj] <= plen[2*sj] + 1;
              ret    <= S_SAPPEND;
              state  <= S_WREQ;
            end
          end else if (wi == 5'd1) begin
            wi <= 5'd2;
            if (exp_b) begin
              w_addr <= wp_addr(2 * int'(sj) + 1, plen[2*sj+1]);
              w_beat <= pt_beat(nbuf[2*sj+1]);
              w_len  <= LEN_W'(1);
              plen[2*sj+1] <= plen[2*sj+1] + 1;
              ret    <= S_SAPPEND;
              state  <= S_WREQ;
            end
          end else begin
            n_iter <= iter + 1;
            state  <= S_STATUS;
          end
        end
        S_STATUS: begin
          w_addr <= addr_status;
          w_len  <= LEN_W'(NSB);
          ret    <= S_DONE;
          state  <= S_WREQ;
        end
        // single write transaction: request, beats, response
        S_WREQ: if (mem_i.wreq_ready) begin
          w_cnt <= '0;
          state <= S_WDATA;
        end
        S_WDATA: if (mem_i.wready) begin
          w_cnt <= w_cnt + 1'b1;
          if (w_cnt + 1'b1 == w_len) state <= S_WRESP;
        end
        S_WRESP: if (mem_i.wdone) state <= ret;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
