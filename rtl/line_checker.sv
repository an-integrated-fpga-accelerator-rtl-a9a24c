// line_checker: collision check of one straight segment (p0, p1) against the
// obstacle boxes, by testing points spaced at most delta apart.
//
// The segment is cut into M = max(1, ceil(|p1 - p0| / delta)) pieces and the
// M+1 points c_i = p0 + (i/M)(p1 - p0), i = 0..M, are tested; the segment
// collides if any of them lies inside any obstacle. The length is found with
// a bit-serial square root (32 cycles), M with a bit-serial division
// (32 cycles) and the per-point step (p1 - p0)/M with two bit-serial
// divisions carrying 32 extra fraction bits (64 cycles), so that
// accumulating the step gives midpoints accurate to well under one LSB; the
// last point is p1 itself.
// Obstacles are held in an on-chip buffer of NC_OBS boxes and tested NCHK at
// a time by obstacle_check units, so one point takes ceil(boxes/NCHK) cycles.
// With more than NC_OBS obstacles the boxes are processed chunk by chunk,
// each chunk being tested against all points. The check ends at the first
// hit. When all obstacles fit in the buffer they stay loaded between checks
// until invalidate is pulsed (at the start of a new task).
// Obstacle layout in DRAM: two beats per box, minimum corner then maximum
// corner, coordinates in words 0 and 1 (16.16).
// Interface: start with p0, p1, n_obs, delta, addr_obs; done pulses with
// collide valid; n_mid reports M of the last check.
// The discretised test, the 8 parallel Check units and the 64-box buffer
// follow the paper. The paper performs this check in 32-bit floating point;
// this design uses 16.16 fixed point with a 64-bit midpoint accumulator.
module line_checker
  import p3net_pkg::*;
#(
  parameter int NCHK   = 8,
  parameter int NC_OBS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        invalidate,
  input  logic        start,
  input  fx_t [1:0]   p0,
  input  fx_t [1:0]   p1,
  input  logic [31:0] n_obs,
  input  fx_t         delta,
  input  addr_t       addr_obs,
  output logic        done,
  output logic        collide,
  output logic [31:0] n_mid,
  output logic [31:0] n_loads,
  output mem_m2s_t    mem_o,
  input  mem_s2m_t    mem_i
);

  localparam int NGRP   = NC_OBS / NCHK;
  localparam int OBS_PER_BURST = MAX_BURST / 2;

  fx_t [1:0] omin [NC_OBS];
  fx_t [1:0] omax [NC_OBS];
  logic      loaded;

  typedef enum logic [3:0] {
    S_IDLE, S_SQRT, S_DIVM, S_DIVS, S_CHUNK, S_REQ, S_RECV, S_TEST, S_DONE
  } state_e;
  state_e state;

  fx_t [1:0]          a, b;
  logic [63:0]        adx [2];     // |p1 - p0| per coordinate
  logic [1:0]         neg;
  logic [63:0]        sq;          // squared length, 32 fraction bits
  logic [63:0]        rem64;       // sqrt remainder
  logic [31:0]        root;        // length, 16.16
  logic [6:0]         cnt;
  logic [31:0]        m_q, m_r;
  logic [63:0]        sq_q [2];
  logic [31:0]        sq_r [2];
  logic [31:0]        mm;
  logic signed [63:0] step [2];
  logic signed [63:0] acc  [2];
  logic [31:0]        pi;          // point index 0..M
  logic [31:0]        chunk_base, chunk_cnt, recv_cnt, req_cnt;
  logic [$clog2(NGRP+1)-1:0] grp;

  // current test point
  fx_t [1:0] pt;
  always_comb begin
    for (int k = 0; k < 2; k++)
      pt[k] = (pi == mm) ? b[k] : fx_t'(acc[k] >>> 32);
  end

  logic [NCHK-1:0] hits;
  for (genvar c = 0; c < NCHK; c++) begin : g_chk
    localparam int CI = c;
    logic [31:0] oi;
    assign oi = 32'(grp) * NCHK + CI;
    obstacle_check #(.D(2)) u_chk (
      .valid(oi < chunk_cnt),
      .pt(pt),
      .box_min(omin[oi[$clog2(NC_OBS)-1:0]]),
      .box_max(omax[oi[$clog2(NC_OBS)-1:0]]),
      .hit(hits[c])
    );
  end

  always_comb begin
    mem_o = MEM_M2S_IDLE;
    mem_o.rreq_valid = (state == S_REQ);
    mem_o.rreq.addr  = addr_obs + addr_t'(chunk_base + req_cnt) * 32;
    mem_o.rreq.len   = LEN_W'(((chunk_cnt - req_cnt) > OBS_PER_BURST) ? 2 * OBS_PER_BURST
                                                                      : 2 * (chunk_cnt - req_cnt));
    mem_o.rready     = (state == S_RECV);
  end

  wire [31:0] last_grp = (chunk_cnt + NCHK - 1) / NCHK - 1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      loaded  <= 1'b0;
      done    <= 1'b0;
      collide <= 1'b0;
      n_mid   <= '0;
      n_loads <= '0;
      chunk_cnt <= '0;
    end else begin
      done <= 1'b0;
      if (invalidate) loaded <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          a <= p0;
          b <= p1;
          for (int k = 0; k < 2; k++) begin
            automatic logic signed [63:0] d = 64'(p1[k]) - 64'(p0[k]);
            neg[k] <= d[63];
            adx[k] <= d[63] ? 64'(-d) : 64'(d);
          end
          sq    <= 64'((64'(p1[0]) - 64'(p0[0])) * (64'(p1[0]) - 64'(p0[0])))
                 + 64'((64'(p1[1]) - 64'(p0[1])) * (64'(p1[1]) - 64'(p0[1])));
          rem64 <= '0;
          root  <= '0;
          cnt   <= '0;
          state <= S_SQRT;
        end
        // bit-serial integer square root of sq (two bits per step)
        S_SQRT: begin
          automatic logic [65:0] r2 = {rem64, sq[63:62]};
          automatic logic [65:0] t  = {32'b0, root, 2'b01};
          sq <= sq << 2;
          if (r2 >= t) begin
            rem64 <= 64'(r2 - t);
            root  <= {root[30:0], 1'b1};
          end else begin
            rem64 <= 64'(r2);
            root  <= {root[30:0], 1'b0};
          end
          cnt <= cnt + 1'b1;
          if (cnt == 7'd31) begin
            cnt   <= '0;
            m_q   <= '0;
            m_r   <= '0;
            state <= S_DIVM;
          end
        end
        // M = ceil(root / delta), bit-serial restoring division
        S_DIVM: begin
          automatic logic [32:0] r = {m_r, root[31 - cnt[4:0]]};
          if (r >= {1'b0, delta}) begin
            m_r <= 32'(r - {1'b0, delta});
            m_q <= {m_q[30:0], 1'b1};
          end else begin
            m_r <= 32'(r);
            m_q <= {m_q[30:0], 1'b0};
          end
          cnt <= cnt + 1'b1;
          if (cnt == 7'd31) begin
            automatic logic [31:0] q = {m_q[30:0], (r >= {1'b0, delta})};
            automatic logic [31:0] rr = (r >= {1'b0, delta}) ? 32'(r - {1'b0, delta}) : 32'(r);
            automatic logic [31:0] mq = q + ((rr != 0) ? 32'd1 : 32'd0);
            mm    <= (mq == 0) ? 32'd1 : mq;
            cnt   <= '0;
            for (int k = 0; k < 2; k++) begin
              sq_q[k] <= '0;
              sq_r[k] <= '0;
            end
            state <= S_DIVS;
          end
        end
        // step = |dx| * 2^32 / M, 64 quotient bits
        S_DIVS: begin
          for (int k = 0; k < 2; k++) begin
            automatic logic [63:0] dvd = {adx[k][31:0], 32'b0};
            automatic logic [32:0] r = {sq_r[k], dvd[63 - cnt[5:0]]};
            if (r >= {1'b0, mm}) begin
              sq_r[k] <= 32'(r - {1'b0, mm});
              sq_q[k] <= {sq_q[k][62:0], 1'b1};
            end else begin
              sq_r[k] <= 32'(r);
              sq_q[k] <= {sq_q[k][62:0], 1'b0};
            end
          end
          cnt <= cnt + 1'b1;
          if (cnt == 7'd63) begin
            state <= S_CHUNK;
            chunk_base <= '0;
          end
        end
        S_CHUNK: begin
          for (int k = 0; k < 2; k++) begin
            step[k] <= neg[k] ? -$signed(sq_q[k]) : $signed(sq_q[k]);
            acc[k]  <= 64'(a[k]) <<< 32;
          end
          pi  <= '0;
          grp <= '0;
          n_mid <= mm;
          chunk_cnt <= ((n_obs - chunk_base) > 32'(NC_OBS)) ? 32'(NC_OBS) : (n_obs - chunk_base);
          req_cnt <= '0;
          if (n_obs == 0) begin
            collide <= 1'b0;
            state   <= S_DONE;
          end else if (loaded && n_obs <= 32'(NC_OBS)) state <= S_TEST;
          else state <= S_REQ;
        end
        S_REQ: if (mem_i.rreq_ready) begin
          recv_cnt <= '0;
          state    <= S_RECV;
        end
        S_RECV: if (mem_i.rvalid) begin
          automatic logic [31:0] oi = req_cnt + (recv_cnt >> 1);
          if (recv_cnt[0]) omax[oi[$clog2(NC_OBS)-1:0]] <= {beat_word(mem_i.rdata, 1), beat_word(mem_i.rdata, 0)};
          else             omin[oi[$clog2(NC_OBS)-1:0]] <= {beat_word(mem_i.rdata, 1), beat_word(mem_i.rdata, 0)};
          recv_cnt <= recv_cnt + 1;
          if (mem_i.rlast) begin
            automatic logic [31:0] got = req_cnt + ((recv_cnt + 1) >> 1);
            req_cnt <= got;
            if (got >= chunk_cnt) begin
              n_loads <= n_loads + 1;
              loaded  <= (n_obs <= 32'(NC_OBS));
              state   <= S_TEST;
            end else state <= S_REQ;
          end
        end
        S_TEST: begin
          if (|hits) begin
            collide <= 1'b1;
            state   <= S_DONE;
          end else if (32'(grp) < last_grp) begin
            grp <= grp + 1'b1;
          end else begin
            grp <= '0;
            if (pi == mm) begin
              if (chunk_base + chunk_cnt >= n_obs) begin
                collide <= 1'b0;
                state   <= S_DONE;
              end else begin
                chunk_base <= chunk_base + chunk_cnt;
                state      <= S_CHUNK;
              end
            end else begin
              pi <= pi + 1;
              for (int k = 0; k < 2; k++) acc[k] <= acc[k] + step[k];
            end
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
