// collision_checker: the CollisionChecker module in its stand-alone use,
// checking whether a whole path (a list of waypoints) is collision free.
//
// The path is read from DRAM in chunks of at most TC waypoints into an
// on-chip path buffer; consecutive chunks overlap by one waypoint so that
// the edge joining two chunks is also tested. Every edge (c_t, c_t+1) is
// checked by a line_checker (discretised with step delta against all
// obstacle boxes, NCHK boxes per cycle); the check ends at the first edge
// that collides. A path of one waypoint is checked as a single point.
// DRAM layout: one beat per waypoint, x and y in words 0 and 1 (16.16).
// Interface: start with addr_path, path_len, addr_obs, n_obs, delta; done
// pulses with collide valid; n_edges and n_points count the edges and the
// discretisation points tested by the last run (an edge that hits is counted
// with all its points).
// The chunked buffers (T_C = 64 waypoints, N_C^obs = 64 obstacles) and the
// eight Check units follow the paper; the one-waypoint overlap and the
// early exit are this design's choices.
module collision_checker
  import p3net_pkg::*;
#(
  parameter int TC     = 64,
  parameter int NCHK   = 8,
  parameter int NC_OBS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       addr_path,
  input  logic [31:0] path_len,
  input  addr_t       addr_obs,
  input  logic [31:0] n_obs,
  input  fx_t         delta,
  output logic        done,
  output logic        collide,
  output logic [31:0] n_edges,
  output logic [31:0] n_points,
  output logic [31:0] obs_loads,
  output mem_m2s_t    mem_o,
  input  mem_s2m_t    mem_i
);

  localparam int TI = $clog2(TC);

  typedef enum logic [2:0] {S_IDLE, S_CHUNK, S_REQ, S_RECV, S_EDGE, S_WAIT, S_DONE} state_e;
  state_e state;

  fx_t [1:0]   pbuf [TC];
  logic [31:0] base, cnt, rcv, ei;
  logic        lc_start, lc_done, lc_collide;
  fx_t [1:0]   p0, p1;
  logic [31:0] nmid;
  mem_m2s_t    lc_mem_o;

  assign p0 = pbuf[ei[TI-1:0]];
  assign p1 = (cnt == 1) ? pbuf[ei[TI-1:0]] : pbuf[TI'(ei + 1)];
  assign lc_start = (state == S_EDGE);

  line_checker #(.NCHK(NCHK), .NC_OBS(NC_OBS)) u_lc (
    .clk, .rst_n, .invalidate(start && state == S_IDLE), .start(lc_start),
    .p0, .p1, .n_obs, .delta, .addr_obs,
    .done(lc_done), .collide(lc_collide), .n_mid(nmid), .n_loads(obs_loads),
    .mem_o(lc_mem_o), .mem_i(state == S_WAIT ? mem_i : MEM_S2M_IDLE)
  );

  always_comb begin
    mem_o = MEM_M2S_IDLE;
    case (state)
      S_REQ: begin
        mem_o.rreq_valid = 1'b1;
        mem_o.rreq.addr  = addr_path + addr_t'(base) * 16;
        mem_o.rreq.len   = LEN_W'(cnt);
      end
      S_RECV:  mem_o.rready = 1'b1;
      S_WAIT:  mem_o = lc_mem_o;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      collide <= 1'b0;
      n_edges <= '0;
      n_points <= '0;
      base    <= '0;
      cnt     <= '0;
      rcv     <= '0;
      ei      <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          base    <= '0;
          n_edges <= '0;
          n_points <= '0;
          collide <= 1'b0;
          state   <= (path_len == 0) ? S_DONE : S_CHUNK;
        end
        S_CHUNK: begin
          cnt   <= ((path_len - base) > 32'(TC)) ? 32'(TC) : (path_len - base);
          state <= S_REQ;
        end
        S_REQ: if (mem_i.rreq_ready) begin
          rcv   <= '0;
          state <= S_RECV;
        end
        S_RECV: if (mem_i.rvalid) begin
          pbuf[rcv[TI-1:0]] <= {beat_word(mem_i.rdata, 1), beat_word(mem_i.rdata, 0)};
          rcv <= rcv + 1;
          if (mem_i.rlast) begin
            ei    <= '0;
            state <= S_EDGE;
          end
        end
        S_EDGE: state <= S_WAIT;
        S_WAIT: if (lc_done) begin
          n_edges  <= n_edges + 1;
          n_points <= n_points + nmid + 1;
          if (lc_collide) begin
            collide <= 1'b1;
            state   <= S_DONE;
          end else if (ei + 2 < cnt) begin
            ei    <= ei + 1;
            state <= S_EDGE;
          end else if (base + cnt >= path_len) begin
            state <= S_DONE;
          end else begin
            base  <= base + cnt - 1;
            state <= S_CHUNK;
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
