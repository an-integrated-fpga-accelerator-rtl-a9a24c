// axil_ctrl_regs: AXI4-Lite slave holding the control and status registers
// through which the host selects an operation mode, sets its arguments and
// buffer addresses, starts it and reads the results.
//
// Register map (32-bit registers, byte offsets):
//   0x00 CTRL     bit0 start (write 1, self-clearing), bit1 done (sticky,
//                 cleared by the next start), bit2 idle, bit3 interrupt enable
//   0x04 MODE     operation mode 1..6 (see mode_e)
//   0x08 N        points in the cloud          0x0C N_OBS  obstacles
//   0x10 ITER     planner iterations I         0x14 DELTA  check step (16.16)
//   0x18 SEED     Mersenne-Twister seed        0x1C PLEN   path length
//   0x20 COLLIDE  result of the collision-check mode (read only)
//   0x24 SUCCESS  result of the planner (read only)
//   0x28..0x48    buffer addresses: points, ENet image, PNet image,
//                 obstacles, task, forward paths, backward paths, status, path
//   0x4C NITER    iterations used by the last planner run (read only)
//   0x50+4k       STAT[k], k < NSTAT: activity counters of the core (read only)
// Writes take effect when both the address and the data have arrived (in
// either order); reads answer one cycle after the address. Both responses
// are OKAY; unmapped addresses read as zero and ignore writes.
// irq is high while done is set and interrupts are enabled.
// The AXI4-Lite control interface with 32-bit data follows the paper; the
// register map is this design's choice.
module axil_ctrl_regs
  import p3net_pkg::*;
#(
  parameter int AW    = 8,
  parameter int NSTAT = 13
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite slave
  input  logic [AW-1:0] s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
  input  logic [3:0]    s_wstrb,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic [AW-1:0] s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  // core side
  output ctrl_cfg_t     cfg,
  output logic          start,
  input  logic          busy,
  input  logic          op_done,
  input  logic          collide,
  input  logic          success,
  input  logic [31:0]   n_iter,
  input  logic [31:0]   stats [NSTAT],
  output logic          irq
);

  logic          aw_have, w_have;
  logic [AW-3:0] aw_q;      // word index
  logic [31:0]   w_q;
  logic [3:0]    ws_q;
  logic          done_q, irq_en;
  logic          collide_q, success_q;

  assign s_awready = !aw_have && !s_bvalid;
  assign s_wready  = !w_have && !s_bvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign irq       = done_q && irq_en;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d,
                                        input logic [3:0] st);
    logic [31:0] r = old;
    for (int b = 0; b < 4; b++) if (st[b]) r[8*b +: 8] = d[8*b +: 8];
    return r;
  endfunction

  function automatic logic [31:0] rd(input logic [AW-3:0] a);
    case (a)
      (AW-2)'('h00): return {28'b0, irq_en, !busy, done_q, 1'b0};
      (AW-2)'('h01): return {29'b0, cfg.mode};
      (AW-2)'('h02): return cfg.n_points;
      (AW-2)'('h03): return cfg.n_obs;
      (AW-2)'('h04): return cfg.max_iter;
      (AW-2)'('h05): return cfg.delta;
      (AW-2)'('h06): return cfg.seed;
      (AW-2)'('h07): return cfg.path_len;
      (AW-2)'('h08): return {31'b0, collide_q};
      (AW-2)'('h09): return {31'b0, success_q};
      (AW-2)'('h0A): return cfg.addr_points;
      (AW-2)'('h0B): return cfg.addr_enet;
      (AW-2)'('h0C): return cfg.addr_pnet;
      (AW-2)'('h0D): return cfg.addr_obs;
      (AW-2)'('h0E): return cfg.addr_task;
      (AW-2)'('h0F): return cfg.addr_path_a;
      (AW-2)'('h10): return cfg.addr_path_b;
      (AW-2)'('h11): return cfg.addr_status;
      (AW-2)'('h12): return cfg.addr_path;
      (AW-2)'('h13): return n_iter;
      default: begin
        for (int k = 0; k < NSTAT; k++)
          if (int'(a) == 'h14 + k) return stats[k];
        return '0;
      end
    endcase
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      aw_have   <= 1'b0;
      w_have    <= 1'b0;
      aw_q      <= '0;
      w_q       <= '0;
      ws_q      <= '0;
      s_bvalid  <= 1'b0;
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
      cfg       <= '0;
      start     <= 1'b0;
      done_q    <= 1'b0;
      irq_en    <= 1'b0;
      collide_q <= 1'b0;
      success_q <= 1'b0;
    end else begin
      start <= 1'b0;
      if (op_done) begin
        done_q    <= 1'b1;
        collide_q <= collide;
        success_q <= success;
      end
      // write channel
      if (s_awvalid && s_awready) begin
        aw_q    <= s_awaddr[AW-1:2];
        aw_have <= 1'b1;
      end
      if (s_wvalid && s_wready) begin
        w_q    <= s_wdata;
        ws_q   <= s_wstrb;
        w_have <= 1'b1;
      end
      if (aw_have && w_have) begin
        aw_have  <= 1'b0;
        w_have   <= 1'b0;
        s_bvalid <= 1'b1;
        case (aw_q)
          (AW-2)'('h00): begin
            if (ws_q[0]) begin
              irq_en <= w_q[3];
              if (w_q[0] && !busy) begin
                start  <= 1'b1;
                done_q <= 1'b0;
              end
            end
          end
          (AW-2)'('h01): if (ws_q[0]) cfg.mode <= mode_e'(w_q[2:0]);
          (AW-2)'('h02): cfg.n_points    <= merge(cfg.n_points, w_q, ws_q);
          (AW-2)'('h03): cfg.n_obs       <= merge(cfg.n_obs, w_q, ws_q);
          (AW-2)'('h04): cfg.max_iter    <= merge(cfg.max_iter, w_q, ws_q);
          (AW-2)'('h05): cfg.delta       <= merge(cfg.delta, w_q, ws_q);
          (AW-2)'('h06): cfg.seed        <= merge(cfg.seed, w_q, ws_q);
          (AW-2)'('h07): cfg.path_len    <= merge(cfg.path_len, w_q, ws_q);
          (AW-2)'('h0A): cfg.addr_points <= merge(cfg.addr_points, w_q, ws_q);
          (AW-2)'('h0B): cfg.addr_enet   <= merge(cfg.addr_enet, w_q, ws_q);
          (AW-2)'('h0C): cfg.addr_pnet   <= merge(cfg.addr_pnet, w_q, ws_q);
          (AW-2)'('h0D): cfg.addr_obs    <= merge(cfg.addr_obs, w_q, ws_q);
          (AW-2)'('h0E): cfg.addr_task   <= merge(cfg.addr_task, w_q, ws_q);
          (AW-2)'('h0F): cfg.addr_path_a <= merge(cfg.addr_path_a, w_q, ws_q);
          (AW-2)'('h10): cfg.addr_path_b <= merge(cfg.addr_path_b, w_q, ws_q);
          (AW-2)'('h11): cfg.addr_status <= merge(cfg.addr_status, w_q, ws_q);
          (AW-2)'('h12): cfg.addr_path   <= merge(cfg.addr_path, w_q, ws_q);
          default: ;
        endcase
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      // read channel
      if (s_arvalid && s_arready) begin
        s_rdata  <= rd(s_araddr[AW-1:2]);
        s_rvalid <= 1'b1;
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

endmodule
