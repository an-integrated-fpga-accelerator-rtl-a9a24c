// p3net_core: P3NetCore, the path-planning accelerator. It accelerates the
// two neural networks of P3Net (the PointNet encoder ENetLite and the
// planning network PNetLite) together with the bidirectional batched planner
// NeuralPlannerEx and its collision checks, in 16.16 fixed point.
//
// Structure:
//   axil_ctrl_regs     AXI4-Lite slave with the mode, argument, address and
//                      result registers (host control)
//   encoder            Encoder module: Init ENet and Run encoder
//   neural_planner     NeuralPlanner module with PNetLite, the dropout
//                      Mersenne-Twister and its own collision checker:
//                      Init MT, Init PNet and Run planner
//   collision_checker  CollisionChecker module: Run collision checks
//   axi_master_bridge  AXI4 master (128-bit data) to DRAM
// Operation: the host writes MODE and the arguments, then sets CTRL.start.
// The dispatcher latches the mode, starts the matching module, and gives
// it the memory port until its done pulse; CTRL.done is then set and irq
// raised if enabled. The global feature phi stays in the encoder between
// Run encoder and Run planner, so one encoding serves many planning tasks.
// Mode 0 (and 7) finishes at once without any action.
// Activity counters (STAT registers): 0 last mode, 1 AXI error, 2 read
// beats, 3 written beats, 4 dropped activations, 5 planner obstacle loads,
// 6 last planner check points M, 7..9 connections of kind (N_a,C_b),
// (C_a,N_b), (N_a,N_b), 10 edges, 11 points and 12 obstacle loads of the
// last collision-check run.
// Ports: clock, active-low synchronous reset, the AXI4-Lite slave, the
// AXI4 master and the interrupt.
// The module split, the six operation modes and the interfaces follow the
// paper; the register map and DRAM layouts are this design's choices.
module p3net_core
  import p3net_pkg::*;
#(
  parameter int B         = 4,
  parameter int NC        = 64,
  parameter int TC        = 64,
  parameter int NC_OBS    = 64,
  parameter int NCHK      = 8,
  parameter int ENC_LANES = 64,
  parameter int PN_LANES  = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  // AXI4-Lite slave (control)
  input  logic [7:0]   s_awaddr,
  input  logic         s_awvalid,
  output logic         s_awready,
  input  logic [31:0]  s_wdata,
  input  logic [3:0]   s_wstrb,
  input  logic         s_wvalid,
  output logic         s_wready,
  output logic [1:0]   s_bresp,
  output logic         s_bvalid,
  input  logic         s_bready,
  input  logic [7:0]   s_araddr,
  input  logic         s_arvalid,
  output logic         s_arready,
  output logic [31:0]  s_rdata,
  output logic [1:0]   s_rresp,
  output logic         s_rvalid,
  input  logic         s_rready,
  // AXI4 master (DRAM)
  output logic [31:0]  m_araddr,
  output logic [7:0]   m_arlen,
  output logic [2:0]   m_arsize,
  output logic [1:0]   m_arburst,
  output logic         m_arvalid,
  input  logic         m_arready,
  input  logic [127:0] m_rdata,
  input  logic [1:0]   m_rresp,
  input  logic         m_rlast,
  input  logic         m_rvalid,
  output logic         m_rready,
  output logic [31:0]  m_awaddr,
  output logic [7:0]   m_awlen,
  output logic [2:0]   m_awsize,
  output logic [1:0]   m_awburst,
  output logic         m_awvalid,
  input  logic         m_awready,
  output logic [127:0] m_wdata,
  output logic [15:0]  m_wstrb,
  output logic         m_wlast,
  output logic         m_wvalid,
  input  logic         m_wready,
  input  logic [1:0]   m_bresp,
  input  logic         m_bvalid,
  output logic         m_bready,
  output logic         irq
);

  typedef enum logic [1:0] {U_NONE, U_ENC, U_PLAN, U_CC} unit_e;

  ctrl_cfg_t cfg;
  logic      start, busy, op_done;
  mode_e     mode_q;
  unit_e     unit_q;

  // ---------------------------------------------------------------- units
  logic        enc_done, pl_done, cc_done;
  logic        pl_success, cc_collide;
  fx_t [PHI_DIM-1:0] phi;
  logic [31:0] pl_iter, pl_drops, pl_loads, pl_nmid, cc_edges, cc_points, cc_loads;
  logic [31:0] pl_kind [3];
  mem_m2s_t    enc_mo, pl_mo, cc_mo, core_mo;
  mem_s2m_t    core_mi;
  logic        go;

  assign go = start && !busy;

  // activity counters, readable at STAT[0..12]
  logic        axi_err;
  logic [31:0] rd_beats, wr_beats;
  logic [31:0] stats [13];
  assign stats = '{{29'b0, mode_q}, {31'b0, axi_err}, rd_beats, wr_beats,
                   pl_drops, pl_loads, pl_nmid, pl_kind[0], pl_kind[1],
                   pl_kind[2], cc_edges, cc_points, cc_loads};

  axil_ctrl_regs #(.AW(8)) u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .cfg, .start, .busy, .op_done, .collide(cc_collide), .success(pl_success),
    .n_iter(pl_iter), .stats, .irq
  );

  encoder #(.NC(NC), .LANES(ENC_LANES)) u_enc (
    .clk, .rst_n,
    .init_start(go && cfg.mode == MODE_INIT_ENET),
    .run_start(go && cfg.mode == MODE_RUN_ENCODER),
    .addr_params(cfg.addr_enet), .addr_points(cfg.addr_points),
    .n_points(cfg.n_points), .done(enc_done), .phi,
    .mem_o(enc_mo), .mem_i(unit_q == U_ENC ? core_mi : MEM_S2M_IDLE)
  );

  neural_planner #(.B(B), .LANES(PN_LANES)) u_plan (
    .clk, .rst_n,
    .init_pnet_start(go && cfg.mode == MODE_INIT_PNET),
    .mt_init_start(go && cfg.mode == MODE_INIT_MT),
    .run_start(go && cfg.mode == MODE_RUN_PLANNER),
    .addr_params(cfg.addr_pnet), .seed(cfg.seed), .addr_task(cfg.addr_task),
    .addr_obs(cfg.addr_obs), .addr_path_a(cfg.addr_path_a),
    .addr_path_b(cfg.addr_path_b), .addr_status(cfg.addr_status),
    .n_obs(cfg.n_obs), .max_iter(cfg.max_iter), .delta(cfg.delta), .phi,
    .done(pl_done), .success(pl_success), .n_iter(pl_iter),
    .conn_kind(pl_kind), .drop_count(pl_drops), .obs_loads(pl_loads),
    .last_nmid(pl_nmid),
    .mem_o(pl_mo), .mem_i(unit_q == U_PLAN ? core_mi : MEM_S2M_IDLE)
  );

  collision_checker #(.TC(TC), .NCHK(NCHK), .NC_OBS(NC_OBS)) u_cc (
    .clk, .rst_n, .start(go && cfg.mode == MODE_RUN_CCHECK),
    .addr_path(cfg.addr_path), .path_len(cfg.path_len),
    .addr_obs(cfg.addr_obs), .n_obs(cfg.n_obs), .delta(cfg.delta),
    .done(cc_done), .collide(cc_collide), .n_edges(cc_edges),
    .n_points(cc_points), .obs_loads(cc_loads),
    .mem_o(cc_mo), .mem_i(unit_q == U_CC ? core_mi : MEM_S2M_IDLE)
  );

  // ---------------------------------------------------------------- dispatch
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      op_done <= 1'b0;
      mode_q  <= MODE_NONE;
      unit_q  <= U_NONE;
    end else begin
      op_done <= 1'b0;
      if (go) begin
        mode_q <= cfg.mode;
        case (cfg.mode)
          MODE_INIT_ENET, MODE_RUN_ENCODER:               unit_q <= U_ENC;
          MODE_INIT_MT, MODE_INIT_PNET, MODE_RUN_PLANNER: unit_q <= U_PLAN;
          MODE_RUN_CCHECK:                                unit_q <= U_CC;
          default:                                        unit_q <= U_NONE;
        endcase
        busy <= 1'b1;
      end else if (busy) begin
        if ((unit_q == U_ENC && enc_done) || (unit_q == U_PLAN && pl_done) ||
            (unit_q == U_CC && cc_done) || unit_q == U_NONE) begin
          busy    <= 1'b0;
          op_done <= 1'b1;
          unit_q  <= U_NONE;
        end
      end
    end
  end

  always_comb begin
    case (unit_q)
      U_ENC:   core_mo = enc_mo;
      U_PLAN:  core_mo = pl_mo;
      U_CC:    core_mo = cc_mo;
      default: core_mo = MEM_M2S_IDLE;
    endcase
  end

  axi_master_bridge u_axi (
    .clk, .rst_n, .mem_i(core_mo), .mem_o(core_mi),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready,
    .err(axi_err), .rd_beats, .wr_beats
  );

endmodule
