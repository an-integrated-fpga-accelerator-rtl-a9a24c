// p3net_pkg: types and constants shared by the P3NetCore path-planning accelerator.
//
// Number formats: layer outputs (activations, coordinates) are signed 32-bit
// fixed point with 16 integer and 16 fraction bits (16.16); model parameters
// are signed 24-bit fixed point with 8 integer and 16 fraction bits (8.16).
// Both formats follow the paper. How products are narrowed (truncation by an
// arithmetic shift, two's-complement wrap) is this design's choice.
//
// The network shapes are those of the 2D models: ENetLite2D is the pointwise
// stack BE(2,64,64,64,128,252) followed by max pooling, PNetLite2D is five
// FC-ReLU-Dropout blocks 256-256-128-64-64-64 and a final FC(64,2).
//
// The internal memory port (mem_m2s_t / mem_s2m_t) is a simplified burst
// protocol used between the compute modules and the AXI4 master bridge:
//   read : rreq_valid/rreq_ready with {addr, len} requests len 128-bit beats;
//          beats return on rvalid/rready, rlast marks the final one.
//   write: wreq_valid/wreq_ready with {addr, len}; then len beats are sent on
//          wvalid/wready; wdone pulses once the write response is received.
// Addresses are byte addresses, 16-byte aligned; len is 1..64.
package p3net_pkg;

  localparam int FX_W    = 32;
  localparam int FX_FRAC = 16;
  localparam int PRM_W   = 24;
  localparam int BEAT_W  = 128;
  localparam int ADDR_W  = 32;
  localparam int LEN_W   = 8;
  localparam int MAX_BURST = 64;

  typedef logic signed [FX_W-1:0]  fx_t;
  typedef logic signed [PRM_W-1:0] prm_t;
  typedef logic [BEAT_W-1:0]       beat_t;
  typedef logic [ADDR_W-1:0]       addr_t;

  // Operation modes, numbered as the six modes of the core.
  typedef enum logic [2:0] {
    MODE_NONE        = 3'd0,
    MODE_INIT_ENET   = 3'd1,
    MODE_RUN_ENCODER = 3'd2,
    MODE_INIT_MT     = 3'd3,
    MODE_INIT_PNET   = 3'd4,
    MODE_RUN_PLANNER = 3'd5,
    MODE_RUN_CCHECK  = 3'd6
  } mode_e;

  // ENetLite2D: feature widths between building blocks.
  localparam int ENC_NL = 5;
  localparam int ENC_DIM [ENC_NL+1] = '{2, 64, 64, 64, 128, 252};
  localparam int PHI_DIM = 252;

  // PNetLite2D: widths between FC layers (the last one has no ReLU/dropout).
  localparam int PN_NL = 6;
  localparam int PN_DIM [PN_NL+1] = '{256, 256, 128, 64, 64, 64, 2};
  localparam int PN_IN  = 256;

  // Number of parameters of each ENetLite layer: FC weights+bias, BN mu,s,beta.
  function automatic int enc_fc_size(input int k);
    return ENC_DIM[k] * ENC_DIM[k+1] + ENC_DIM[k+1];
  endfunction
  function automatic int enc_bn_size(input int k);
    return 3 * ENC_DIM[k+1];
  endfunction
  // Offset of layer k's FC block in the ENetLite parameter image.
  function automatic int enc_fc_off(input int k);
    int s = 0;
    for (int j = 0; j < k; j++) s += enc_fc_size(j) + enc_bn_size(j);
    return s;
  endfunction
  function automatic int enc_bn_off(input int k);
    return enc_fc_off(k) + enc_fc_size(k);
  endfunction
  localparam int ENC_NPARAM = enc_fc_off(ENC_NL);

  function automatic int pn_size(input int k);
    return PN_DIM[k] * PN_DIM[k+1] + PN_DIM[k+1];
  endfunction
  function automatic int pn_off(input int k);
    int s = 0;
    for (int j = 0; j < k; j++) s += pn_size(j);
    return s;
  endfunction
  localparam int PN_NPARAM = pn_off(PN_NL);

  // Memory port structs (see header).
  typedef struct packed {
    addr_t            addr;
    logic [LEN_W-1:0] len;
  } mem_req_t;

  typedef struct packed {
    logic     rreq_valid;
    mem_req_t rreq;
    logic     rready;
    logic     wreq_valid;
    mem_req_t wreq;
    logic     wvalid;
    beat_t    wdata;
  } mem_m2s_t;

  typedef struct packed {
    logic  rreq_ready;
    logic  rvalid;
    beat_t rdata;
    logic  rlast;
    logic  wreq_ready;
    logic  wready;
    logic  wdone;
  } mem_s2m_t;

  // Operation settings written by the host through the control registers.
  typedef struct packed {
    mode_e       mode;
    logic [31:0] n_points;     // N, points in the cloud
    logic [31:0] n_obs;        // obstacles (bounding boxes)
    logic [31:0] max_iter;     // I, planner iterations
    fx_t         delta;        // collision-check step
    logic [31:0] seed;         // Mersenne-Twister seed
    logic [31:0] path_len;     // waypoints of the path to check
    addr_t       addr_points;  // point cloud (N,4)
    addr_t       addr_enet;    // ENetLite parameter image
    addr_t       addr_pnet;    // PNetLite parameter image
    addr_t       addr_obs;     // obstacle boxes (2 beats each)
    addr_t       addr_task;    // start and goal (2 beats)
    addr_t       addr_path_a;  // forward paths
    addr_t       addr_path_b;  // backward paths
    addr_t       addr_status;  // per-pair {flag, l_a, l_b}
    addr_t       addr_path;    // path for the collision-check mode
  } ctrl_cfg_t;

  localparam mem_m2s_t MEM_M2S_IDLE = '0;
  localparam mem_s2m_t MEM_S2M_IDLE = '0;

  // 32-bit word w of a beat, as a fixed-point value.
  function automatic fx_t beat_word(input beat_t b, input int w);
    return fx_t'(b[32*w +: 32]);
  endfunction

  // Narrow an accumulator holding 32 fraction bits to 16.16 (truncate, wrap).
  function automatic fx_t fx_from_acc(input logic signed [63:0] acc);
    return fx_t'(acc >>> FX_FRAC);
  endfunction

endpackage
