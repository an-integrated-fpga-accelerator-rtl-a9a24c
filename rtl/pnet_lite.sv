// pnet_lite: PNetLite2D inference for a batch of 2B path endpoints, the
// stochastic planning network that proposes the next waypoints.
//
// Each of the NR = 2B rows is the 256-D vector [phi, c, c_goal]: the 252-D
// obstacle feature from the encoder, the current endpoint of a path and its
// destination (forward paths head for the goal, backward paths for the
// start). The rows go through FC(256,256), FC(256,128), FC(128,64),
// FC(64,64), FC(64,64), each followed by Dropout-ReLU with p = 0.5, and a
// final FC(64,2) without activation that yields the next waypoint of every
// row. Dropout stays on at inference, so repeated calls sample different
// waypoints; its random words come from the Mersenne-Twister (mt19937), one
// word per activation, taken in the order layer, row, channel.
//
// The layers run one after another over all rows, with two row buffers used
// in ping-pong fashion. Inside a layer the FC unit computes row r+1 while
// the Dropout-ReLU unit drains row r element by element into the other
// buffer.
// Interface: parameter writes (prm_we, prm_addr, prm_data) with the layers'
// weight/bias blocks back to back (layer l at pn_off(l)); mt_init with seed
// seeds the generator (mt_busy while seeding); start with phi, cur and goal
// runs one inference; done pulses when next is valid. drop_count counts the
// activations zeroed by dropout (for observation).
// Timing: per row, sum over layers of IN*ceil(OUT/LANES) FC cycles; with
// B = 4 and LANES = 16 one inference takes about 58,000 cycles.
// The layer sizes and the dropout rule follow the paper (for the 2D model);
// layer-by-layer scheduling, LANES and the random-word order are this
// design's choices.
module pnet_lite
  import p3net_pkg::*;
#(
  parameter int B     = 4,
  parameter int LANES = 16,
  localparam int NR   = 2 * B
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 prm_we,
  input  logic [31:0]          prm_addr,
  input  prm_t                 prm_data,
  input  logic                 mt_init,
  input  logic [31:0]          seed,
  output logic                 mt_busy,
  input  logic                 start,
  input  fx_t [PHI_DIM-1:0]    phi,
  input  fx_t [NR-1:0][1:0]    cur,
  input  fx_t [NR-1:0][1:0]    goal,
  output logic                 done,
  output fx_t [NR-1:0][1:0]    next,
  output logic [31:0]          drop_count
);

  localparam int RW = $clog2(NR + 1);
  localparam int RI = (NR > 1) ? $clog2(NR) : 1;

  // ------------------------------------------------------------ random words
  logic        rnd_valid, rnd_take;
  logic [31:0] rnd;
  mt19937 u_mt (
    .clk, .rst_n, .init_start(mt_init), .seed, .busy(mt_busy),
    .rnd_valid, .rnd, .rnd_take
  );

  // ------------------------------------------------------------ row buffers
  fx_t [PN_IN-1:0] bufm [2][NR];

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH} state_e;
  state_e state;
  logic [2:0]    layer;
  logic [RW-1:0] feed_row, drain_row;
  logic [8:0]    elem;

  logic fc_in_ready [PN_NL];
  logic fc_out_valid[PN_NL];
  fx_t [PN_IN-1:0] fc_out_pad [PN_NL];

  wire last_layer = (int'(layer) == PN_NL - 1);
  wire rsel = layer[0];

  logic cur_in_ready, cur_out_valid;
  fx_t [PN_IN-1:0] cur_out;
  int   cur_dout;
  always_comb begin
    cur_in_ready  = 1'b0;
    cur_out_valid = 1'b0;
    cur_out       = '0;
    cur_dout      = PN_DIM[1];
    for (int l = 0; l < PN_NL; l++)
      if (int'(layer) == l) begin
        cur_in_ready  = fc_in_ready[l];
        cur_out_valid = fc_out_valid[l];
        cur_out       = fc_out_pad[l];
        cur_dout      = PN_DIM[l+1];
      end
  end

  wire feeding   = (state == S_RUN) && (int'(feed_row) < NR);
  wire draining  = (state == S_RUN) && cur_out_valid;
  wire need_rnd  = !last_layer;
  wire issue     = draining && (!need_rnd || rnd_valid);
  wire last_elem = (int'(elem) == cur_dout - 1);
  assign rnd_take = issue && need_rnd;

  for (genvar l = 0; l < PN_NL; l++) begin : g_fc
    localparam int DI = PN_DIM[l];
    localparam int DO = PN_DIM[l+1];
    localparam int OFF = pn_off(l);
    localparam int SZ  = pn_size(l);
    localparam int PA_W = $clog2(SZ + 1);
    fx_t [DO-1:0] fco;
    fc_layer #(.IN_DIM(DI), .OUT_DIM(DO), .LANES(LANES)) u_fc (
      .clk, .rst_n,
      .prm_we(prm_we && int'(prm_addr) >= OFF && int'(prm_addr) < OFF + SZ),
      .prm_addr(PA_W'(prm_addr - OFF)), .prm_data,
      .in_valid(feeding && int'(layer) == l),
      .in_ready(fc_in_ready[l]),
      .in_vec(bufm[l % 2][feed_row[RI-1:0]][DI-1:0]),
      .out_valid(fc_out_valid[l]),
      .out_ready(issue && last_elem && int'(layer) == l),
      .out_vec(fco)
    );
    always_comb begin
      fc_out_pad[l] = '0;
      fc_out_pad[l][DO-1:0] = fco;
    end
  end

  // ------------------------------------------------------------ Dropout-ReLU
  logic    dr_valid, dr_dropped;
  fx_t     dr_y;
  logic [RW-1:0] dr_row;
  logic [8:0]    dr_elem;
  logic          dr_last_layer;

  dropout_relu u_dr (
    .clk, .rst_n, .in_valid(issue), .x(cur_out[elem]), .rnd,
    .relu_en(!last_layer), .drop_en(!last_layer),
    .out_valid(dr_valid), .y(dr_y), .dropped(dr_dropped)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      layer      <= '0;
      feed_row   <= '0;
      drain_row  <= '0;
      elem       <= '0;
      done       <= 1'b0;
      drop_count <= '0;
      dr_row     <= '0;
      dr_elem    <= '0;
      dr_last_layer <= 1'b0;
    end else begin
      done <= 1'b0;
      // delayed bookkeeping of the element in the Dropout-ReLU stage
      dr_row        <= drain_row;
      dr_elem       <= elem;
      dr_last_layer <= last_layer;
      if (dr_valid) begin
        if (dr_last_layer) next[dr_row][dr_elem[0]] <= dr_y;
        else               bufm[~rsel][dr_row[RI-1:0]][dr_elem] <= dr_y;
        if (dr_dropped) drop_count <= drop_count + 1;
      end
      case (state)
        S_IDLE: if (start) begin
          for (int r = 0; r < NR; r++)
            bufm[0][r] <= {goal[r], cur[r], phi};
          layer     <= '0;
          feed_row  <= '0;
          drain_row <= '0;
          elem      <= '0;
          state     <= S_RUN;
        end
        S_RUN: begin
          if (feeding && cur_in_ready) feed_row <= feed_row + 1'b1;
          if (issue) begin
            if (last_elem) begin
              elem      <= '0;
              drain_row <= drain_row + 1'b1;
              if (int'(drain_row) == NR - 1) state <= S_FLUSH;
            end else begin
              elem <= elem + 1'b1;
            end
          end
        end
        S_FLUSH: begin
          // the final element of the layer leaves Dropout-ReLU this cycle
          feed_row  <= '0;
          drain_row <= '0;
          if (last_layer) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            layer <= layer + 1'b1;
            state <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
