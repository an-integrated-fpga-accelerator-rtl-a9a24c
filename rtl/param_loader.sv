// param_loader: streams a parameter image from DRAM into on-chip buffers,
// used by the Init ENet and Init PNet modes.
//
// The image is NWORDS 32-bit words, four per 128-bit beat, each holding one
// 8.16 parameter sign-extended from 24 bits. The loader requests bursts of at
// most MAX_BURST beats over the read side of the memory port, keeps one beat
// and hands out its four words one per cycle as (wr_valid, wr_idx, wr_data),
// where wr_idx is the word's index in the image. done pulses after the last
// word. Throughput is one parameter per cycle.
// The layout of the image in DRAM is this design's choice.
module param_loader
  import p3net_pkg::*;
#(
  parameter int NWORDS = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       base,
  output logic        done,
  output logic        wr_valid,
  output logic [31:0] wr_idx,
  output prm_t        wr_data,
  output mem_m2s_t    mem_o,
  input  mem_s2m_t    mem_i
);

  localparam int NBEATS = (NWORDS + 3) / 4;

  logic        active;
  logic [31:0] beats_req;    // beats requested so far
  logic [31:0] beats_left;   // beats of the current burst still to arrive
  logic        req_pend;
  beat_t       beat;
  logic        beat_full;
  logic [1:0]  wsel;
  logic [31:0] widx;

  always_comb begin
    mem_o = MEM_M2S_IDLE;
    mem_o.rreq_valid = req_pend;
    mem_o.rreq.addr  = base + addr_t'(beats_req) * 16;
    mem_o.rreq.len   = LEN_W'(((NBEATS - int'(beats_req)) > MAX_BURST) ? MAX_BURST
                                                                     : (NBEATS - int'(beats_req)));
    mem_o.rready     = active && !beat_full && beats_left != 0;
  end

  assign wr_valid = beat_full;
  assign wr_idx   = widx;
  assign wr_data  = prm_t'(beat[32*wsel +: 32]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active     <= 1'b0;
      req_pend   <= 1'b0;
      beat_full  <= 1'b0;
      beats_req  <= '0;
      beats_left <= '0;
      wsel       <= '0;
      widx       <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        active     <= 1'b1;
        req_pend   <= 1'b1;
        beats_req  <= '0;
        beats_left <= '0;
        beat_full  <= 1'b0;
        wsel       <= '0;
        widx       <= '0;
      end else if (active) begin
        if (req_pend && mem_i.rreq_ready) begin
          req_pend   <= 1'b0;
          beats_left <= 32'(mem_o.rreq.len);
          beats_req  <= beats_req + 32'(mem_o.rreq.len);
        end
        if (mem_o.rready && mem_i.rvalid) begin
          beat       <= mem_i.rdata;
          beat_full  <= 1'b1;
          beats_left <= beats_left - 1;
          wsel       <= '0;
        end
        if (beat_full) begin
          widx <= widx + 1;
          wsel <= wsel + 1'b1;
          if (int'(widx) == NWORDS - 1) begin
            active    <= 1'b0;
            beat_full <= 1'b0;
            done      <= 1'b1;
          end else if (wsel == 2'd3) begin
            beat_full <= 1'b0;
            if (beats_left == 0 && !req_pend && int'(beats_req) < NBEATS)
              req_pend <= 1'b1;
          end
        end
      end
    end
  end

endmodule
