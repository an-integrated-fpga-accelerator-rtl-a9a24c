// axi_mem_model: behavioural AXI4 slave DRAM for testbenches, 128-bit data,
// DEPTH beats from byte address 0, INCR bursts only. One read and one write
// burst are served at a time; read beats come one per cycle with random
// gaps, the write response follows the last data beat. Testbenches fill and
// inspect mem directly.
module axi_mem_model #(
  parameter int DEPTH = 65536
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [31:0]  araddr,
  input  logic [7:0]   arlen,
  input  logic [2:0]   arsize,
  input  logic [1:0]   arburst,
  input  logic         arvalid,
  output logic         arready,
  output logic [127:0] rdata,
  output logic [1:0]   rresp,
  output logic         rlast,
  output logic         rvalid,
  input  logic         rready,
  input  logic [31:0]  awaddr,
  input  logic [7:0]   awlen,
  input  logic [2:0]   awsize,
  input  logic [1:0]   awburst,
  input  logic         awvalid,
  output logic         awready,
  input  logic [127:0] wdata,
  input  logic [15:0]  wstrb,
  input  logic         wlast,
  input  logic         wvalid,
  output logic         wready,
  output logic [1:0]   bresp,
  output logic         bvalid,
  input  logic         bready
);

  logic [127:0] mem [DEPTH];
  int           n_ar, n_aw, n_proto_err;

  logic        rd_act, wr_act, gap;
  logic [31:0] rd_idx, wr_idx;
  logic [8:0]  rd_left, wr_left;

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  assign arready = !rd_act;
  assign rvalid  = rd_act && !gap;
  assign rdata   = mem[rd_idx % DEPTH];
  assign rlast   = (rd_left == 1);
  assign rresp   = 2'b00;
  assign awready = !wr_act && !bvalid;
  assign wready  = wr_act;
  assign bresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_act <= 1'b0;
      wr_act <= 1'b0;
      bvalid <= 1'b0;
      gap    <= 1'b0;
      rd_idx <= '0;
      wr_idx <= '0;
      rd_left <= '0;
      wr_left <= '0;
      n_ar <= 0;
      n_aw <= 0;
      n_proto_err <= 0;
    end else begin
      gap <= ($urandom_range(0, 3) == 0);
      if (arvalid && arready) begin
        if (arsize != 3'd4 || arburst != 2'b01 || araddr[3:0] != 0) n_proto_err <= n_proto_err + 1;
        rd_act  <= 1'b1;
        rd_idx  <= araddr / 16;
        rd_left <= 9'(arlen) + 9'd1;
        n_ar    <= n_ar + 1;
      end
      if (rvalid && rready) begin
        rd_idx  <= rd_idx + 1;
        rd_left <= rd_left - 1'b1;
        if (rd_left == 1) rd_act <= 1'b0;
      end
      if (awvalid && awready) begin
        if (awsize != 3'd4 || awburst != 2'b01 || awaddr[3:0] != 0) n_proto_err <= n_proto_err + 1;
        wr_act  <= 1'b1;
        wr_idx  <= awaddr / 16;
        wr_left <= 9'(awlen) + 9'd1;
        n_aw    <= n_aw + 1;
      end
      if (wvalid && wready) begin
        for (int b = 0; b < 16; b++)
          if (wstrb[b]) mem[wr_idx % DEPTH][8*b +: 8] <= wdata[8*b +: 8];
        wr_idx  <= wr_idx + 1;
        wr_left <= wr_left - 1'b1;
        if (wlast != (wr_left == 1)) n_proto_err <= n_proto_err + 1;
        if (wr_left == 1) begin
          wr_act <= 1'b0;
          bvalid <= 1'b1;
        end
      end
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end

endmodule
