// axi_master_bridge: AXI4 master that carries the core's internal burst
// port (mem_m2s_t / mem_s2m_t) to the DRAM through the processor's
// high-performance slave port.
//
// A read request becomes one AR transfer (INCR burst, 16-byte beats,
// ARLEN = len-1); the R beats are handed back as they arrive. A write
// request becomes one AW transfer; the bridge counts the W beats, drives
// WLAST on the final one with all byte strobes set, and pulses wdone when
// the B response arrives. One read and one write may be outstanding at a
// time, each with ID 0. Non-OKAY responses set the sticky err flag;
// rd_beats and wr_beats count the transferred beats.
// The 128-bit AXI4 master follows the paper; the single outstanding
// transaction per direction is this design's choice.
module axi_master_bridge
  import p3net_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  mem_m2s_t     mem_i,
  output mem_s2m_t     mem_o,
  // AXI4 master: read address / data
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
  // AXI4 master: write address / data / response
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
  // status
  output logic         err,
  output logic [31:0]  rd_beats,
  output logic [31:0]  wr_beats
);

  logic             rd_busy, wr_busy, wr_data_done;
  logic [LEN_W-1:0] w_left;

  // read
  assign m_araddr  = mem_i.rreq.addr;
  assign m_arlen   = 8'(mem_i.rreq.len - 1'b1);
  assign m_arsize  = 3'd4;
  assign m_arburst = 2'b01;
  assign m_arvalid = mem_i.rreq_valid && !rd_busy;
  assign m_rready  = rd_busy && mem_i.rready;

  // write
  assign m_awaddr  = mem_i.wreq.addr;
  assign m_awlen   = 8'(mem_i.wreq.len - 1'b1);
  assign m_awsize  = 3'd4;
  assign m_awburst = 2'b01;
  assign m_awvalid = mem_i.wreq_valid && !wr_busy;
  assign m_wdata   = mem_i.wdata;
  assign m_wstrb   = '1;
  assign m_wlast   = (w_left == LEN_W'(1));
  assign m_wvalid  = wr_busy && !wr_data_done && mem_i.wvalid;
  assign m_bready  = wr_busy && wr_data_done;

  always_comb begin
    mem_o            = MEM_S2M_IDLE;
    mem_o.rreq_ready = m_arready && !rd_busy;
    mem_o.rvalid     = rd_busy && m_rvalid;
    mem_o.rdata      = m_rdata;
    mem_o.rlast      = m_rlast;
    mem_o.wreq_ready = m_awready && !wr_busy;
    mem_o.wready     = wr_busy && !wr_data_done && m_wready;
    mem_o.wdone      = m_bvalid && m_bready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_busy      <= 1'b0;
      wr_busy      <= 1'b0;
      wr_data_done <= 1'b0;
      w_left       <= '0;
      err          <= 1'b0;
      rd_beats     <= '0;
      wr_beats     <= '0;
    end else begin
      if (m_arvalid && m_arready) rd_busy <= 1'b1;
      if (m_rvalid && m_rready) begin
        rd_beats <= rd_beats + 1;
        if (m_rresp != 2'b00) err <= 1'b1;
        if (m_rlast) rd_busy <= 1'b0;
      end
      if (m_awvalid && m_awready) begin
        wr_busy      <= 1'b1;
        wr_data_done <= 1'b0;
        w_left       <= mem_i.wreq.len;
      end
      if (m_wvalid && m_wready) begin
        wr_beats <= wr_beats + 1;
        w_left   <= w_left - 1'b1;
        if (m_wlast) wr_data_done <= 1'b1;
      end
      if (m_bvalid && m_bready) begin
        wr_busy      <= 1'b0;
        wr_data_done <= 1'b0;
        if (m_bresp != 2'b00) err <= 1'b1;
      end
    end
  end

  // a burst must fit the AXI4 limit of 256 beats and the port limit of 64
  always_ff @(posedge clk) begin
    if (rst_n && m_arvalid) assert (mem_i.rreq.len != 0 && int'(mem_i.rreq.len) <= MAX_BURST);
    if (rst_n && m_awvalid) assert (mem_i.wreq.len != 0 && int'(mem_i.wreq.len) <= MAX_BURST);
  end

endmodule
