// fpspin_top: the FPsPIN application block. It turns the PsPIN packet
// processing cluster into a working smart NIC by placing it inside the
// Corundum NIC's application slot and adding the four missing paths:
//
//   ingress datapath  Corundum RX -> match -> allocate -> DMA into the L2
//                     packet buffer -> handler execution request (HER)
//   egress DMA        handler send command -> read packet from PsPIN memory ->
//                     merged into Corundum's transmit stream
//   host memory DMA   PsPIN's AXI host master -> Corundum descriptor DMA
//   control regs      host AXI-Lite: cluster reset/fetch enable, stdout,
//                     matching rulesets, execution contexts
//
// PsPIN itself (cores, schedulers, L1/L2 memories) and Corundum (MAC, PCIe,
// queues, DMA engine) are not part of this RTL: every signal that would go to
// them is a port of this module, as plain structs and valid/ready pairs:
//   s_rx / m_rx_host   receive stream from the MAC / unmatched packets to Corundum
//   s_tx_host / m_tx   Corundum transmit stream / merged stream to the MAC
//   s_axil_*           host control bus
//   m_nic_aw/w/b       PsPIN NIC-inbound AXI4 slave (packet writes into L2)
//   m_nic_ar/r         PsPIN NIC-outbound AXI4 slave (packet reads for sending)
//   m_her, s_feedback  HER to the PsPIN scheduler, completion from it
//   s_egress_cmd, m_egress_done   handler send commands and their completion
//   s_host_*           PsPIN's AXI4 host master
//   m_dma_*, s_dma_*, dma_ram_*   Corundum DMA commands, completions, buffer port
//   pspin_rst, pspin_fetch_en, s_stdout   cluster control and handler output
// Two clocks, as in the paper's prototype:
//   clk / rst          PsPIN side (40 MHz there): the cluster's ports, the control
//                      registers, the ingress datapath and the egress DMA
//   nic_clk / nic_rst  Corundum side (250 MHz there): s_rx, m_rx_host, s_tx_host,
//                      m_tx, s_axil_*, and the host memory DMA with its m_dma_*,
//                      s_dma_* and dma_ram_* ports
// Every path between the two passes through a pspin_async_fifo: the four
// streams, the five AXI-Lite channels, and the five channels of PsPIN's host
// master, which reach the host memory DMA on the NIC side. Both resets must
// be asserted together. The paper gives the two frequencies and places the host
// DMA at 250 MHz. Where the crossings sit and how deep they are is this design's
// own choice.
module fpspin_top
  import fpspin_pkg::*;
#(
  parameter logic [31:0] BUF_BASE = 32'h0,
  parameter int unsigned BUF_SIZE = PKT_BUF_SIZE
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        nic_clk,
  input  logic        nic_rst,

  // Corundum receive path
  input  axis_beat_t  s_rx,
  input  logic        s_rx_valid,
  output logic        s_rx_ready,
  output axis_beat_t  m_rx_host,
  output logic        m_rx_host_valid,
  input  logic        m_rx_host_ready,
  // Corundum transmit path
  input  axis_beat_t  s_tx_host,
  input  logic        s_tx_host_valid,
  output logic        s_tx_host_ready,
  output axis_beat_t  m_tx,
  output logic        m_tx_valid,
  input  logic        m_tx_ready,

  // host control (AXI4-Lite)
  input  logic [AXIL_ADDR_W-1:0] s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [AXIL_ADDR_W-1:0] s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,

  // PsPIN NIC-inbound port (write)
  output axi_ax_t     m_nic_aw,
  output logic        m_nic_aw_valid,
  input  logic        m_nic_aw_ready,
  output axi_w_t      m_nic_w,
  output logic        m_nic_w_valid,
  input  logic        m_nic_w_ready,
  input  axi_b_t      m_nic_b,
  input  logic        m_nic_b_valid,
  output logic        m_nic_b_ready,
  // PsPIN NIC-outbound port (read)
  output axi_ax_t     m_nic_ar,
  output logic        m_nic_ar_valid,
  input  logic        m_nic_ar_ready,
  input  axi_r_t      m_nic_r,
  input  logic        m_nic_r_valid,
  output logic        m_nic_r_ready,

  // PsPIN scheduler
  output her_t        m_her,
  output logic        m_her_valid,
  input  logic        m_her_ready,
  input  feedback_t   s_feedback,
  input  logic        s_feedback_valid,
  output logic        s_feedback_ready,
  input  egress_cmd_t s_egress_cmd,
  input  logic        s_egress_cmd_valid,
  output logic        s_egress_cmd_ready,
  output logic [EG_TAG_W-1:0] m_egress_done_tag,
  output logic        m_egress_done_valid,

  // PsPIN host master (AXI4)
  input  axi_ax_t     s_host_aw,
  input  logic        s_host_aw_valid,
  output logic        s_host_aw_ready,
  input  axi_w_t      s_host_w,
  input  logic        s_host_w_valid,
  output logic        s_host_w_ready,
  output axi_b_t      s_host_b,
  output logic        s_host_b_valid,
  input  logic        s_host_b_ready,
  input  axi_ax_t     s_host_ar,
  input  logic        s_host_ar_valid,
  output logic        s_host_ar_ready,
  output axi_r_t      s_host_r,
  output logic        s_host_r_valid,
  input  logic        s_host_r_ready,

  // Corundum DMA engine
  output dma_desc_t   m_dma_wr_desc,
  output logic        m_dma_wr_desc_valid,
  input  logic        m_dma_wr_desc_ready,
  input  dma_status_t s_dma_wr_status,
  input  logic        s_dma_wr_status_valid,
  output dma_desc_t   m_dma_rd_desc,
  output logic        m_dma_rd_desc_valid,
  input  logic        m_dma_rd_desc_ready,
  input  dma_status_t s_dma_rd_status,
  input  logic        s_dma_rd_status_valid,
  input  logic        dma_ram_rd_en,
  input  logic [DMA_RAM_WORD_AW-1:0] dma_ram_rd_addr,
  output logic [DATA_W-1:0] dma_ram_rd_data,
  input  logic        dma_ram_wr_en,
  input  logic [DMA_RAM_WORD_AW-1:0] dma_ram_wr_addr,
  input  logic [DATA_W-1:0] dma_ram_wr_data,
  input  logic [KEEP_W-1:0] dma_ram_wr_strb,

  // PsPIN cluster control and handler output
  output logic        pspin_rst,
  output logic        pspin_fetch_en,
  input  logic [31:0] s_stdout_data,
  input  logic        s_stdout_valid,
  output logic        s_stdout_ready
);
  ruleset_t [NUM_RULESETS-1:0] cfg_ruleset;
  her_ctx_t [NUM_RULESETS-1:0] cfg_ctx;
  logic [15:0] small_free, large_free;

  localparam int unsigned STREAM_DEPTH = 16;
  localparam int unsigned BUS_DEPTH    = 4;

  // ------------------------------------------------ streams (NIC <-> PsPIN)
  axis_beat_t rx_p, rxh_p, txh_p, tx_p;
  logic rx_p_valid, rx_p_ready, rxh_p_valid, rxh_p_ready;
  logic txh_p_valid, txh_p_ready, tx_p_valid, tx_p_ready;

  pspin_async_fifo #(.T(axis_beat_t), .DEPTH(STREAM_DEPTH)) u_cdc_rx (
    .wr_clk(nic_clk), .wr_rst(nic_rst),
    .in_data(s_rx), .in_valid(s_rx_valid), .in_ready(s_rx_ready),
    .rd_clk(clk), .rd_rst(rst),
    .out_data(rx_p), .out_valid(rx_p_valid), .out_ready(rx_p_ready));

  pspin_async_fifo #(.T(axis_beat_t), .DEPTH(STREAM_DEPTH)) u_cdc_rx_host (
    .wr_clk(clk), .wr_rst(rst),
    .in_data(rxh_p), .in_valid(rxh_p_valid), .in_ready(rxh_p_ready),
    .rd_clk(nic_clk), .rd_rst(nic_rst),
    .out_data(m_rx_host), .out_valid(m_rx_host_valid), .out_ready(m_rx_host_ready));

  pspin_async_fifo #(.T(axis_beat_t), .DEPTH(STREAM_DEPTH)) u_cdc_tx_host (
    .wr_clk(nic_clk), .wr_rst(nic_rst),
    .in_data(s_tx_host), .in_valid(s_tx_host_valid), .in_ready(s_tx_host_ready),
    .rd_clk(clk), .rd_rst(rst),
    .out_data(txh_p), .out_valid(txh_p_valid), .out_ready(txh_p_ready));

  pspin_async_fifo #(.T(axis_beat_t), .DEPTH(STREAM_DEPTH)) u_cdc_tx (
    .wr_clk(clk), .wr_rst(rst),
    .in_data(tx_p), .in_valid(tx_p_valid), .in_ready(tx_p_ready),
    .rd_clk(nic_clk), .rd_rst(nic_rst),
    .out_data(m_tx), .out_valid(m_tx_valid), .out_ready(m_tx_ready));

  // ------------------------------------------- host control bus (NIC -> PsPIN)
  typedef struct packed { logic [31:0] data; logic [3:0] strb; } axil_w_t;
  typedef struct packed { logic [31:0] data; logic [1:0] resp; } axil_r_t;

  logic [AXIL_ADDR_W-1:0] c_awaddr, c_araddr;
  axil_w_t c_w;
  axil_r_t c_r, s_axil_r;
  logic [1:0] c_bresp;
  logic c_awvalid, c_awready, c_wvalid, c_wready, c_bvalid, c_bready;
  logic c_arvalid, c_arready, c_rvalid, c_rready;

  assign s_axil_rdata = s_axil_r.data;
  assign s_axil_rresp = s_axil_r.resp;

  pspin_async_fifo #(.T(logic [AXIL_ADDR_W-1:0]), .DEPTH(BUS_DEPTH)) u_cdc_axil_aw (
    .wr_clk(nic_clk), .wr_rst(nic_rst),
    .in_data(s_axil_awaddr), .in_valid(s_axil_awvalid), .in_ready(s_axil_awready),
    .rd_clk(clk), .rd_rst(rst),
    .out_data(c_awaddr), .out_valid(c_awvalid), .out_ready(c_awready));

  pspin_async_fifo #(.T(axil_w_t), .DEPTH(BUS_DEPTH)) u_cdc_axil_w (
    .wr_clk(nic_clk), .wr_rst(nic_rst),
    .in_data('{data: s_axil_wdata, strb: s_axil_wstrb}), .in_valid(s_axil_wvalid),
    .in_ready(s_axil_wready),
    .rd_clk(clk), .rd_rst(rst),
    .out_data(c_w), .out_valid(c_wvalid), .out_ready(c_wready));

  pspin_async_fifo #(.T(logic [1:0]), .DEPTH(BUS_DEPTH)) u_cdc_axil_b (
    .wr_clk(clk), .wr_rst(rst),
    .in_data(c_bresp), .in_valid(c_bvalid), .in_ready(c_bready),
    .rd_clk(nic_clk), .rd_rst(nic_rst),
    .out_data(s_axil_bresp), .out_valid(s_axil_bvalid), .out_ready(s_axil_bready));

  pspin_async_fifo #(.T(logic [AXIL_ADDR_W-1:0]), .DEPTH(BUS_DEPTH)) u_cdc_axil_ar (
    .wr_clk(nic_clk), .wr_rst(nic_rst),
    .in_data(s_axil_araddr), .in_valid(s_axil_arvalid), .in_ready(s_axil_arready),
    .rd_clk(clk), .rd_rst(rst),
    .out_data(c_araddr), .out_valid(c_arvalid), .out_ready(c_arready));

  pspin_async_fifo #(.T(axil_r_t), .DEPTH(BUS_DEPTH)) u_cdc_axil_r (
    .wr_clk(clk), .wr_rst(rst),
    .in_data(c_r), .in_valid(c_rvalid), .in_ready(c_rready),
    .rd_clk(nic_clk), .rd_rst(nic_rst),
    .out_data(s_axil_r), .out_valid(s_axil_rvalid), .out_ready(s_axil_rready));

  // ----------------------------------- PsPIN host master (PsPIN -> NIC side)
  axi_ax_t h_aw, h_ar;
  axi_w_t  h_w;
  axi_b_t  h_b;
  axi_r_t  h_r;
  logic h_aw_valid, h_aw_ready, h_w_valid, h_w_ready, h_b_valid, h_b_ready;
  logic h_ar_valid, h_ar_ready, h_r_valid, h_r_ready;

  pspin_async_fifo #(.T(axi_ax_t), .DEPTH(BUS_DEPTH)) u_cdc_host_aw (
    .wr_clk(clk), .wr_rst(rst),
    .in_data(s_host_aw), .in_valid(s_host_aw_valid), .in_ready(s_host_aw_ready),
    .rd_clk(nic_clk), .rd_rst(nic_rst),
    .out_data(h_aw), .out_valid(h_aw_valid), .out_ready(h_aw_ready));

  pspin_async_fifo #(.T(axi_w_t), .DEPTH(STREAM_DEPTH)) u_cdc_host_w (
    .wr_clk(clk), .wr_rst(rst),
    .in_data(s_host_w), .in_valid(s_host_w_valid), .in_ready(s_host_w_ready),
    .rd_clk(nic_clk), .rd_rst(nic_rst),
    .out_data(h_w), .out_valid(h_w_valid), .out_ready(h_w_ready));

  pspin_async_fifo #(.T(axi_b_t), .DEPTH(BUS_DEPTH)) u_cdc_host_b (
    .wr_clk(nic_clk), .wr_rst(nic_rst),
    .in_data(h_b), .in_valid(h_b_valid), .in_ready(h_b_ready),
    .rd_clk(clk), .rd_rst(rst),
    .out_data(s_host_b), .out_valid(s_host_b_valid), .out_ready(s_host_b_ready));

  pspin_async_fifo #(.T(axi_ax_t), .DEPTH(BUS_DEPTH)) u_cdc_host_ar (
    .wr_clk(clk), .wr_rst(rst),
    .in_data(s_host_ar), .in_valid(s_host_ar_valid), .in_ready(s_host_ar_ready),
    .rd_clk(nic_clk), .rd_rst(nic_rst),
    .out_data(h_ar), .out_valid(h_ar_valid), .out_ready(h_ar_ready));

  pspin_async_fifo #(.T(axi_r_t), .DEPTH(STREAM_DEPTH)) u_cdc_host_r (
    .wr_clk(nic_clk), .wr_rst(nic_rst),
    .in_data(h_r), .in_valid(h_r_valid), .in_ready(h_r_ready),
    .rd_clk(clk), .rd_rst(rst),
    .out_data(s_host_r), .out_valid(s_host_r_valid), .out_ready(s_host_r_ready));

  // ------------------------------------------------------------- PsPIN side
  pspin_ctrl_regs u_ctrl (
    .clk, .rst,
    .s_awaddr(c_awaddr), .s_awvalid(c_awvalid), .s_awready(c_awready),
    .s_wdata(c_w.data), .s_wstrb(c_w.strb), .s_wvalid(c_wvalid),
    .s_wready(c_wready), .s_bresp(c_bresp), .s_bvalid(c_bvalid),
    .s_bready(c_bready), .s_araddr(c_araddr), .s_arvalid(c_arvalid),
    .s_arready(c_arready), .s_rdata(c_r.data), .s_rresp(c_r.resp),
    .s_rvalid(c_rvalid), .s_rready(c_rready),
    .pspin_rst, .pspin_fetch_en, .cfg_ruleset, .cfg_ctx,
    .stdout_data(s_stdout_data), .stdout_valid(s_stdout_valid), .stdout_ready(s_stdout_ready),
    .small_free, .large_free);

  pspin_ingress_datapath #(.BUF_BASE(BUF_BASE), .BUF_SIZE(BUF_SIZE)) u_ingress (
    .clk, .rst, .cfg_ruleset, .cfg_ctx,
    .s_rx(rx_p), .s_rx_valid(rx_p_valid), .s_rx_ready(rx_p_ready),
    .m_rx_host(rxh_p), .m_rx_host_valid(rxh_p_valid), .m_rx_host_ready(rxh_p_ready),
    .m_aw(m_nic_aw), .m_aw_valid(m_nic_aw_valid), .m_aw_ready(m_nic_aw_ready),
    .m_w(m_nic_w), .m_w_valid(m_nic_w_valid), .m_w_ready(m_nic_w_ready),
    .m_b(m_nic_b), .m_b_valid(m_nic_b_valid), .m_b_ready(m_nic_b_ready),
    .m_her, .m_her_valid, .m_her_ready,
    .s_feedback, .s_feedback_valid, .s_feedback_ready,
    .small_free, .large_free);

  pspin_egress_dma u_egress (
    .clk, .rst,
    .s_cmd(s_egress_cmd), .s_cmd_valid(s_egress_cmd_valid), .s_cmd_ready(s_egress_cmd_ready),
    .m_done_tag(m_egress_done_tag), .m_done_valid(m_egress_done_valid),
    .m_ar(m_nic_ar), .m_ar_valid(m_nic_ar_valid), .m_ar_ready(m_nic_ar_ready),
    .m_r(m_nic_r), .m_r_valid(m_nic_r_valid), .m_r_ready(m_nic_r_ready),
    .s_tx_host(txh_p), .s_tx_host_valid(txh_p_valid), .s_tx_host_ready(txh_p_ready),
    .m_tx(tx_p), .m_tx_valid(tx_p_valid), .m_tx_ready(tx_p_ready));

  // --------------------------------------------------------------- NIC side
  pspin_hostmem_dma u_hostmem (
    .clk(nic_clk), .rst(nic_rst),
    .s_aw(h_aw), .s_aw_valid(h_aw_valid), .s_aw_ready(h_aw_ready),
    .s_w(h_w), .s_w_valid(h_w_valid), .s_w_ready(h_w_ready),
    .s_b(h_b), .s_b_valid(h_b_valid), .s_b_ready(h_b_ready),
    .s_ar(h_ar), .s_ar_valid(h_ar_valid), .s_ar_ready(h_ar_ready),
    .s_r(h_r), .s_r_valid(h_r_valid), .s_r_ready(h_r_ready),
    .m_wr_desc(m_dma_wr_desc), .m_wr_desc_valid(m_dma_wr_desc_valid),
    .m_wr_desc_ready(m_dma_wr_desc_ready),
    .s_wr_status(s_dma_wr_status), .s_wr_status_valid(s_dma_wr_status_valid),
    .m_rd_desc(m_dma_rd_desc), .m_rd_desc_valid(m_dma_rd_desc_valid),
    .m_rd_desc_ready(m_dma_rd_desc_ready),
    .s_rd_status(s_dma_rd_status), .s_rd_status_valid(s_dma_rd_status_valid),
    .ram_rd_en(dma_ram_rd_en), .ram_rd_addr(dma_ram_rd_addr), .ram_rd_data(dma_ram_rd_data),
    .ram_wr_en(dma_ram_wr_en), .ram_wr_addr(dma_ram_wr_addr), .ram_wr_data(dma_ram_wr_data),
    .ram_wr_strb(dma_ram_wr_strb));

endmodule
