// pspin_ingress_datapath: the receive half of the application block. It
// chains the four ingress stages in the order the paper draws them:
//
//   Corundum RX --> pspin_pkt_match --(no match)--> back to Corundum RX
//                        | match: data            | match: metadata
//                        v                         v
//                  packet data FIFO         metadata FIFO --> pspin_pkt_alloc
//                        |                                        |
//                        +-----------> pspin_ingress_dma <--------+
//                                            |  AXI4 writes into the L2 packet buffer
//                                            v
//                                      pspin_her_gen --> HER to PsPIN
//
// PsPIN's completion notifications go to the allocator to free the slot.
//
// The matcher learns a packet's length only at its last beat, while the
// allocator needs the length to pick a slot size; so matched packet data waits
// in a FIFO deep enough for a whole 1536-byte packet (DATA_FIFO_DEPTH beats,
// own choice: 32) until its metadata has been through the allocator. The
// metadata FIFO (own choice: 8 entries) lets a few short packets queue behind
// a long one.
module pspin_ingress_datapath
  import fpspin_pkg::*;
#(
  parameter logic [31:0] BUF_BASE        = 32'h0,
  parameter int unsigned BUF_SIZE        = PKT_BUF_SIZE,
  parameter int unsigned DATA_FIFO_DEPTH = 32,
  parameter int unsigned META_FIFO_DEPTH = 8
) (
  input  logic       clk,
  input  logic       rst,
  input  ruleset_t [NUM_RULESETS-1:0] cfg_ruleset,
  input  her_ctx_t [NUM_RULESETS-1:0] cfg_ctx,

  // from Corundum (receive)
  input  axis_beat_t s_rx,
  input  logic       s_rx_valid,
  output logic       s_rx_ready,
  // unmatched packets, back to Corundum
  output axis_beat_t m_rx_host,
  output logic       m_rx_host_valid,
  input  logic       m_rx_host_ready,

  // AXI4 write master into PsPIN's NIC-inbound port
  output axi_ax_t    m_aw,
  output logic       m_aw_valid,
  input  logic       m_aw_ready,
  output axi_w_t     m_w,
  output logic       m_w_valid,
  input  logic       m_w_ready,
  input  axi_b_t     m_b,
  input  logic       m_b_valid,
  output logic       m_b_ready,

  // HER to PsPIN, completion from PsPIN
  output her_t       m_her,
  output logic       m_her_valid,
  input  logic       m_her_ready,
  input  feedback_t  s_feedback,
  input  logic       s_feedback_valid,
  output logic       s_feedback_ready,

  output logic [15:0] small_free,
  output logic [15:0] large_free
);
  axis_beat_t mt_data;   logic mt_data_valid, mt_data_ready;
  pkt_meta_t  mt_meta;   logic mt_meta_valid, mt_meta_ready;
  axis_beat_t fq_data;   logic fq_data_valid, fq_data_ready;
  pkt_meta_t  fq_meta;   logic fq_meta_valid, fq_meta_ready;
  pkt_meta_t  al_meta;   logic al_meta_valid, al_meta_ready;
  pkt_meta_t  dm_meta;   logic dm_meta_valid, dm_meta_ready;

  pspin_pkt_match u_match (
    .clk, .rst, .cfg_ruleset,
    .s_axis(s_rx), .s_valid(s_rx_valid), .s_ready(s_rx_ready),
    .m_pspin(mt_data), .m_pspin_valid(mt_data_valid), .m_pspin_ready(mt_data_ready),
    .m_meta(mt_meta), .m_meta_valid(mt_meta_valid), .m_meta_ready(mt_meta_ready),
    .m_host(m_rx_host), .m_host_valid(m_rx_host_valid), .m_host_ready(m_rx_host_ready));

  pspin_fifo #(.T(axis_beat_t), .DEPTH(DATA_FIFO_DEPTH)) u_data_fifo (
    .clk, .rst,
    .in_data(mt_data), .in_valid(mt_data_valid), .in_ready(mt_data_ready),
    .out_data(fq_data), .out_valid(fq_data_valid), .out_ready(fq_data_ready),
    .count());

  pspin_fifo #(.T(pkt_meta_t), .DEPTH(META_FIFO_DEPTH)) u_meta_fifo (
    .clk, .rst,
    .in_data(mt_meta), .in_valid(mt_meta_valid), .in_ready(mt_meta_ready),
    .out_data(fq_meta), .out_valid(fq_meta_valid), .out_ready(fq_meta_ready),
    .count());

  pspin_pkt_alloc #(.BUF_BASE(BUF_BASE), .BUF_SIZE(BUF_SIZE)) u_alloc (
    .clk, .rst,
    .s_meta(fq_meta), .s_valid(fq_meta_valid), .s_ready(fq_meta_ready),
    .m_meta(al_meta), .m_valid(al_meta_valid), .m_ready(al_meta_ready),
    .s_free(s_feedback), .s_free_valid(s_feedback_valid), .s_free_ready(s_feedback_ready),
    .small_free, .large_free);

  pspin_ingress_dma u_dma (
    .clk, .rst,
    .s_meta(al_meta), .s_meta_valid(al_meta_valid), .s_meta_ready(al_meta_ready),
    .s_axis(fq_data), .s_axis_valid(fq_data_valid), .s_axis_ready(fq_data_ready),
    .m_aw, .m_aw_valid, .m_aw_ready, .m_w, .m_w_valid, .m_w_ready,
    .m_b, .m_b_valid, .m_b_ready,
    .m_meta(dm_meta), .m_meta_valid(dm_meta_valid), .m_meta_ready(dm_meta_ready));

  pspin_her_gen u_her (
    .cfg_ctx,
    .s_meta(dm_meta), .s_valid(dm_meta_valid), .s_ready(dm_meta_ready),
    .m_her, .m_valid(m_her_valid), .m_ready(m_her_ready));

endmodule
