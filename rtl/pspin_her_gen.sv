// pspin_her_gen: handler execution request (HER) generator, the last stage of
// the ingress datapath. Once a packet sits in the L2 packet buffer it turns the
// packet's metadata into a HER for the PsPIN packet scheduler.
//
// A HER combines two sources, as the paper describes: from the packet
// metadata the message ID, the end-of-message flag (the tail handler must
// run), the packet's buffer address and its size; from the execution context
// that matched the packet (written by the host through the control
// registers) the addresses and sizes of the header, packet and tail handlers,
// the handler memory region and the host memory region for DMA.
//
// Timing: combinational, zero cycles, as in the paper's latency table; the
// valid/ready handshake passes straight through.
module pspin_her_gen
  import fpspin_pkg::*;
(
  input  her_ctx_t [NUM_RULESETS-1:0] cfg_ctx,

  input  pkt_meta_t s_meta,
  input  logic      s_valid,
  output logic      s_ready,

  output her_t      m_her,
  output logic      m_valid,
  input  logic      m_ready
);
  always_comb begin
    m_her.msgid    = s_meta.msgid;
    m_her.eom      = s_meta.eom;
    m_her.pkt_addr = s_meta.addr;
    m_her.pkt_size = s_meta.len;
    m_her.ctx      = cfg_ctx[s_meta.ctx];
    m_valid        = s_valid;
    s_ready        = m_ready;
  end
endmodule
