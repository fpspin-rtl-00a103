// pspin_ingress_dma: copies a matched packet into the L2 packet buffer slot
// that the allocator chose, through PsPIN's NIC-inbound AXI4 slave port, and
// then passes the packet's metadata on to the HER generator.
//
// The paper builds this block around Corundum's generic AXI write DMA; here
// the simplest engine that does the same job is used: one INCR burst of
// 64-byte beats per packet (a 1536-byte slot is 24 beats, well inside one
// burst and one 4 KiB page), write strobes equal to the stream's tkeep, then a
// wait for the write response. Only after the response, when the data is
// known to be in memory, is the metadata released.
//
// Timing: metadata accepted -> AW (1 cycle) -> one W beat per cycle while the
// packet FIFO and the slave allow -> B -> metadata out. With a slave that
// answers at once, a packet of n beats takes n + 3 cycles from metadata to
// metadata, i.e. 4 cycles for a minimum frame and 27 for a 1536-byte slot,
// inside the 8-70 cycles the paper gives for its implementation.
//
// Interface: metadata in/out (valid/ready), packet stream in (valid/ready,
// must carry exactly the bytes of the metadata's length), AXI4 write master
// (AW, W, B). A non-OKAY response is not retried; the packet is still handed
// on (the paper does not describe error handling).
module pspin_ingress_dma
  import fpspin_pkg::*;
(
  input  logic       clk,
  input  logic       rst,

  input  pkt_meta_t  s_meta,
  input  logic       s_meta_valid,
  output logic       s_meta_ready,

  input  axis_beat_t s_axis,
  input  logic       s_axis_valid,
  output logic       s_axis_ready,

  output axi_ax_t    m_aw,
  output logic       m_aw_valid,
  input  logic       m_aw_ready,
  output axi_w_t     m_w,
  output logic       m_w_valid,
  input  logic       m_w_ready,
  input  axi_b_t     m_b,
  input  logic       m_b_valid,
  output logic       m_b_ready,

  output pkt_meta_t  m_meta,
  output logic       m_meta_valid,
  input  logic       m_meta_ready
);
  typedef enum logic [2:0] {S_IDLE, S_AW, S_DATA, S_RESP, S_OUT} state_e;

  state_e    state;
  pkt_meta_t meta_q;
  logic [LEN_W-1:0] beats_left;

  assign s_meta_ready = (state == S_IDLE);

  always_comb begin
    m_aw       = '0;
    m_aw.addr  = AXI_ADDR_W'(meta_q.addr);
    m_aw.len   = 8'(beats_of(meta_q.len) - 1'b1);
    m_aw.size  = 3'($clog2(BEAT_B));
    m_aw.burst = BURST_INCR;
    m_aw_valid = (state == S_AW);

    m_w.data  = s_axis.data;
    m_w.strb  = s_axis.keep;
    m_w.last  = (beats_left == LEN_W'(1));
    m_w_valid = (state == S_DATA) && s_axis_valid;
    s_axis_ready = (state == S_DATA) && m_w_ready;

    m_b_ready    = (state == S_RESP);
    m_meta       = meta_q;
    m_meta_valid = (state == S_OUT);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      meta_q     <= '0;
      beats_left <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (s_meta_valid) begin
          meta_q     <= s_meta;
          beats_left <= beats_of(s_meta.len);
          state      <= S_AW;
        end
        S_AW:   if (m_aw_ready) state <= S_DATA;
        S_DATA: if (m_w_valid && m_w_ready) begin
          beats_left <= beats_left - 1'b1;
          if (beats_left == LEN_W'(1)) state <= S_RESP;
        end
        S_RESP: if (m_b_valid) state <= S_OUT;
        S_OUT:  if (m_meta_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // The stream must end exactly where the metadata's length says.
  assert property (@(posedge clk) disable iff (rst)
    (m_w_valid && m_w_ready) |-> (s_axis.last == m_w.last));

endmodule
