// pspin_egress_dma: the transmit half of the application block. It carries
// out the send commands that PsPIN handlers issue (spin_send_packet): it reads
// the packet from PsPIN memory over PsPIN's NIC-outbound AXI4 slave port and
// injects it, as an AXI-Stream packet, into the stream that Corundum sends to
// the Ethernet MAC, next to the packets the host itself transmits.
//
// The reader issues one INCR burst of 64-byte beats per command and turns each
// read beat into a stream beat; the last beat's tkeep is cut to the command's
// length. After the last beat has left, the command's tag is returned on the
// completion port so that the handler's spin_cmd_wait can finish. Packets of
// the host and of PsPIN are merged per packet by pspin_axis_arb (the paper
// uses Corundum's axis_arb_mux there). The paper's version uses Corundum's
// generic AXI read DMA, which also handles unaligned source addresses; this
// one requires the source address to be 64-byte aligned (packet buffer slots
// always are), which an assertion checks.
//
// Timing: command -> AR (1 cycle) -> read beats streamed through as they
// arrive, one per cycle at most -> completion (1 cycle). Only one command is
// in flight at a time.
module pspin_egress_dma
  import fpspin_pkg::*;
(
  input  logic        clk,
  input  logic        rst,

  input  egress_cmd_t s_cmd,
  input  logic        s_cmd_valid,
  output logic        s_cmd_ready,
  output logic [EG_TAG_W-1:0] m_done_tag,
  output logic        m_done_valid,

  output axi_ax_t     m_ar,
  output logic        m_ar_valid,
  input  logic        m_ar_ready,
  input  axi_r_t      m_r,
  input  logic        m_r_valid,
  output logic        m_r_ready,

  // host transmit stream from Corundum and merged stream to the MAC
  input  axis_beat_t  s_tx_host,
  input  logic        s_tx_host_valid,
  output logic        s_tx_host_ready,
  output axis_beat_t  m_tx,
  output logic        m_tx_valid,
  input  logic        m_tx_ready
);
  typedef enum logic [1:0] {S_IDLE, S_AR, S_DATA, S_DONE} state_e;

  state_e      state;
  egress_cmd_t cmd_q;
  logic [LEN_W-1:0] beats_left;
  axis_beat_t  pk;
  logic        pk_valid, pk_ready;

  assign s_cmd_ready = (state == S_IDLE);

  always_comb begin
    m_ar       = '0;
    m_ar.addr  = AXI_ADDR_W'(cmd_q.addr);
    m_ar.len   = 8'(beats_of(cmd_q.len) - 1'b1);
    m_ar.size  = 3'($clog2(BEAT_B));
    m_ar.burst = BURST_INCR;
    m_ar_valid = (state == S_AR);

    pk.data  = m_r.data;
    pk.last  = (beats_left == LEN_W'(1));
    pk.keep  = pk.last ? last_keep(cmd_q.len) : '1;
    pk_valid = (state == S_DATA) && m_r_valid;
    m_r_ready = (state == S_DATA) && pk_ready;

    m_done_valid = (state == S_DONE);
    m_done_tag   = cmd_q.tag;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      cmd_q      <= '0;
      beats_left <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (s_cmd_valid) begin
          cmd_q      <= s_cmd;
          beats_left <= beats_of(s_cmd.len);
          state      <= S_AR;
        end
        S_AR:   if (m_ar_ready) state <= S_DATA;
        S_DATA: if (pk_valid && pk_ready) begin
          beats_left <= beats_left - 1'b1;
          if (beats_left == LEN_W'(1)) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  pspin_axis_arb u_arb (
    .clk, .rst,
    .s0(s_tx_host), .s0_valid(s_tx_host_valid), .s0_ready(s_tx_host_ready),
    .s1(pk), .s1_valid(pk_valid), .s1_ready(pk_ready),
    .m(m_tx), .m_valid(m_tx_valid), .m_ready(m_tx_ready));

  assert property (@(posedge clk) disable iff (rst)
    s_cmd_valid |-> (s_cmd.addr[$clog2(BEAT_B)-1:0] == '0) && (s_cmd.len != '0));
  assert property (@(posedge clk) disable iff (rst)
    (m_r_valid && m_r_ready) |-> (m_r.last == pk.last));

endmodule
