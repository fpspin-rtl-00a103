// pspin_hostmem_dma: gives the PsPIN handlers access to host memory. It is an
// AXI4 slave for PsPIN's host master port on one side and drives a
// Corundum-style descriptor DMA engine (commands: host address, buffer
// address, length, tag; completions: tag) on the other. Between the two sits a
// dual-port bounce buffer (4 KiB, 64 words of 64 bytes): the AXI side uses one
// port, the DMA engine the other.
//
// Writes (PsPIN -> host): the AXI burst's beats are stored in the buffer, beat
// i in word i, with their byte strobes. The paper's address recovery then
// restores the unaligned transfer that AXI expressed as aligned beats with
// strobes: the start offset is the lowest set strobe bit of the first beat,
// the end is the highest set strobe bit of the last beat, so
//   addr = (AWADDR aligned down to 64) + first_off
//   len  = 64 * beats - first_off - (63 - last_hi)
// and one DMA write command (buffer offset first_off) moves exactly those
// bytes to the host; no read-modify-write of host memory is needed. The B
// response is sent when the DMA engine reports completion.
// Reads (host -> PsPIN) go the other way: one DMA read command fills the
// buffer with the 64-byte aligned region the burst covers, then the words are
// returned as R beats.
//
// Like the paper's adapter this is not a complete AXI slave: only INCR bursts
// of full 64-byte beats, no interleaving (one transaction at a time, writes
// before reads when both wait), strobes must be contiguous from the first
// valid byte to the last. Bursts may not cross 4 KiB (an AXI rule), so one
// buffer holds any burst. Assertions check these rules.
//
// Timing: a write takes one cycle per beat, one for the command, the DMA
// engine's time, one for B. A read takes the command, the DMA time and two
// cycles per returned beat (buffer read, then R). The buffer's DMA-side read
// port has one cycle of latency. The paper runs this block at Corundum's
// 250 MHz; the top clocks it with the NIC-side clock and reaches it from the
// PsPIN side through clock-crossing FIFOs.
module pspin_hostmem_dma
  import fpspin_pkg::*;
(
  input  logic        clk,
  input  logic        rst,

  // AXI4 slave, from the PsPIN host master
  input  axi_ax_t     s_aw,
  input  logic        s_aw_valid,
  output logic        s_aw_ready,
  input  axi_w_t      s_w,
  input  logic        s_w_valid,
  output logic        s_w_ready,
  output axi_b_t      s_b,
  output logic        s_b_valid,
  input  logic        s_b_ready,
  input  axi_ax_t     s_ar,
  input  logic        s_ar_valid,
  output logic        s_ar_ready,
  output axi_r_t      s_r,
  output logic        s_r_valid,
  input  logic        s_r_ready,

  // DMA engine commands and completions
  output dma_desc_t   m_wr_desc,
  output logic        m_wr_desc_valid,
  input  logic        m_wr_desc_ready,
  input  dma_status_t s_wr_status,
  input  logic        s_wr_status_valid,
  output dma_desc_t   m_rd_desc,
  output logic        m_rd_desc_valid,
  input  logic        m_rd_desc_ready,
  input  dma_status_t s_rd_status,
  input  logic        s_rd_status_valid,

  // bounce buffer port for the DMA engine
  input  logic                  ram_rd_en,
  input  logic [DMA_RAM_WORD_AW-1:0]    ram_rd_addr,
  output logic [DATA_W-1:0]     ram_rd_data,
  input  logic                  ram_wr_en,
  input  logic [DMA_RAM_WORD_AW-1:0]    ram_wr_addr,
  input  logic [DATA_W-1:0]     ram_wr_data,
  input  logic [KEEP_W-1:0]     ram_wr_strb
);
  localparam int unsigned WORDS   = DMA_RAM_WORDS;
  localparam int unsigned OFF_W   = $clog2(BEAT_B);                     // 6

  typedef enum logic [3:0] {
    S_IDLE, S_W_DATA, S_W_DESC, S_W_WAIT, S_W_B,
    S_R_DESC, S_R_WAIT, S_R_RD, S_R_SEND
  } state_e;

  state_e  state;
  axi_ax_t ax_q;
  logic [DMA_RAM_WORD_AW:0]    beat_cnt;     // beats received / returned
  logic [KEEP_W-1:0]   first_strb, last_strb;
  logic [DMA_TAG_W-1:0] tag_q;

  // ------------------------------------------------------- bounce buffer
  logic [DATA_W-1:0] mem [WORDS];
  logic              a_we;
  logic [DMA_RAM_WORD_AW-1:0] a_addr;
  logic [DATA_W-1:0] a_rdata;

  always_ff @(posedge clk) begin
    for (int b = 0; b < KEEP_W; b++) begin
      if (a_we && s_w.strb[b])            mem[a_addr][8*b +: 8]      <= s_w.data[8*b +: 8];
      if (ram_wr_en && ram_wr_strb[b])    mem[ram_wr_addr][8*b +: 8] <= ram_wr_data[8*b +: 8];
    end
    a_rdata <= mem[a_addr];
    if (ram_rd_en) ram_rd_data <= mem[ram_rd_addr];
  end

  // ------------------------------------------------- address recovery
  function automatic logic [OFF_W-1:0] lowest_set(input logic [KEEP_W-1:0] s);
    logic [OFF_W-1:0] r;
    r = '0;
    for (int i = KEEP_W - 1; i >= 0; i--) if (s[i]) r = OFF_W'(i);
    return r;
  endfunction

  function automatic logic [OFF_W-1:0] highest_set(input logic [KEEP_W-1:0] s);
    logic [OFF_W-1:0] r;
    r = '0;
    for (int i = 0; i < KEEP_W; i++) if (s[i]) r = OFF_W'(i);
    return r;
  endfunction

  logic [OFF_W-1:0] first_off, last_hi;
  logic [63:0]      rec_addr;
  logic [LEN_W-1:0] rec_len;

  always_comb begin
    first_off = lowest_set(first_strb);
    last_hi   = highest_set(last_strb);
    rec_addr  = {ax_q.addr[63:OFF_W], {OFF_W{1'b0}}} + 64'(first_off);
    rec_len   = LEN_W'(beat_cnt) * LEN_W'(BEAT_B) - LEN_W'(first_off)
              - LEN_W'(BEAT_B - 1) + LEN_W'(last_hi);
  end

  // ------------------------------------------------------------ control
  always_comb begin
    s_aw_ready = (state == S_IDLE);
    s_ar_ready = (state == S_IDLE) && !s_aw_valid;
    s_w_ready  = (state == S_W_DATA);
    a_we       = s_w_valid && s_w_ready;
    a_addr     = beat_cnt[DMA_RAM_WORD_AW-1:0];

    m_wr_desc.dma_addr = rec_addr;
    m_wr_desc.ram_addr = DMA_RAM_ADDR_W'(first_off);
    m_wr_desc.len      = rec_len;
    m_wr_desc.tag      = tag_q;
    m_wr_desc_valid    = (state == S_W_DESC);

    m_rd_desc.dma_addr = {ax_q.addr[63:OFF_W], {OFF_W{1'b0}}};
    m_rd_desc.ram_addr = '0;
    m_rd_desc.len      = (LEN_W'(ax_q.len) + 1'b1) * LEN_W'(BEAT_B);
    m_rd_desc.tag      = tag_q;
    m_rd_desc_valid    = (state == S_R_DESC);

    s_b.id    = ax_q.id;
    s_b.resp  = RESP_OKAY;
    s_b_valid = (state == S_W_B);

    s_r.id    = ax_q.id;
    s_r.data  = a_rdata;
    s_r.resp  = RESP_OKAY;
    s_r.last  = (beat_cnt == {1'b0, ax_q.len[DMA_RAM_WORD_AW-1:0]});
    s_r_valid = (state == S_R_SEND);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      ax_q       <= '0;
      beat_cnt   <= '0;
      first_strb <= '0;
      last_strb  <= '0;
      tag_q      <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          beat_cnt <= '0;
          if (s_aw_valid) begin
            ax_q  <= s_aw;
            state <= S_W_DATA;
          end else if (s_ar_valid) begin
            ax_q  <= s_ar;
            state <= S_R_DESC;
          end
        end
        S_W_DATA: if (s_w_valid) begin
          if (beat_cnt == '0) first_strb <= s_w.strb;
          beat_cnt <= beat_cnt + 1'b1;
          if (s_w.last) begin
            last_strb <= s_w.strb;
            state     <= S_W_DESC;
          end
        end
        S_W_DESC: if (m_wr_desc_ready) state <= S_W_WAIT;
        S_W_WAIT: if (s_wr_status_valid && s_wr_status.tag == tag_q) begin
          tag_q <= tag_q + 1'b1;
          state <= S_W_B;
        end
        S_W_B:    if (s_b_ready) state <= S_IDLE;
        S_R_DESC: if (m_rd_desc_ready) state <= S_R_WAIT;
        S_R_WAIT: if (s_rd_status_valid && s_rd_status.tag == tag_q) begin
          tag_q <= tag_q + 1'b1;
          state <= S_R_RD;
        end
        S_R_RD:   state <= S_R_SEND;            // buffer word being read
        S_R_SEND: if (s_r_ready) begin
          if (s_r.last) state <= S_IDLE;
          else begin
            beat_cnt <= beat_cnt + 1'b1;
            state    <= S_R_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------ unsupported requests
  assert property (@(posedge clk) disable iff (rst)
    (s_aw_valid && s_aw_ready) |-> (s_aw.burst == BURST_INCR && s_aw.size == 3'(OFF_W)
                                    && int'(s_aw.len) < WORDS));
  assert property (@(posedge clk) disable iff (rst)
    (s_ar_valid && s_ar_ready) |-> (s_ar.burst == BURST_INCR && s_ar.size == 3'(OFF_W)
                                    && int'(s_ar.len) < WORDS));
  assert property (@(posedge clk) disable iff (rst)
    (s_w_valid && s_w_ready) |-> (s_w.last == (beat_cnt == {1'b0, ax_q.len[DMA_RAM_WORD_AW-1:0]})));

endmodule
