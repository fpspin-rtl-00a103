// pspin_pkt_alloc: packet buffer allocator. It gives every packet that is to
// be processed by PsPIN a place in the L2 packet buffer and takes the place
// back when PsPIN reports that the packet's handlers have finished.
//
// Following the paper, the buffer is split into two halves: the lower half in
// 128-byte slots, the upper half in 1536-byte slots (with the 512 KiB buffer:
// 2048 small and 170 large slots; the 256 bytes left over in the upper half
// are unused). Free slots of each size live in their own FIFO
// (pspin_slot_pool), so allocation is a pop and freeing a push. This replaces
// a ring buffer, which would need to track out-of-order frees. A packet of up
// to 128 bytes takes a small slot, a longer one a large slot; if that pool is
// empty the metadata waits (back-pressure) - the paper does not say what
// happens then, and falling back to the other pool is not done.
//
// Timing: zero cycles, as in the paper's latency table: the allocated address
// is added to the metadata combinationally, and the input is accepted in the
// cycle the output is. Frees are always accepted.
//
// Interface: metadata in (valid/ready), metadata with address out
// (valid/ready), completion notification in (feedback_t, valid/ready). A free
// is routed to the pool by the half of the buffer its address falls in.
// Packets over 1536 bytes do not fit a slot; an assertion flags them (a
// 1500-byte MTU frame is 1514 bytes).
module pspin_pkt_alloc
  import fpspin_pkg::*;
#(
  parameter logic [31:0] BUF_BASE = 32'h0,
  parameter int unsigned BUF_SIZE = PKT_BUF_SIZE,
  parameter int unsigned SMALL_B  = SMALL_SLOT_B,
  parameter int unsigned LARGE_B  = LARGE_SLOT_B
) (
  input  logic      clk,
  input  logic      rst,

  input  pkt_meta_t s_meta,
  input  logic      s_valid,
  output logic      s_ready,

  output pkt_meta_t m_meta,
  output logic      m_valid,
  input  logic      m_ready,

  input  feedback_t s_free,
  input  logic      s_free_valid,
  output logic      s_free_ready,

  output logic [15:0] small_free,
  output logic [15:0] large_free
);
  localparam int unsigned HALF     = BUF_SIZE / 2;
  localparam int unsigned N_SMALL  = HALF / SMALL_B;
  localparam int unsigned N_LARGE  = HALF / LARGE_B;
  localparam int unsigned OFF_W    = $clog2(HALF);

  logic             sm_avail, lg_avail;
  logic [OFF_W-1:0] sm_off, lg_off;
  logic             want_small;
  logic             sm_take, lg_take, sm_give, lg_give;
  logic [31:0]      free_off;
  logic [$clog2(N_SMALL+1)-1:0] sm_cnt;
  logic [$clog2(N_LARGE+1)-1:0] lg_cnt;

  assign want_small = (s_meta.len <= LEN_W'(SMALL_B));

  always_comb begin
    m_meta  = s_meta;
    m_valid = s_valid && (want_small ? sm_avail : lg_avail);
    s_ready = m_ready && (want_small ? sm_avail : lg_avail);
    m_meta.addr = want_small ? BUF_BASE + 32'(sm_off)
                             : BUF_BASE + 32'(HALF) + 32'(lg_off);
    sm_take = s_valid && m_ready && want_small;
    lg_take = s_valid && m_ready && !want_small;
  end

  assign s_free_ready = 1'b1;
  assign free_off     = s_free.pkt_addr - BUF_BASE;
  assign sm_give      = s_free_valid && (free_off < 32'(HALF));
  assign lg_give      = s_free_valid && (free_off >= 32'(HALF));

  pspin_slot_pool #(.NSLOTS(N_SMALL), .SLOT_B(SMALL_B), .OFF_W(OFF_W)) u_small (
    .clk, .rst, .avail(sm_avail), .off(sm_off), .take(sm_take),
    .give(sm_give), .give_off(free_off[OFF_W-1:0]), .free_count(sm_cnt));

  pspin_slot_pool #(.NSLOTS(N_LARGE), .SLOT_B(LARGE_B), .OFF_W(OFF_W)) u_large (
    .clk, .rst, .avail(lg_avail), .off(lg_off), .take(lg_take),
    .give(lg_give), .give_off(OFF_W'(free_off - 32'(HALF))), .free_count(lg_cnt));

  assign small_free = 16'(sm_cnt);
  assign large_free = 16'(lg_cnt);

  assert property (@(posedge clk) disable iff (rst) s_valid |-> s_meta.len <= LEN_W'(LARGE_B));

endmodule
