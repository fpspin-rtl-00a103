// pspin_slot_pool: one pool of equally sized packet buffer slots, as used
// twice by the packet buffer allocator (128-byte and 1536-byte slots).
//
// Free slots are kept as byte offsets in a FIFO: allocating pops the head,
// freeing pushes the returned offset. So that the pool is usable straight out
// of reset without a fill phase, slots that have never been handed out are
// produced by a "fresh" counter that walks through the pool once; after that
// only the FIFO supplies slots. The FIFO holds NSLOTS entries, so a push can
// never find it full while every slot is accounted for.
//
// Timing: the head slot is offered combinationally (avail/off), an allocation
// (take) and a free (give) may happen in the same cycle.
module pspin_slot_pool #(
  parameter int unsigned NSLOTS = 2048,
  parameter int unsigned SLOT_B = 128,
  parameter int unsigned OFF_W  = 19
) (
  input  logic             clk,
  input  logic             rst,
  output logic             avail,
  output logic [OFF_W-1:0] off,
  input  logic             take,
  input  logic             give,
  input  logic [OFF_W-1:0] give_off,
  output logic [$clog2(NSLOTS+1)-1:0] free_count
);
  localparam int unsigned PW = $clog2(NSLOTS);

  logic [OFF_W-1:0] fifo [NSLOTS];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic [$clog2(NSLOTS+1)-1:0] fifo_cnt;
  logic [$clog2(NSLOTS+1)-1:0] fresh_cnt;    // slots never handed out so far
  logic [OFF_W-1:0] fresh_off;

  wire use_fresh = (fresh_cnt != '0);
  assign avail = use_fresh || (fifo_cnt != '0);
  assign off   = use_fresh ? fresh_off : fifo[rd_ptr];
  assign free_count = fresh_cnt + fifo_cnt;

  wire pop  = take && avail && !use_fresh;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(NSLOTS - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ptr    <= '0;
      wr_ptr    <= '0;
      fifo_cnt  <= '0;
      fresh_cnt <= ($clog2(NSLOTS+1))'(NSLOTS);
      fresh_off <= '0;
    end else begin
      if (take && avail && use_fresh) begin
        fresh_cnt <= fresh_cnt - 1'b1;
        fresh_off <= fresh_off + OFF_W'(SLOT_B);
      end
      if (pop)  rd_ptr <= inc(rd_ptr);
      if (give) wr_ptr <= inc(wr_ptr);
      case ({give, pop})
        2'b10:   fifo_cnt <= fifo_cnt + 1'b1;
        2'b01:   fifo_cnt <= fifo_cnt - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (give) fifo[wr_ptr] <= give_off;
  end

  // A free of a slot that is already free would overflow the pool.
  assert property (@(posedge clk) disable iff (rst) give |-> (free_count < ($clog2(NSLOTS+1))'(NSLOTS)) || take);

endmodule
