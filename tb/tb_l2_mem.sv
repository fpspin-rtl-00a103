// tb_l2_mem: behavioural model of PsPIN's L2 memory as seen through its two
// NIC ports: an AXI4 write slave (NIC inbound, used by the ingress DMA) and an
// AXI4 read slave (NIC outbound, used by the egress DMA). Testbench only; it
// stands in for memory that belongs to the PsPIN cluster.
//
// Storage is a sparse byte array, so the full address space is available.
// Handshakes get random back-pressure when STALL is set; the write response
// follows the last W beat after 0-4 cycles, read data follows AR after 1-3
// cycles. The tasks peek/poke let the testbench, in the role of a handler,
// read and change packet bytes directly. One burst per port at a time.
module tb_l2_mem
  import fpspin_pkg::*;
#(
  parameter bit STALL = 1
) (
  input  logic    clk,
  input  logic    rst,
  input  axi_ax_t aw,
  input  logic    aw_valid,
  output logic    aw_ready,
  input  axi_w_t  w,
  input  logic    w_valid,
  output logic    w_ready,
  output axi_b_t  b,
  output logic    b_valid,
  input  logic    b_ready,
  input  axi_ax_t ar,
  input  logic    ar_valid,
  output logic    ar_ready,
  output axi_r_t  r,
  output logic    r_valid,
  input  logic    r_ready
);
  byte unsigned mem[longint];

  function automatic byte unsigned peek(longint a);
    return mem.exists(a) ? mem[a] : 8'h00;
  endfunction
  function automatic void poke(longint a, byte unsigned v);
    mem[a] = v;
  endfunction

  // write port
  longint wa; int wbeat;
  bit wbusy = 0;
  int bwait = -1;
  axi_b_t b_q;
  always @(posedge clk) begin
    if (rst) begin
      wbusy <= 0; b_valid <= 0; bwait = -1; aw_ready <= 0; w_ready <= 0;
    end else begin
      if (aw_valid && aw_ready) begin wa = longint'(aw.addr); wbeat = 0; wbusy <= 1; b_q.id = aw.id; end
      if (w_valid && w_ready) begin
        for (int i = 0; i < KEEP_W; i++) if (w.strb[i]) mem[wa + 64 * wbeat + i] = w.data[8*i +: 8];
        wbeat++;
        if (w.last) begin wbusy <= 0; bwait = STALL ? $urandom_range(0, 4) : 0; end
      end
      if (b_valid && b_ready) b_valid <= 0;
      else if (bwait == 0) begin b_valid <= 1; bwait = -1; end
      else if (bwait > 0) bwait--;
      aw_ready <= !wbusy && !(aw_valid && aw_ready) && (!STALL || $urandom_range(2) != 0);
      w_ready  <= !STALL || $urandom_range(3) != 0;
    end
  end
  assign b.id = b_q.id;
  assign b.resp = RESP_OKAY;

  // read port
  longint ra; int rleft = 0, rbeat = 0, rdelay = 0;
  logic [AXI_ID_W-1:0] rid;
  bit gap;
  always @(posedge clk) begin
    if (rst) begin
      rleft <= 0; ar_ready <= 0; gap <= 0;
    end else begin
      if (ar_valid && ar_ready) begin
        ra <= longint'(ar.addr); rleft <= int'(ar.len) + 1; rbeat <= 0; rid <= ar.id;
        rdelay <= STALL ? $urandom_range(1, 3) : 1;
      end else if (rdelay > 0) rdelay <= rdelay - 1;
      else if (r_valid && r_ready) begin rbeat <= rbeat + 1; rleft <= rleft - 1; end
      ar_ready <= (rleft == 0) && !(ar_valid && ar_ready) && (!STALL || $urandom_range(1) != 0);
      gap <= STALL && ($urandom_range(3) == 0);
    end
  end
  assign r_valid = (rleft > 0) && (rdelay == 0) && !gap;
  always_comb begin
    r = '0;
    r.id = rid;
    for (int i = 0; i < KEEP_W; i++) r.data[8*i +: 8] = peek(ra + 64 * rbeat + i);
    r.last = (rleft == 1);
  end
endmodule
