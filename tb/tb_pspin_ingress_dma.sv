// tb_pspin_ingress_dma: self-checking test of the ingress DMA.
//
// A behavioural AXI4 slave (byte-addressed sparse memory, random AW/W
// back-pressure, random write-response delay) stands in for PsPIN's
// NIC-inbound port. Packets of random length are offered with metadata that
// carries a slot address; the test checks the burst fields (address, beat
// count, 64-byte beats, INCR), that the memory afterwards holds exactly the
// packet bytes and nothing past its end, and that the metadata comes out
// unchanged and only after the write response. With a slave that never
// stalls, the cycle count from metadata in to metadata out must be beats + 3
// and so within the 8-70 cycles quoted for the paper's implementation for
// every packet size up to a 1536-byte slot.
module tb_pspin_ingress_dma;
  import fpspin_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  pkt_meta_t s_meta, m_meta;
  logic s_meta_valid, s_meta_ready, m_meta_valid, m_meta_ready;
  axis_beat_t s_axis;
  logic s_axis_valid, s_axis_ready;
  axi_ax_t m_aw; logic m_aw_valid, m_aw_ready;
  axi_w_t  m_w;  logic m_w_valid, m_w_ready;
  axi_b_t  m_b;  logic m_b_valid, m_b_ready;

  pspin_ingress_dma dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------------------------------------------------------- slave
  byte unsigned mem[longint];
  bit  stall = 0;                   // random back-pressure on/off
  longint wa; int wbeat = 0, wlen = 0; bit in_burst = 0;
  int b_delay = -1;
  int aw_seen = 0, b_seen = 0;

  always @(posedge clk) if (!rst) begin
    if (m_aw_valid && m_aw_ready) begin
      check(!in_burst, "one burst at a time");
      wa = longint'(m_aw.addr); wbeat = 0; wlen = int'(m_aw.len) + 1; in_burst = 1;
      check(m_aw.size == 3'd6 && m_aw.burst == BURST_INCR, "AW size and burst type");
      aw_seen++;
    end
    if (m_w_valid && m_w_ready) begin
      for (int i = 0; i < 64; i++) if (m_w.strb[i]) mem[wa + 64*wbeat + i] = m_w.data[8*i +: 8];
      wbeat++;
      check(m_w.last == (wbeat == wlen), "WLAST on the final beat");
      if (m_w.last) begin in_burst = 0; b_delay = stall ? $urandom_range(0, 6) : 0; end
    end
    if (m_b_valid && m_b_ready) begin m_b_valid <= 0; b_seen++; end
    else if (b_delay == 0) begin m_b_valid <= 1; b_delay = -1; end
    else if (b_delay > 0) b_delay--;
    m_aw_ready <= !stall || $urandom_range(2) != 0;
    m_w_ready  <= !stall || $urandom_range(3) != 0;
    m_meta_ready <= !stall || $urandom_range(2) != 0;
  end
  assign m_b = '0;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pkt(input int len, input int addr, input bit timed);
    byte unsigned p[];
    pkt_meta_t md;
    int n, t, lat;
    p = new[len];
    foreach (p[i]) p[i] = 8'($urandom);
    for (int i = 0; i < len + 64; i++) mem.delete(longint'(addr + i));
    n = (len + 63) / 64;
    md = '0; md.len = LEN_W'(len); md.addr = addr; md.msgid = $urandom; md.eom = 1'($urandom);
    md.ctx = CTX_W'($urandom);
    s_meta = md; s_meta_valid = 1;
    #1;  // let combinational ready settle
    while (!s_meta_ready) @(negedge clk);
    t = 0;
    fork
      begin
        @(negedge clk); s_meta_valid = 0;
        for (int b = 0; b < n; b++) begin
          s_axis = '0;
          for (int i = 0; i < 64; i++) if (64*b + i < len) begin
            s_axis.data[8*i +: 8] = p[64*b + i]; s_axis.keep[i] = 1;
          end
          s_axis.last = (b == n - 1);
          s_axis_valid = 1;
          #1;  // let combinational ready settle
          while (!s_axis_ready) @(negedge clk);
          @(negedge clk);
          s_axis_valid = 0;
          if (stall && $urandom_range(3) == 0) @(negedge clk);
        end
      end
      begin
        lat = 0;
        do begin @(negedge clk); lat++; check(!(m_meta_valid && b_seen == 0 && aw_seen == 0), "no early meta"); end
        while (!m_meta_valid);
      end
    join
    check(m_meta == md, "metadata passes through unchanged");
    while (!m_meta_ready) @(negedge clk);
    @(negedge clk);
    for (int i = 0; i < len; i++)
      check(mem.exists(longint'(addr + i)) && mem[longint'(addr + i)] == p[i],
            $sformatf("byte %0d of a %0d-byte packet", i, len));
    for (int i = len; i < n * 64; i++)
      check(!mem.exists(longint'(addr + i)), "no write past the packet end");
    if (timed) begin
      check(lat == n + 3, $sformatf("latency %0d cycles for %0d beats", lat, n));
      check(lat <= 70, "within the paper's 70-cycle bound");
    end
  endtask

  initial begin
    s_meta = '0; s_meta_valid = 0; s_axis = '0; s_axis_valid = 0;
    m_aw_ready = 1; m_w_ready = 1; m_meta_ready = 1; m_b_valid = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    // no back-pressure: exact cycle count, smallest to largest slot
    run_pkt(60, 32'h0000_0080, 1);
    run_pkt(128, 32'h0000_0100, 1);
    run_pkt(1514, 32'h0004_0000, 1);
    run_pkt(1536, 32'h0004_0600, 1);
    // random lengths with back-pressure
    stall = 1;
    for (int k = 0; k < 60; k++)
      run_pkt($urandom_range(1, 1536), 32'h0004_0000 + 1536 * $urandom_range(0, 169), 0);
    check(aw_seen == 64 && b_seen == 64, "one burst and one response per packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
