// tb_pspin_egress_dma: self-checking test of the egress DMA and its transmit
// arbiter.
//
// A behavioural AXI4 read slave (memory filled with a known byte pattern,
// random AR/R delays) stands in for PsPIN's NIC-outbound port. Random send
// commands (64-byte aligned address, 1..1536 bytes, random tag) run while the
// host transmit input offers its own random packets. On the merged output
// every packet must be whole and in order within its source, packets must not
// interleave, PsPIN packets must hold exactly the memory bytes with the right
// tkeep on the last beat, and each command's tag must come back on the
// completion port after its last beat. The number of times both sources
// competed for the output is counted and must be non-zero.
module tb_pspin_egress_dma;
  import fpspin_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  egress_cmd_t s_cmd; logic s_cmd_valid, s_cmd_ready;
  logic [EG_TAG_W-1:0] m_done_tag; logic m_done_valid;
  axi_ax_t m_ar; logic m_ar_valid, m_ar_ready;
  axi_r_t  m_r;  logic m_r_valid, m_r_ready;
  axis_beat_t s_tx_host, m_tx; logic s_tx_host_valid, s_tx_host_ready, m_tx_valid, m_tx_ready;

  pspin_egress_dma dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic byte unsigned pat(longint a); return 8'((a * 37) ^ (a >> 8)); endfunction

  typedef byte unsigned bytes_t[$];
  bytes_t exp_pspin[$], exp_host[$];
  int exp_tag[$];

  // ------------------------------------------------------------ read slave
  longint ra; int rlen = 0, rbeat = 0, rleft = 0;
  always @(posedge clk) if (!rst) begin
    if (m_ar_valid && m_ar_ready) begin
      ra <= longint'(m_ar.addr); rlen <= int'(m_ar.len) + 1; rbeat <= 0;
      rleft <= int'(m_ar.len) + 1;
      check(m_ar.size == 3'd6 && m_ar.burst == BURST_INCR, "AR size and burst");
    end else if (m_r_valid && m_r_ready) begin
      rbeat <= rbeat + 1; rleft <= rleft - 1;
    end
    m_ar_ready <= $urandom_range(1);
    m_tx_ready <= $urandom_range(4) != 0;
  end
  // R beats offered with random gaps while the burst has beats left
  bit gap;
  always @(posedge clk) gap <= ($urandom_range(3) == 0);
  assign m_r_valid = (rleft > 0) && !gap;
  always_comb begin
    m_r = '0;
    for (int i = 0; i < 64; i++) m_r.data[8*i +: 8] = pat(ra + 64 * rbeat + i);
    m_r.last = (rbeat == rlen - 1);
  end

  // --------------------------------------------------------------- monitor
  bytes_t cur; int cur_src = -1;   // 0 host, 1 PsPIN
  int got = 0, contention = 0, done_seen = 0, beats_out = 0;
  bit pspin_pkt_open = 0;
  always @(posedge clk) if (!rst) begin
    if (s_tx_host_valid && dut.pk_valid && !dut.u_arb.busy) contention++;
    if (m_done_valid) begin
      check(exp_tag.size() > 0 && m_done_tag == EG_TAG_W'(exp_tag[0]), "completion tag");
      check(!pspin_pkt_open, "completion only after the packet left");
      if (exp_tag.size() > 0) void'(exp_tag.pop_front());
      done_seen++;
    end
    if (m_tx_valid && m_tx_ready) begin
      automatic int src = (dut.u_arb.sel) ? 1 : 0;
      if (cur.size() == 0) cur_src = src;
      check(src == cur_src, "packets do not interleave");
      if (src == 1) pspin_pkt_open = !m_tx.last;
      for (int i = 0; i < 64; i++) if (m_tx.keep[i]) cur.push_back(m_tx.data[8*i +: 8]);
      if (!m_tx.last) check(m_tx.keep == '1, "full tkeep before the last beat");
      if (m_tx.last) begin
        if (cur_src == 1) begin
          check(exp_pspin.size() > 0 && cur == exp_pspin[0], "PsPIN packet bytes");
          if (exp_pspin.size() > 0) void'(exp_pspin.pop_front());
        end else begin
          check(exp_host.size() > 0 && cur == exp_host[0], $sformatf("host packet bytes got %0d exp %0d at %0t", cur.size(), exp_host[0].size(), $time));
          if (exp_host.size() > 0) void'(exp_host.pop_front());
        end
        cur = {}; got++;
      end
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_cmd = '0; s_cmd_valid = 0; s_tx_host = '0; s_tx_host_valid = 0;
    m_ar_ready = 0; m_tx_ready = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    fork
      // PsPIN send commands
      for (int k = 0; k < 60; k++) begin
        automatic int len = (k % 4 == 0) ? $urandom_range(1, 64) : $urandom_range(60, 1536);
        automatic int addr = 64 * $urandom_range(0, 8000);
        automatic bytes_t p;
        for (int i = 0; i < len; i++) p.push_back(pat(addr + i));
        exp_pspin.push_back(p);
        s_cmd.addr = addr; s_cmd.len = 16'(len); s_cmd.tag = 8'(k);
        exp_tag.push_back(k);
        s_cmd_valid = 1;
        #1;  // let combinational ready settle
        while (!s_cmd_ready) @(negedge clk);
        @(negedge clk);
        s_cmd_valid = 0;
        repeat ($urandom_range(0, 20)) @(negedge clk);
      end
      // host transmit packets
      for (int k = 0; k < 60; k++) begin
        automatic int len = $urandom_range(60, 1514);
        automatic bytes_t p;
        for (int i = 0; i < len; i++) p.push_back(8'($urandom));
        exp_host.push_back(p);
        for (int o = 0; o < len; o += 64) begin
          s_tx_host = '0;
          for (int i = 0; i < 64; i++) if (o + i < len) begin
            s_tx_host.data[8*i +: 8] = p[o + i]; s_tx_host.keep[i] = 1;
          end
          s_tx_host.last = (o + 64 >= len);
          s_tx_host_valid = 1;
          #1;  // let combinational ready settle
          while (!s_tx_host_ready) @(negedge clk);
          @(negedge clk);
          s_tx_host_valid = 0;
        end
        repeat ($urandom_range(0, 30)) @(negedge clk);
      end
    join
    repeat (500) @(negedge clk);
    check(got == 120 && exp_pspin.size() == 0 && exp_host.size() == 0, "all packets sent");
    check(done_seen == 60, "all commands completed");
    check(contention > 0, $sformatf("arbitration between sources happened (%0d)", contention));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
