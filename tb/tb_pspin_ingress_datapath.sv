// tb_pspin_ingress_datapath: self-checking test of the whole ingress path
// (match -> FIFOs -> allocator -> ingress DMA -> HER generator) at its default
// size (512 KiB packet buffer, 2048 small and 170 large slots).
//
// Stimulus: a random mix of Ethernet frames, 60 to 1536 bytes, driven with
// random gaps: SLMP-over-UDP to port 9330 (some with the end-of-message flag),
// ICMP, UDP to port 9331, UDP to other ports and ARP. Ruleset 0 (AND mode)
// takes IPv4 + UDP + port 9330 with rule 3 on the SLMP EOM flag; ruleset 1 (OR
// mode) takes ICMP or ports 9330..9331, so SLMP frames match both rulesets and
// the lower-numbered one must win; rulesets 2 and 3 never match. The
// testbench knows from how it built each frame where it must go.
//
// The PsPIN side is modelled: tb_l2_mem stores what the DMA writes; a
// scheduler model takes HERs with random back-pressure, checks every field
// (context fields, message ID, EOM, size) and that L2 holds exactly the frame
// at the HER's address, that small frames (<= 128 B) land in the lower half of
// the buffer and large ones in the upper half, and that no address is handed
// out twice while in use; it then returns the slot in random order after a
// random delay. Unmatched frames must come out of the host port unchanged and
// in order. A phase with completions held back sends 200 large frames: exactly
// 170 HERs must appear, the input must stall with no large slot left, and
// everything must drain once completions resume.
module tb_pspin_ingress_datapath;
  import fpspin_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  ruleset_t [NUM_RULESETS-1:0] cfg_ruleset;
  her_ctx_t [NUM_RULESETS-1:0] cfg_ctx;
  axis_beat_t s_rx, m_rx_host;
  logic s_rx_valid, s_rx_ready, m_rx_host_valid, m_rx_host_ready;
  axi_ax_t m_aw, m_ar; logic m_aw_valid, m_aw_ready, m_ar_valid, m_ar_ready;
  axi_w_t m_w; logic m_w_valid, m_w_ready;
  axi_b_t m_b; logic m_b_valid, m_b_ready;
  axi_r_t m_r; logic m_r_valid, m_r_ready;
  her_t m_her; logic m_her_valid, m_her_ready;
  feedback_t s_feedback; logic s_feedback_valid, s_feedback_ready;
  logic [15:0] small_free, large_free;

  pspin_ingress_datapath dut (.*);

  tb_l2_mem l2 (.clk, .rst, .aw(m_aw), .aw_valid(m_aw_valid), .aw_ready(m_aw_ready),
    .w(m_w), .w_valid(m_w_valid), .w_ready(m_w_ready), .b(m_b), .b_valid(m_b_valid),
    .b_ready(m_b_ready), .ar(m_ar), .ar_valid(m_ar_valid), .ar_ready(m_ar_ready),
    .r(m_r), .r_valid(m_r_valid), .r_ready(m_r_ready));
  assign m_ar = '0;
  assign m_ar_valid = 1'b0;
  assign m_r_ready = 1'b0;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  localparam int HALF = PKT_BUF_SIZE / 2;
  localparam int NLARGE = HALF / LARGE_SLOT_B;   // 170

  // ------------------------------------------------------------ frames
  typedef enum int { K_SLMP, K_ICMP, K_UDP9331, K_UDP_OTHER, K_ARP } kind_e;
  typedef struct {
    byte unsigned b[$];
    bit           match;
    int           ctx;
    bit           eom;
    int unsigned  msgid;
  } frame_t;

  function automatic frame_t make_frame(kind_e k, int len, bit eom);
    frame_t f;
    for (int i = 0; i < len; i++) f.b.push_back(8'($urandom));
    f.b[12] = 8'h08; f.b[13] = (k == K_ARP) ? 8'h06 : 8'h00;
    f.b[14] = 8'h45;
    f.b[23] = (k == K_ICMP) ? 8'd1 : (k == K_ARP) ? 8'd99 : 8'd17;
    if (k == K_SLMP)      begin f.b[36] = 8'h24; f.b[37] = 8'h72; end   // 9330
    if (k == K_UDP9331)   begin f.b[36] = 8'h24; f.b[37] = 8'h73; end   // 9331
    if (k == K_UDP_OTHER) begin f.b[36] = 8'h13; f.b[37] = 8'h88; end   // 5000
    if (k == K_ARP)       begin f.b[36] = 8'h13; f.b[37] = 8'h89; end
    f.b[43] = (f.b[43] & 8'hfb) | (eom ? 8'h04 : 8'h00);                // SLMP EOM flag
    f.match = (k == K_SLMP) || (k == K_ICMP) || (k == K_UDP9331);
    f.ctx   = (k == K_SLMP) ? 0 : 1;
    f.eom   = (k == K_SLMP) && eom;
    f.msgid = {f.b[44], f.b[45], f.b[46], f.b[47]};
    return f;
  endfunction

  function automatic match_rule_t rule(int idx, logic [31:0] mask, logic [31:0] lo, logic [31:0] hi);
    match_rule_t r;
    r.idx = RULE_IDX_W'(idx); r.mask = mask; r.start = lo; r.stop = hi;
    return r;
  endfunction
  localparam match_rule_t NEVER = '{idx: '0, mask: '0, start: 32'd1, stop: 32'd0};

  // ----------------------------------------------------------- driver
  frame_t exp_her[$], exp_host[$];
  int sent = 0;
  task automatic send(frame_t f);
    int n = f.b.size(), nb = (n + 63) / 64;
    if (f.match) exp_her.push_back(f); else exp_host.push_back(f);
    for (int bt = 0; bt < nb; bt++) begin
      s_rx = '0;
      for (int i = 0; i < 64; i++)
        if (64 * bt + i < n) begin s_rx.data[8*i +: 8] = f.b[64 * bt + i]; s_rx.keep[i] = 1; end
      s_rx.last = (bt == nb - 1);
      s_rx_valid = 1;
      #1; while (!s_rx_ready) begin @(negedge clk); #1; end
      @(negedge clk); s_rx_valid = 0;
      if ($urandom_range(7) == 0) @(negedge clk);
    end
    sent++;
  endtask

  // ------------------------------------------------------- host monitor
  int host_pkts = 0; byte unsigned hbuf[$];
  always @(posedge clk) if (!rst && m_rx_host_valid && m_rx_host_ready) begin
    for (int i = 0; i < 64; i++) if (m_rx_host.keep[i]) hbuf.push_back(m_rx_host.data[8*i +: 8]);
    if (m_rx_host.last) begin
      if (exp_host.size() == 0) check(0, "unexpected frame to host");
      else begin
        automatic frame_t f = exp_host.pop_front();
        check(hbuf == f.b, $sformatf("host frame contents got %0d exp %0d", hbuf.size(), f.b.size()));
      end
      hbuf.delete(); host_pkts++;
    end
  end

  // ------------------------------------------------------ PsPIN model
  bit hold = 0;
  int hers = 0, eoms = 0, small_slots = 0, large_slots = 0, ctx1 = 0;
  feedback_t pend[$];
  bit in_use[int unsigned];
  always @(posedge clk) if (!rst && m_her_valid && m_her_ready) begin
    automatic frame_t f;
    automatic int unsigned a = m_her.pkt_addr;
    automatic feedback_t fb;
    hers++;
    if (exp_her.size() == 0) check(0, "unexpected HER");
    else begin
      f = exp_her.pop_front();
      check(int'(m_her.pkt_size) == f.b.size(), $sformatf("HER size %0d exp %0d", m_her.pkt_size, f.b.size()));
      check(m_her.msgid == f.msgid, "HER message ID");
      check(m_her.eom == f.eom, "HER end of message");
      check(m_her.ctx == cfg_ctx[f.ctx], "HER context fields");
      for (int i = 0; i < f.b.size(); i++)
        if (l2.peek(longint'(a) + i) != f.b[i]) begin check(0, $sformatf("L2 byte %0d at %h", i, a)); break; end
      checks++;
      if (f.b.size() <= SMALL_SLOT_B) begin
        small_slots++;
        check(a < HALF && a % SMALL_SLOT_B == 0, "small slot in lower half");
      end else begin
        large_slots++;
        check(a >= HALF && (a - HALF) % LARGE_SLOT_B == 0 && a - HALF < NLARGE * LARGE_SLOT_B,
              "large slot in upper half");
      end
      check(!in_use.exists(a), "slot handed out twice");
      in_use[a] = 1;
      if (f.eom) eoms++;
      if (f.ctx == 1) ctx1++;
      fb.pkt_addr = a; fb.pkt_size = m_her.pkt_size; fb.msgid = m_her.msgid;
      pend.push_back(fb);
    end
  end

  always @(negedge clk) m_her_ready <= $urandom_range(3) != 0;
  always @(negedge clk) m_rx_host_ready <= $urandom_range(3) != 0;

  initial begin
    s_feedback = '0; s_feedback_valid = 0;
    forever begin
      @(negedge clk);
      if (!hold && pend.size() > 0 && $urandom_range(1) == 0) begin
        automatic int k = $urandom_range(0, pend.size() - 1);
        s_feedback = pend[k]; pend.delete(k);
        in_use.delete(s_feedback.pkt_addr);
        s_feedback_valid = 1;
        #1; while (!s_feedback_ready) begin @(negedge clk); #1; end
        @(negedge clk); s_feedback_valid = 0;
      end
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drain();
    int t = 0;
    while ((exp_her.size() > 0 || exp_host.size() > 0 || pend.size() > 0) && t < 200000) begin
      @(negedge clk); t++;
    end
    check(exp_her.size() == 0 && exp_host.size() == 0, "every frame delivered");
  endtask

  initial begin
    s_rx = '0; s_rx_valid = 0;
    cfg_ruleset = '0;
    for (int s = 0; s < NUM_RULESETS; s++) begin
      cfg_ruleset[s].mode = MODE_AND;
      for (int r = 0; r < RULES_PER_SET; r++) cfg_ruleset[s].rule[r] = NEVER;
    end
    cfg_ruleset[0].rule[0] = rule(3, 32'hffff0000, 32'h08000000, 32'h08000000);   // IPv4
    cfg_ruleset[0].rule[1] = rule(5, 32'h000000ff, 32'd17, 32'd17);               // UDP
    cfg_ruleset[0].rule[2] = rule(9, 32'hffff0000, 32'd9330 << 16, 32'd9330 << 16);
    cfg_ruleset[0].rule[3] = rule(10, 32'h00000004, 32'd4, 32'd4);                // EOM flag
    cfg_ruleset[1].mode = MODE_OR;
    cfg_ruleset[1].rule[0] = rule(5, 32'h000000ff, 32'd1, 32'd1);                 // ICMP
    cfg_ruleset[1].rule[1] = rule(9, 32'hffff0000, 32'd9330 << 16, 32'd9331 << 16);   // ports 9330..9331: overlaps ruleset 0, which must win
    for (int c = 0; c < NUM_RULESETS; c++)
      cfg_ctx[c] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                    $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (2) @(negedge clk);
    check(small_free == 16'd2048 && large_free == 16'(NLARGE), "pool sizes after reset");

    // phase 1: random mix
    for (int p = 0; p < 600; p++) begin
      automatic kind_e k = kind_e'($urandom_range(0, 4));
      automatic int len = ($urandom_range(1) == 0) ? $urandom_range(60, 128) : $urandom_range(60, 1536);
      send(make_frame(k, len, $urandom_range(3) == 0));
    end
    drain();

    // phase 2: completions held back, run out of large slots
    hold = 1;
    fork
      for (int p = 0; p < 200; p++) send(make_frame(K_SLMP, $urandom_range(129, 1536), 0));
    join_none
    repeat (60000) @(negedge clk);
    check(large_free == 0, "large pool exhausted");
    check(pend.size() == NLARGE, $sformatf("HERs while held: %0d", pend.size()));
    check(s_rx_valid && !s_rx_ready, "input stalled");
    check(sent < 800, "sender stalled by allocator");
    hold = 0;
    wait (sent == 800);
    drain();
    repeat (100) @(negedge clk);
    check(small_free == 16'd2048 && large_free == 16'(NLARGE), "all slots returned");

    check(small_slots > 50 && large_slots > 300 && eoms > 10 && ctx1 > 50 && host_pkts > 100,
          $sformatf("coverage small=%0d large=%0d eom=%0d ctx1=%0d host=%0d",
                    small_slots, large_slots, eoms, ctx1, host_pkts));
    $display("frames=%0d hers=%0d host=%0d small=%0d large=%0d eom=%0d", sent, hers, host_pkts,
             small_slots, large_slots, eoms);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
