// tb_pspin_pkt_match: self-checking test of the packet matching engine.
//
// Two rulesets are loaded: ruleset 0 is the ICMP echo-request example (AND of
// "IPv4", "IP protocol 1" and "byte 34 == 8", no end-of-message rule), ruleset
// 1 is an OR ruleset that takes every UDP packet (third rule) and marks it as
// end of message when bit 1 of the SLMP flags is set. Random Ethernet frames
// (ICMP request/reply, UDP with and without that flag, ARP) of random length
// are sent with random gaps and random back-pressure on both outputs. A
// reference decision is computed from the frame's fields in the testbench,
// not from the rules, and every frame must come out whole on the right output
// with the right context, end-of-message flag, message ID and length. The
// four-cycle latency is checked on an idle pipeline.
module tb_pspin_pkt_match;
  import fpspin_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  ruleset_t [NUM_RULESETS-1:0] cfg_ruleset;
  axis_beat_t s_axis, m_pspin, m_host;
  logic s_valid, s_ready, m_pspin_valid, m_pspin_ready, m_host_valid, m_host_ready;
  pkt_meta_t m_meta;
  logic m_meta_valid, m_meta_ready;

  pspin_pkt_match dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  typedef byte unsigned bytes_t[$];
  typedef struct { bytes_t b; bit match; int ctx; bit eom; logic [31:0] msgid; } exp_t;
  exp_t exp_pspin[$], exp_host[$];

  function automatic match_rule_t rule(int idx, logic [31:0] mask, logic [31:0] s, logic [31:0] e);
    match_rule_t r; r.idx = 4'(idx); r.mask = mask; r.start = s; r.stop = e; return r;
  endfunction
  localparam match_rule_t RULE_FALSE = '{idx: 0, mask: 0, start: 1, stop: 0};

  // kind: 0 ICMP request, 1 ICMP reply, 2 UDP, 3 UDP+EOM flag, 4 ARP
  function automatic bytes_t make_pkt(int kind, int len);
    bytes_t p;
    for (int i = 0; i < len; i++) p.push_back(8'($urandom));
    p[12] = 8'h08; p[13] = (kind == 4) ? 8'h06 : 8'h00;
    if (kind != 4) begin
      p[14] = 8'h45;
      p[23] = (kind <= 1) ? 8'd1 : 8'd17;
      if (kind <= 1) p[34] = (kind == 0) ? 8'd8 : 8'd0;
      else begin
        p[42] = 8'h00;
        p[43] = (kind == 3) ? 8'h02 : 8'h00;
      end
    end
    return p;
  endfunction

  // Inputs change at the falling clock edge, so the design samples stable
  // values at the rising edge; ready is stable at the falling edge too.
  task automatic send(bytes_t p);
    automatic int n = p.size();
    for (int o = 0; o < n; o += 64) begin
      s_axis = '0;
      for (int i = 0; i < 64; i++)
        if (o + i < n) begin
          s_axis.data[8*i +: 8] = p[o+i];
          s_axis.keep[i] = 1'b1;
        end
      s_axis.last = (o + 64 >= n);
      s_valid = 1'b1;
      #1;  // let combinational ready settle
      while (!s_ready) @(negedge clk);
      @(negedge clk);
      s_valid = 1'b0;
      if ($urandom_range(3) == 0) repeat ($urandom_range(3)) @(negedge clk);
    end
  endtask

  // output monitors
  bytes_t cur_p, cur_h;
  int got_pspin = 0, got_host = 0;
  always @(posedge clk) if (!rst) begin
    if (m_pspin_valid && m_pspin_ready) begin
      for (int i = 0; i < 64; i++) if (m_pspin.keep[i]) cur_p.push_back(m_pspin.data[8*i +: 8]);
      check(m_pspin.last == m_meta_valid, "meta issued exactly with the last beat");
      if (m_pspin.last) begin
        automatic exp_t e;
        check(exp_pspin.size() > 0, "unexpected packet on PsPIN output");
        if (exp_pspin.size() > 0) begin
          e = exp_pspin.pop_front();
          check(cur_p == e.b, "PsPIN packet data");
          check(int'(m_meta.ctx) == e.ctx, $sformatf("ctx %0d exp %0d", m_meta.ctx, e.ctx));
          check(m_meta.eom == e.eom, "eom flag");
          check(m_meta.msgid == e.msgid, "message id");
          check(int'(m_meta.len) == e.b.size(), $sformatf("len %0d exp %0d", m_meta.len, e.b.size()));
        end
        cur_p = {};
        got_pspin++;
      end
    end
    if (m_host_valid && m_host_ready) begin
      for (int i = 0; i < 64; i++) if (m_host.keep[i]) cur_h.push_back(m_host.data[8*i +: 8]);
      if (m_host.last) begin
        automatic exp_t e;
        check(exp_host.size() > 0, "unexpected packet on host output");
        if (exp_host.size() > 0) begin
          e = exp_host.pop_front();
          check(cur_h == e.b, "host packet data");
        end
        cur_h = {};
        got_host++;
      end
    end
    m_pspin_ready <= ($urandom_range(4) != 0);
    m_host_ready  <= ($urandom_range(4) != 0);
    m_meta_ready  <= ($urandom_range(5) != 0);
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int npkts, sent, lat;
    npkts = 200; sent = 0;
    s_valid = 0; s_axis = '0;
    m_pspin_ready = 1; m_host_ready = 1; m_meta_ready = 1;
    for (int s = 0; s < NUM_RULESETS; s++) begin
      cfg_ruleset[s].mode = MODE_AND;
      for (int r = 0; r < RULES_PER_SET; r++) cfg_ruleset[s].rule[r] = RULE_FALSE;
    end
    cfg_ruleset[0].mode = MODE_AND;
    cfg_ruleset[0].rule[0] = rule(3, 32'hffff0000, 32'h08000000, 32'h08000000);  // IPv4 ethertype
    cfg_ruleset[0].rule[1] = rule(5, 32'h000000ff, 32'd1, 32'd1);                 // IP protocol 1
    cfg_ruleset[0].rule[2] = rule(8, 32'h0000ff00, 32'h0800, 32'h0800);           // byte 34 == 8
    cfg_ruleset[1].mode = MODE_OR;
    cfg_ruleset[1].rule[2] = rule(5, 32'h000000ff, 32'd17, 32'd17);               // UDP
    cfg_ruleset[1].rule[3] = rule(10, 32'h00000002, 32'd2, 32'd2);                // EOM flag
    repeat (5) @(posedge clk);
    rst = 0;
    @(negedge clk);

    // latency on an idle pipeline: one-beat ARP frame to the host output
    begin
      automatic bytes_t p = make_pkt(4, 60);
      automatic exp_t e; e.b = p; exp_host.push_back(e);
      fork
        send(p);
        begin
          lat = 0;         // accepted at the next rising edge
          while (!m_host_valid) begin @(negedge clk); lat++; end
        end
      join
      // four register stages: the beat is at the output after the fourth edge
      check(lat == 4, $sformatf("latency %0d cycles", lat));
    end

    for (int k = 0; k < npkts; k++) begin
      automatic int kind = $urandom_range(4);
      automatic int len  = (k % 3 == 0) ? $urandom_range(60, 128) : $urandom_range(60, 1514);
      automatic bytes_t p = make_pkt(kind, len);
      automatic exp_t e;
      e.b = p;
      e.match = (kind == 0) || (kind == 2) || (kind == 3);
      e.ctx   = (kind == 0) ? 0 : 1;
      e.eom   = (kind == 3);
      e.msgid = {p[44], p[45], p[46], p[47]};
      if (e.match) exp_pspin.push_back(e); else exp_host.push_back(e);
      send(p);
      sent++;
    end
    repeat (200) @(posedge clk);
    check(exp_pspin.size() == 0 && exp_host.size() == 0, "all packets delivered");
    check(got_pspin > 20 && got_host > 20, "both outputs exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
