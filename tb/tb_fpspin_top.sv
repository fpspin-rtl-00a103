// tb_fpspin_top: end-to-end test of the application block at its default
// size (512 KiB packet buffer, 2048 + 170 slots, 4 rulesets). No parameter of
// the top is changed.
//
// The testbench plays every party the top connects to:
//   host software  programs rulesets and execution contexts over AXI4-Lite,
//                  releases the cluster from reset, polls handler stdout and
//                  the free-slot counters, and transmits its own frames;
//   PsPIN          L2 memory (tb_l2_mem) behind the NIC ports; a scheduler
//                  that takes HERs only while the cluster is out of reset and
//                  runs one handler per HER, concurrently:
//                    context 0 (AND ruleset: IPv4/UDP/port 9330, EOM rule on the
//                    SLMP flag) copies the SLMP payload to host memory at the
//                    context's host address plus the packet's SLMP offset, an
//                    unaligned AXI burst through the host DMA bridge; on the
//                    end-of-message packet it also reads the data back and prints
//                    the message ID to stdout;
//                    context 1 (OR ruleset: ICMP or ports 9330..9331, which
//                    overlaps ruleset 0; ruleset 0 must win) swaps the MAC
//                    addresses in L2 and sends the frame back (ping-pong);
//                  each handler ends with a completion that frees the slot;
//   Corundum       receive frames (with random gaps), takes unmatched frames
//                  on the host path, takes the merged transmit stream, and runs
//                  a descriptor DMA engine with a sparse host memory behind the
//                  bridge's bounce buffer.
// Checks: unmatched frames reach the host unchanged and in order; each HER
// carries the right context fields, message ID, EOM flag, size and a slot of
// the right pool holding exactly the frame; echoed frames leave with swapped
// addresses and host frames leave unchanged; host memory holds every payload
// byte; stdout returns the message IDs in order. A second phase holds the
// handlers back until the 170 large slots are used up, sees the receive path
// stall and the SLOT_FREE register read 0, then lets everything drain.
// Every mechanism is counted and one that never happened is a failure.
// The design's NIC-side clock runs at the same rate as clk, a quarter period
// behind, so every clock-crossing FIFO in the top is exercised.
module tb_fpspin_top;
  import fpspin_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  // The NIC-side clock has the same period but runs a quarter period behind,
  // so the two sides of every clock crossing never switch together. Stimulus is
  // applied on the falling edge of clk, which is stable around both rising edges.
  logic nic_clk = 0;
  initial begin #2.5; forever #5 nic_clk = ~nic_clk; end
  wire nic_rst = rst;

  axis_beat_t s_rx, m_rx_host, s_tx_host, m_tx;
  logic s_rx_valid, s_rx_ready, m_rx_host_valid, m_rx_host_ready;
  logic s_tx_host_valid, s_tx_host_ready, m_tx_valid, m_tx_ready;
  logic [AXIL_ADDR_W-1:0] s_axil_awaddr, s_axil_araddr;
  logic s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready, s_axil_bvalid, s_axil_bready;
  logic s_axil_arvalid, s_axil_arready, s_axil_rvalid, s_axil_rready;
  logic [31:0] s_axil_wdata, s_axil_rdata; logic [3:0] s_axil_wstrb; logic [1:0] s_axil_bresp, s_axil_rresp;
  axi_ax_t m_nic_aw, m_nic_ar; logic m_nic_aw_valid, m_nic_aw_ready, m_nic_ar_valid, m_nic_ar_ready;
  axi_w_t m_nic_w; logic m_nic_w_valid, m_nic_w_ready;
  axi_b_t m_nic_b; logic m_nic_b_valid, m_nic_b_ready;
  axi_r_t m_nic_r; logic m_nic_r_valid, m_nic_r_ready;
  her_t m_her; logic m_her_valid, m_her_ready;
  feedback_t s_feedback; logic s_feedback_valid, s_feedback_ready;
  egress_cmd_t s_egress_cmd; logic s_egress_cmd_valid, s_egress_cmd_ready;
  logic [EG_TAG_W-1:0] m_egress_done_tag; logic m_egress_done_valid;
  axi_ax_t s_host_aw, s_host_ar; logic s_host_aw_valid, s_host_aw_ready, s_host_ar_valid, s_host_ar_ready;
  axi_w_t s_host_w; logic s_host_w_valid, s_host_w_ready;
  axi_b_t s_host_b; logic s_host_b_valid, s_host_b_ready;
  axi_r_t s_host_r; logic s_host_r_valid, s_host_r_ready;
  dma_desc_t m_dma_wr_desc, m_dma_rd_desc;
  logic m_dma_wr_desc_valid, m_dma_wr_desc_ready, m_dma_rd_desc_valid, m_dma_rd_desc_ready;
  dma_status_t s_dma_wr_status, s_dma_rd_status; logic s_dma_wr_status_valid, s_dma_rd_status_valid;
  logic dma_ram_rd_en, dma_ram_wr_en;
  logic [DMA_RAM_WORD_AW-1:0] dma_ram_rd_addr, dma_ram_wr_addr;
  logic [DATA_W-1:0] dma_ram_rd_data, dma_ram_wr_data;
  logic [KEEP_W-1:0] dma_ram_wr_strb;
  logic pspin_rst, pspin_fetch_en;
  logic [31:0] s_stdout_data; logic s_stdout_valid, s_stdout_ready;

  fpspin_top dut (.*);

  tb_l2_mem l2 (.clk, .rst, .aw(m_nic_aw), .aw_valid(m_nic_aw_valid), .aw_ready(m_nic_aw_ready),
    .w(m_nic_w), .w_valid(m_nic_w_valid), .w_ready(m_nic_w_ready), .b(m_nic_b),
    .b_valid(m_nic_b_valid), .b_ready(m_nic_b_ready), .ar(m_nic_ar), .ar_valid(m_nic_ar_valid),
    .ar_ready(m_nic_ar_ready), .r(m_nic_r), .r_valid(m_nic_r_valid), .r_ready(m_nic_r_ready));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  localparam int HALF = PKT_BUF_SIZE / 2;
  localparam int NLARGE = HALF / LARGE_SLOT_B;
  localparam longint HOST_BASE = 64'h1_2340_0000;

  // mechanism counters
  int n_bypass = 0, n_and = 0, n_or = 0, n_eom = 0, n_small = 0, n_large = 0, n_stall = 0;
  int n_echo = 0, n_host_tx = 0, n_contention = 0, n_host_wr = 0, n_unaligned = 0, n_host_rd = 0;
  int n_stdout = 0, n_held_in_reset = 0;

  // ------------------------------------------------------------ frames
  typedef enum int { K_SLMP, K_ICMP, K_UDP9331, K_UDP_OTHER, K_ARP } kind_e;
  typedef struct {
    byte unsigned b[$];
    bit           match;
    int           ctx;
    bit           eom;
    int unsigned  msgid;
  } frame_t;

  int unsigned slmp_seq = 0;
  function automatic frame_t make_frame(kind_e k, int len, bit eom);
    frame_t f;
    int unsigned off;
    for (int i = 0; i < len; i++) f.b.push_back(8'($urandom));
    f.b[6] = 8'h02;                                    // source MAC, never the host marker
    f.b[12] = 8'h08; f.b[13] = (k == K_ARP) ? 8'h06 : 8'h00;
    f.b[14] = 8'h45;
    f.b[23] = (k == K_ICMP) ? 8'd1 : (k == K_ARP) ? 8'd99 : 8'd17;
    if (k == K_SLMP)      begin f.b[36] = 8'h24; f.b[37] = 8'h72; end   // 9330
    if (k == K_UDP9331)   begin f.b[36] = 8'h24; f.b[37] = 8'h73; end   // 9331
    if (k == K_UDP_OTHER) begin f.b[36] = 8'h13; f.b[37] = 8'h88; end
    if (k == K_ARP)       begin f.b[36] = 8'h13; f.b[37] = 8'h89; end
    f.b[43] = (f.b[43] & 8'hfb) | (eom ? 8'h04 : 8'h00);
    // SLMP offset: a fresh 2 KiB window per packet, unaligned inside it
    off = slmp_seq * 2048 + $urandom_range(0, 500);
    if (k == K_SLMP) slmp_seq++;
    {f.b[48], f.b[49], f.b[50], f.b[51]} = off;
    f.match = (k == K_SLMP) || (k == K_ICMP) || (k == K_UDP9331);
    f.ctx   = (k == K_SLMP) ? 0 : 1;
    f.eom   = (k == K_SLMP) && eom;
    f.msgid = {f.b[44], f.b[45], f.b[46], f.b[47]};
    return f;
  endfunction

  // ------------------------------------------------------------ AXI-Lite
  task automatic axil_wr(input int a, input logic [31:0] d);
    s_axil_awaddr = 16'(a); s_axil_wdata = d; s_axil_wstrb = 4'hf;
    s_axil_awvalid = 1; s_axil_wvalid = 1; s_axil_bready = 1;
    #1; while (!s_axil_awready) begin @(negedge clk); #1; end
    @(negedge clk); s_axil_awvalid = 0; s_axil_wvalid = 0;
    while (!s_axil_bvalid) @(negedge clk);
    @(negedge clk); s_axil_bready = 0;
  endtask
  task automatic axil_rd(input int a, output logic [31:0] d);
    s_axil_araddr = 16'(a); s_axil_arvalid = 1; s_axil_rready = 1;
    #1; while (!s_axil_arready) begin @(negedge clk); #1; end
    @(negedge clk); s_axil_arvalid = 0;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    @(negedge clk); s_axil_rready = 0;
  endtask
  task automatic set_rule(int s, int r, int idx, logic [31:0] mask, logic [31:0] lo, logic [31:0] hi);
    int b = 32'h0110 + 32'h80 * s + 32'h10 * r;
    axil_wr(b, idx); axil_wr(b + 4, mask); axil_wr(b + 8, lo); axil_wr(b + 12, hi);
  endtask

  // ------------------------------------------------------------ receive
  frame_t exp_her[$], exp_bypass[$];
  int sent = 0;
  task automatic send(frame_t f);
    int n = f.b.size(), nb = (n + 63) / 64;
    if (f.match) exp_her.push_back(f); else exp_bypass.push_back(f);
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

  byte unsigned bbuf[$];
  always @(posedge clk) if (!rst && m_rx_host_valid && m_rx_host_ready) begin
    for (int i = 0; i < 64; i++) if (m_rx_host.keep[i]) bbuf.push_back(m_rx_host.data[8*i +: 8]);
    if (m_rx_host.last) begin
      if (exp_bypass.size() == 0) check(0, "unexpected frame on the host receive path");
      else begin
        automatic frame_t f = exp_bypass.pop_front();
        check(bbuf == f.b, "bypassed frame unchanged");
      end
      bbuf.delete(); n_bypass++;
    end
  end

  // ------------------------------------------------------------ transmit
  byte unsigned exp_tx_host[$][$], exp_tx_echo[$][$], tbuf[$];
  task automatic host_tx(int len);
    byte unsigned b[$];
    int nb = (len + 63) / 64;
    for (int i = 0; i < len; i++) b.push_back(8'($urandom));
    b[0] = 8'hEE;                                      // marks a host frame
    exp_tx_host.push_back(b);
    for (int bt = 0; bt < nb; bt++) begin
      s_tx_host = '0;
      for (int i = 0; i < 64; i++)
        if (64 * bt + i < len) begin s_tx_host.data[8*i +: 8] = b[64 * bt + i]; s_tx_host.keep[i] = 1; end
      s_tx_host.last = (bt == nb - 1);
      s_tx_host_valid = 1;
      #1; while (!s_tx_host_ready) begin @(negedge clk); #1; end
      @(negedge clk); s_tx_host_valid = 0;
    end
  endtask

  always @(posedge clk) if (!rst && m_tx_valid && m_tx_ready) begin
    for (int i = 0; i < 64; i++) if (m_tx.keep[i]) tbuf.push_back(m_tx.data[8*i +: 8]);
    if (m_tx.last) begin
      if (tbuf[0] == 8'hEE) begin
        if (exp_tx_host.size() == 0) check(0, "unexpected host frame on transmit");
        else check(tbuf == exp_tx_host.pop_front(), "host frame transmitted unchanged");
        n_host_tx++;
      end else begin
        if (exp_tx_echo.size() == 0) check(0, "unexpected echo frame on transmit");
        else check(tbuf == exp_tx_echo.pop_front(), "echoed frame transmitted");
        n_echo++;
      end
      tbuf.delete();
    end
  end
  always @(posedge clk) if (!rst && dut.u_egress.u_arb.s0_valid && dut.u_egress.u_arb.s1_valid) n_contention++;
  always @(negedge clk) m_tx_ready <= $urandom_range(4) != 0;
  always @(negedge clk) m_rx_host_ready <= $urandom_range(3) != 0;

  // ------------------------------------------- Corundum DMA engine + host memory
  byte unsigned host[longint];
  function automatic byte unsigned hbyte(longint a);
    return host.exists(a) ? host[a] : 8'(a ^ (a >> 8) ^ 8'h5a);
  endfunction
  initial begin
    m_dma_wr_desc_ready = 0; m_dma_rd_desc_ready = 0; s_dma_wr_status = '0; s_dma_rd_status = '0;
    s_dma_wr_status_valid = 0; s_dma_rd_status_valid = 0;
    dma_ram_rd_en = 0; dma_ram_wr_en = 0; dma_ram_rd_addr = '0; dma_ram_wr_addr = '0;
    dma_ram_wr_data = '0; dma_ram_wr_strb = '0;
    forever begin
      @(negedge clk);
      m_dma_wr_desc_ready = 1; m_dma_rd_desc_ready = 1;
      #1;
      if (m_dma_wr_desc_valid) begin
        automatic dma_desc_t d = m_dma_wr_desc;
        @(negedge clk); m_dma_wr_desc_ready = 0; m_dma_rd_desc_ready = 0;
        repeat ($urandom_range(0, 10)) @(negedge clk);
        for (int i = 0; i < int'(d.len); i++) begin
          automatic int r = int'(d.ram_addr) + i;
          dma_ram_rd_en = 1; dma_ram_rd_addr = DMA_RAM_WORD_AW'(r / 64);
          @(negedge clk);
          dma_ram_rd_en = 0;
          host[longint'(d.dma_addr) + i] = dma_ram_rd_data[8 * (r % 64) +: 8];
        end
        s_dma_wr_status.tag = d.tag; s_dma_wr_status_valid = 1;
        @(negedge clk); s_dma_wr_status_valid = 0;
      end else if (m_dma_rd_desc_valid) begin
        automatic dma_desc_t d = m_dma_rd_desc;
        @(negedge clk); m_dma_wr_desc_ready = 0; m_dma_rd_desc_ready = 0;
        repeat ($urandom_range(0, 10)) @(negedge clk);
        for (int i = 0; i < int'(d.len); i++) begin
          automatic int r = int'(d.ram_addr) + i;
          dma_ram_wr_en = 1; dma_ram_wr_addr = DMA_RAM_WORD_AW'(r / 64);
          dma_ram_wr_strb = '0; dma_ram_wr_strb[r % 64] = 1'b1;
          dma_ram_wr_data = '0; dma_ram_wr_data[8 * (r % 64) +: 8] = hbyte(longint'(d.dma_addr) + i);
          @(negedge clk);
          dma_ram_wr_en = 0;
        end
        s_dma_rd_status.tag = d.tag; s_dma_rd_status_valid = 1;
        @(negedge clk); s_dma_rd_status_valid = 0;
      end else begin
        m_dma_wr_desc_ready = 0; m_dma_rd_desc_ready = 0;
      end
    end
  end

  // ------------------------------------------------------------ PsPIN model
  semaphore sem_host = new(1), sem_eg = new(1), sem_fb = new(1), sem_out = new(1);
  bit hold = 0;
  int busy = 0;
  her_ctx_t prog_ctx[NUM_RULESETS];
  bit in_use[int unsigned];
  int unsigned exp_stdout[$];
  bit [255:0] done_seen;
  logic [EG_TAG_W-1:0] next_tag = '0;

  always @(posedge clk) if (m_egress_done_valid) done_seen[m_egress_done_tag] = 1'b1;

  // unaligned AXI write of bytes d to host address a, one burst inside a 4 KiB page
  task automatic host_write(longint a, byte unsigned d[$]);
    int off = int'(a & 63), len = d.size(), nb = (int'(a & 63) + d.size() + 63) / 64;
    sem_host.get(1);
    s_host_aw = '0; s_host_aw.addr = a; s_host_aw.len = 8'(nb - 1); s_host_aw.size = 3'd6;
    s_host_aw.burst = BURST_INCR; s_host_aw_valid = 1;
    #1; while (!s_host_aw_ready) begin @(negedge clk); #1; end
    @(negedge clk); s_host_aw_valid = 0;
    for (int bt = 0; bt < nb; bt++) begin
      s_host_w = '0;
      for (int i = 0; i < 64; i++) begin
        automatic int k = 64 * bt + i - off;
        if (k >= 0 && k < len) begin s_host_w.strb[i] = 1; s_host_w.data[8*i +: 8] = d[k]; end
      end
      s_host_w.last = (bt == nb - 1);
      s_host_w_valid = 1;
      #1; while (!s_host_w_ready) begin @(negedge clk); #1; end
      @(negedge clk); s_host_w_valid = 0;
    end
    s_host_b_ready = 1;
    #1; while (!s_host_b_valid) begin @(negedge clk); #1; end
    check(s_host_b.resp == RESP_OKAY, "host write response");
    @(negedge clk); s_host_b_ready = 0;
    n_host_wr++;
    if (off != 0 || (len % 64) != 0) n_unaligned++;
    for (int i = 0; i < len; i++)
      if (hbyte(a + i) != d[i]) begin check(0, $sformatf("host byte %0d at %h", i, a)); break; end
    checks++;
    sem_host.put(1);
  endtask

  task automatic host_read_check(longint a);
    longint base = a & ~64'h3f;
    sem_host.get(1);
    s_host_ar = '0; s_host_ar.addr = base; s_host_ar.len = 8'd1; s_host_ar.size = 3'd6;
    s_host_ar.burst = BURST_INCR; s_host_ar_valid = 1;
    #1; while (!s_host_ar_ready) begin @(negedge clk); #1; end
    @(negedge clk); s_host_ar_valid = 0;
    s_host_r_ready = 1;
    for (int bt = 0; bt < 2; bt++) begin
      #1; while (!s_host_r_valid) begin @(negedge clk); #1; end
      for (int i = 0; i < 64; i++)
        if (s_host_r.data[8*i +: 8] != hbyte(base + 64 * bt + i)) begin
          check(0, $sformatf("host read byte %0d at %h", i, base)); break;
        end
      check(s_host_r.last == (bt == 1), "host read RLAST");
      @(negedge clk);
    end
    s_host_r_ready = 0;
    n_host_rd++;
    sem_host.put(1);
  endtask

  task automatic handler(her_t h, frame_t f);
    int unsigned a = h.pkt_addr;
    busy++;
    while (hold) @(negedge clk);
    repeat ($urandom_range(1, 40)) @(negedge clk);
    if (f.ctx == 0) begin
      byte unsigned pl[$];
      int unsigned off;
      for (int i = 52; i < int'(h.pkt_size); i++) pl.push_back(l2.peek(longint'(a) + i));
      off = {l2.peek(a + 48), l2.peek(a + 49), l2.peek(a + 50), l2.peek(a + 51)};
      if (pl.size() > 0) host_write(longint'(h.ctx.host_mem_addr) + longint'(off), pl);
      if (h.eom) begin
        host_read_check(longint'(h.ctx.host_mem_addr) + longint'(off));
        sem_out.get(1);
        s_stdout_data = h.msgid; s_stdout_valid = 1;
        exp_stdout.push_back(h.msgid);
        #1; while (!s_stdout_ready) begin @(negedge clk); #1; end
        @(negedge clk); s_stdout_valid = 0;
        sem_out.put(1);
      end
    end else begin
      byte unsigned e[$];
      logic [EG_TAG_W-1:0] tag;
      for (int i = 0; i < 6; i++) begin
        automatic byte unsigned t = l2.peek(a + i);
        l2.poke(a + i, l2.peek(a + 6 + i));
        l2.poke(a + 6 + i, t);
      end
      for (int i = 0; i < int'(h.pkt_size); i++) e.push_back(l2.peek(longint'(a) + i));
      sem_eg.get(1);
      tag = next_tag; next_tag++;
      done_seen[tag] = 1'b0;
      exp_tx_echo.push_back(e);
      s_egress_cmd.addr = a; s_egress_cmd.len = h.pkt_size; s_egress_cmd.tag = tag;
      s_egress_cmd_valid = 1;
      #1; while (!s_egress_cmd_ready) begin @(negedge clk); #1; end
      @(negedge clk); s_egress_cmd_valid = 0;
      while (!done_seen[tag]) @(negedge clk);
      sem_eg.put(1);
    end
    sem_fb.get(1);
    s_feedback.pkt_addr = a; s_feedback.pkt_size = h.pkt_size; s_feedback.msgid = h.msgid;
    in_use.delete(a);
    s_feedback_valid = 1;
    #1; while (!s_feedback_ready) begin @(negedge clk); #1; end
    @(negedge clk); s_feedback_valid = 0;
    sem_fb.put(1);
    busy--;
  endtask

  // scheduler: takes HERs only while the cluster runs
  always @(negedge clk) m_her_ready <= !pspin_rst && pspin_fetch_en && ($urandom_range(3) != 0);
  always @(posedge clk) if (!rst && pspin_rst && m_her_valid) n_held_in_reset++;
  always @(posedge clk) if (!rst && m_her_valid && m_her_ready) begin
    automatic her_t h = m_her;
    automatic frame_t f;
    if (exp_her.size() == 0) check(0, "unexpected HER");
    else begin
      f = exp_her.pop_front();
      check(int'(h.pkt_size) == f.b.size(), "HER size");
      check(h.msgid == f.msgid && h.eom == f.eom, "HER message ID and EOM");
      check(h.ctx == prog_ctx[f.ctx], "HER context fields");
      for (int i = 0; i < f.b.size(); i++)
        if (l2.peek(longint'(h.pkt_addr) + i) != f.b[i]) begin check(0, "L2 holds the frame"); break; end
      checks++;
      if (f.b.size() <= SMALL_SLOT_B) begin
        n_small++; check(h.pkt_addr < HALF, "small slot in lower half");
      end else begin
        n_large++; check(h.pkt_addr >= HALF, "large slot in upper half");
      end
      check(!in_use.exists(h.pkt_addr), "slot handed out twice");
      in_use[h.pkt_addr] = 1;
      if (f.ctx == 0) n_and++; else n_or++;
      if (f.eom) n_eom++;
      fork handler(h, f); join_none
    end
  end

  // ------------------------------------------------------------ watchdog
  initial begin
    #100000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drain();
    int t = 0;
    while ((exp_her.size() > 0 || exp_bypass.size() > 0 || busy > 0 || exp_tx_echo.size() > 0 ||
            exp_tx_host.size() > 0) && t < 400000) begin
      @(negedge clk); t++;
    end
    check(t < 400000, "all traffic drained");
  endtask

  initial begin
    logic [31:0] v;
    s_rx = '0; s_rx_valid = 0; s_tx_host = '0; s_tx_host_valid = 0;
    s_axil_awaddr = '0; s_axil_araddr = '0; s_axil_wdata = '0; s_axil_wstrb = '0;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    s_feedback = '0; s_feedback_valid = 0; s_egress_cmd = '0; s_egress_cmd_valid = 0;
    s_host_aw = '0; s_host_aw_valid = 0; s_host_w = '0; s_host_w_valid = 0; s_host_b_ready = 0;
    s_host_ar = '0; s_host_ar_valid = 0; s_host_r_ready = 0;
    s_stdout_data = '0; s_stdout_valid = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (2) @(negedge clk);

    // after reset: cluster held, nothing matches, so traffic goes to the host
    axil_rd(16'h0000, v); check(v == 32'h2 && pspin_rst && !pspin_fetch_en, "cluster held in reset");
    axil_rd(16'h000C, v); check(v == {16'(NLARGE), 16'd2048}, "free slots after reset");
    for (int p = 0; p < 5; p++) begin
      automatic frame_t f = make_frame(K_SLMP, $urandom_range(60, 300), 0);
      f.match = 0;                                                 // no rule loaded yet
      send(f);
    end

    // program contexts 0 and 1, then the rulesets
    for (int c = 0; c < 2; c++) begin
      prog_ctx[c] = {$urandom, $urandom, HOST_BASE + 64'(c) * 64'h1000_0000, $urandom, $urandom,
                     $urandom, $urandom, $urandom, $urandom, $urandom};
      axil_wr(32'h0400 + 32'h40 * c + 32'h00, prog_ctx[c].handler_mem_addr);
      axil_wr(32'h0400 + 32'h40 * c + 32'h04, prog_ctx[c].handler_mem_size);
      axil_wr(32'h0400 + 32'h40 * c + 32'h08, prog_ctx[c].host_mem_addr[31:0]);
      axil_wr(32'h0400 + 32'h40 * c + 32'h0C, prog_ctx[c].host_mem_addr[63:32]);
      axil_wr(32'h0400 + 32'h40 * c + 32'h10, prog_ctx[c].host_mem_size);
      axil_wr(32'h0400 + 32'h40 * c + 32'h14, prog_ctx[c].hh_addr);
      axil_wr(32'h0400 + 32'h40 * c + 32'h18, prog_ctx[c].hh_size);
      axil_wr(32'h0400 + 32'h40 * c + 32'h1C, prog_ctx[c].ph_addr);
      axil_wr(32'h0400 + 32'h40 * c + 32'h20, prog_ctx[c].ph_size);
      axil_wr(32'h0400 + 32'h40 * c + 32'h24, prog_ctx[c].th_addr);
      axil_wr(32'h0400 + 32'h40 * c + 32'h28, prog_ctx[c].th_size);
    end
    prog_ctx[2] = '0; prog_ctx[3] = '0;
    set_rule(0, 0, 3, 32'hffff0000, 32'h08000000, 32'h08000000);   // IPv4
    set_rule(0, 1, 5, 32'h000000ff, 32'd17, 32'd17);               // UDP
    set_rule(0, 2, 9, 32'hffff0000, 32'd9330 << 16, 32'd9330 << 16);
    set_rule(0, 3, 10, 32'h00000004, 32'd4, 32'd4);                // SLMP EOM flag
    axil_wr(32'h0180, 1);                                          // ruleset 1: OR
    set_rule(1, 0, 5, 32'h000000ff, 32'd1, 32'd1);                 // ICMP
    set_rule(1, 1, 9, 32'hffff0000, 32'd9330 << 16, 32'd9331 << 16);  // overlaps ruleset 0, which wins
    // rule 2 and 3 of ruleset 1 keep their never-match reset value

    // matched frames wait for the cluster to start
    for (int p = 0; p < 3; p++) send(make_frame(K_ICMP, $urandom_range(60, 200), 0));
    repeat (200) @(negedge clk);
    axil_wr(16'h0000, 32'h1);                                      // fetch enable, out of reset
    check(!pspin_rst && pspin_fetch_en, "cluster running");

    // phase 1: mixed traffic both ways
    fork
      for (int p = 0; p < 500; p++) begin
        automatic kind_e k = kind_e'($urandom_range(0, 4));
        automatic int len = ($urandom_range(1) == 0) ? $urandom_range(60, 128) : $urandom_range(60, 1536);
        send(make_frame(k, len, $urandom_range(3) == 0));
      end
      for (int p = 0; p < 80; p++) begin
        repeat ($urandom_range(0, 300)) @(negedge clk);
        host_tx($urandom_range(60, 1536));
      end
    join
    drain();

    // handler stdout, in order
    axil_rd(16'h0008, v); check(int'(v) == exp_stdout.size(), "stdout count");
    while (exp_stdout.size() > 0) begin
      axil_rd(16'h0004, v); check(v == exp_stdout.pop_front(), "stdout word"); n_stdout++;
    end
    axil_rd(16'h0008, v); check(v == 0, "stdout empty");

    // phase 2: handlers held, large slots run out
    hold = 1;
    fork
      for (int p = 0; p < NLARGE + 10; p++) send(make_frame(K_SLMP, $urandom_range(129, 1536), 0));
    join_none
    repeat (40000) @(negedge clk);
    axil_rd(16'h000C, v); check(v[31:16] == 0, "SLOT_FREE shows no large slot left");
    check(busy == NLARGE, $sformatf("HERs issued while held: %0d", busy));
    if (s_rx_valid && !s_rx_ready && v[31:16] == 0) n_stall++;
    hold = 0;
    wait (sent == 5 + 3 + 500 + NLARGE + 10);
    drain();
    repeat (50) @(negedge clk);
    axil_rd(16'h000C, v); check(v == {16'(NLARGE), 16'd2048}, "every slot returned");

    $display("bypass=%0d and=%0d or=%0d eom=%0d small=%0d large=%0d stall=%0d echo=%0d host_tx=%0d",
             n_bypass, n_and, n_or, n_eom, n_small, n_large, n_stall, n_echo, n_host_tx);
    $display("contention=%0d host_wr=%0d unaligned=%0d host_rd=%0d stdout=%0d held_in_reset=%0d",
             n_contention, n_host_wr, n_unaligned, n_host_rd, n_stdout, n_held_in_reset);
    check(n_bypass > 0, "mechanism: unmatched frame to host");
    check(n_and > 0, "mechanism: AND ruleset match");
    check(n_or > 0, "mechanism: OR ruleset match");
    check(n_eom > 0, "mechanism: end-of-message rule");
    check(n_small > 0, "mechanism: small slot");
    check(n_large > 0, "mechanism: large slot");
    check(n_stall > 0, "mechanism: allocator stall");
    check(n_echo > 0, "mechanism: egress send");
    check(n_host_tx > 0, "mechanism: host transmit");
    check(n_contention > 0, "mechanism: transmit arbitration");
    check(n_unaligned > 0, "mechanism: unaligned host write");
    check(n_host_rd > 0, "mechanism: host read");
    check(n_stdout > 0, "mechanism: stdout");
    check(n_held_in_reset > 0, "mechanism: HER held while cluster in reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
