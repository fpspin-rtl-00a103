// tb_fpspin_workloads: runs the kinds of traffic the FPsPIN system is
// evaluated with through the application block at its default size, with
// handler behaviour modelled in the testbench:
//   ICMP ping-pong  ruleset 0 is the ICMP echo-request ruleset of the FPsPIN
//                   examples (AND of "is IPv4", "IP protocol 1" and word 8 masked
//                   with 0xff00 equal to 0x0800, i.e. byte 34 = 8; rule 3 never
//                   matches). The handler turns the request into a reply in L2
//                   (swapped MAC and IP addresses, type 0) and sends it. Echo
//                   replies must not match and go to the host.
//   UDP ping-pong   ruleset 1: IPv4, UDP, destination port 9331; the handler
//                   swaps addresses and ports and sends the packet back.
//   SLMP transfer   ruleset 2: IPv4, UDP, port 9330, rule 3 on the EOM flag.
//                   A sender keeps at most W segments of 1000 payload bytes
//                   unacknowledged (W = 4, 16, 512); each handler copies the
//                   payload to host memory at the segment's offset (split at 4 KiB
//                   pages), turns the segment into a 64-byte ACK and sends it,
//                   and prints the message ID on end of message.
// Ping-pong runs one packet at a time over frame sizes 64..1464 bytes and
// records the round-trip time in cycles from the first request beat entering
// to the last reply beat leaving; each reply is checked byte for byte and the
// round-trip must stay within the sum of the path's stage latencies. The SLMP
// runs check the received file in host memory, that a larger window gives a
// shorter transfer, and that the 512-segment window runs out of large slots
// and stalls the receive port without losing data. File sizes (125 KB) and
// handler run times (fixed delays) are scaled-down stand-ins; the host DMA
// engine model moves one 64-byte word per cycle.
// The NIC-side clock runs at the rate of clk, a quarter period behind.
module tb_fpspin_workloads;
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

  tb_l2_mem #(.STALL(0)) l2 (.clk, .rst, .aw(m_nic_aw), .aw_valid(m_nic_aw_valid), .aw_ready(m_nic_aw_ready),
    .w(m_nic_w), .w_valid(m_nic_w_valid), .w_ready(m_nic_w_ready), .b(m_nic_b),
    .b_valid(m_nic_b_valid), .b_ready(m_nic_b_ready), .ar(m_nic_ar), .ar_valid(m_nic_ar_valid),
    .ar_ready(m_nic_ar_ready), .r(m_nic_r), .r_valid(m_nic_r_valid), .r_ready(m_nic_r_ready));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

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
        // one 64-byte buffer word per cycle
        for (int wi = int'(d.ram_addr) / 64; wi <= (int'(d.ram_addr) + int'(d.len) - 1) / 64; wi++) begin
          dma_ram_rd_en = 1; dma_ram_rd_addr = DMA_RAM_WORD_AW'(wi);
          @(negedge clk);
          dma_ram_rd_en = 0;
          for (int j = 0; j < 64; j++) begin
            automatic int i = 64 * wi + j - int'(d.ram_addr);
            if (i >= 0 && i < int'(d.len)) host[longint'(d.dma_addr) + i] = dma_ram_rd_data[8 * j +: 8];
          end
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


  localparam longint HOST_BASE = 64'h1_2340_0000;
  semaphore sem_host = new(1), sem_eg = new(1), sem_fb = new(1), sem_out = new(1);
  int n_host_wr = 0, n_unaligned = 0;

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

  // ------------------------------------------------------------ wire side
  int n_stall = 0, n_to_host = 0;
  int t_last_tx;
  byte unsigned tx_q[$][$], tbuf[$];
  always @(posedge clk) if (!rst && m_tx_valid && m_tx_ready) begin
    for (int i = 0; i < 64; i++) if (m_tx.keep[i]) tbuf.push_back(m_tx.data[8*i +: 8]);
    if (m_tx.last) begin tx_q.push_back(tbuf); tbuf.delete(); t_last_tx = int'($time / 10); end
  end
  always @(posedge clk) if (!rst && m_rx_host_valid && m_rx_host_ready && m_rx_host.last) n_to_host++;
  always @(posedge clk) if (!rst && s_rx_valid && !s_rx_ready && dut.u_ingress.large_free == 0) n_stall++;
  assign m_tx_ready = 1'b1;
  assign m_rx_host_ready = 1'b1;

  task automatic send(byte unsigned b[$]);
    int n = b.size(), nb = (n + 63) / 64;
    for (int bt = 0; bt < nb; bt++) begin
      s_rx = '0;
      for (int i = 0; i < 64; i++)
        if (64 * bt + i < n) begin s_rx.data[8*i +: 8] = b[64 * bt + i]; s_rx.keep[i] = 1; end
      s_rx.last = (bt == nb - 1);
      s_rx_valid = 1;
      #1; while (!s_rx_ready) begin @(negedge clk); #1; end
      @(negedge clk); s_rx_valid = 0;
    end
  endtask

  function automatic void hdr(ref byte unsigned b[$], input int len, input byte unsigned proto);
    b.delete();
    for (int i = 0; i < len; i++) b.push_back(8'($urandom));
    b[12] = 8'h08; b[13] = 8'h00; b[14] = 8'h45; b[23] = proto;
  endfunction

  // ------------------------------------------------------------ handlers
  bit [255:0] done_seen;
  logic [EG_TAG_W-1:0] next_tag = '0;
  int slmp_delay = 1500;
  always @(posedge clk) if (m_egress_done_valid) done_seen[m_egress_done_tag] = 1'b1;

  task automatic swap_l2(int unsigned a, int x, int y, int n);
    for (int i = 0; i < n; i++) begin
      automatic byte unsigned t = l2.peek(a + x + i);
      l2.poke(a + x + i, l2.peek(a + y + i));
      l2.poke(a + y + i, t);
    end
  endtask

  task automatic egress_send(int unsigned a, int len);
    logic [EG_TAG_W-1:0] tag;
    sem_eg.get(1);
    tag = next_tag; next_tag++;
    done_seen[tag] = 1'b0;
    s_egress_cmd.addr = a; s_egress_cmd.len = LEN_W'(len); s_egress_cmd.tag = tag;
    s_egress_cmd_valid = 1;
    #1; while (!s_egress_cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk); s_egress_cmd_valid = 0;
    while (!done_seen[tag]) @(negedge clk);
    sem_eg.put(1);
  endtask

  task automatic handler(her_t h);
    int unsigned a = h.pkt_addr;
    @(negedge clk);                            // drive on the falling edge
    swap_l2(a, 0, 6, 6);                       // MAC addresses
    swap_l2(a, 26, 30, 4);                     // IP addresses
    if (h.ctx.ph_addr == 32'h100) begin        // ICMP echo: request -> reply
      l2.poke(a + 34, 8'h00);
      egress_send(a, int'(h.pkt_size));
    end else if (h.ctx.ph_addr == 32'h200) begin   // UDP echo
      swap_l2(a, 34, 36, 2);
      egress_send(a, int'(h.pkt_size));
    end else begin                             // SLMP receiver
      byte unsigned pl[$];
      longint dst;
      int unsigned off;
      repeat (slmp_delay) @(negedge clk);
      for (int i = 52; i < int'(h.pkt_size); i++) pl.push_back(l2.peek(longint'(a) + i));
      off = {l2.peek(a + 48), l2.peek(a + 49), l2.peek(a + 50), l2.peek(a + 51)};
      dst = longint'(h.ctx.host_mem_addr) + longint'(off);
      while (pl.size() > 0) begin
        automatic int room = 4096 - int'(dst & 4095);
        automatic int n = pl.size() < room ? pl.size() : room;
        automatic byte unsigned piece[$] = pl[0:n-1];
        host_write(dst, piece);
        dst += n;
        repeat (n) void'(pl.pop_front());
      end
      swap_l2(a, 34, 36, 2);
      l2.poke(a + 42, 8'h00); l2.poke(a + 43, 8'h02);   // ACK
      egress_send(a, 64);
      if (h.eom) begin
        sem_out.get(1);
        s_stdout_data = h.msgid; s_stdout_valid = 1;
        #1; while (!s_stdout_ready) begin @(negedge clk); #1; end
        @(negedge clk); s_stdout_valid = 0;
        sem_out.put(1);
      end
    end
    sem_fb.get(1);
    s_feedback.pkt_addr = a; s_feedback.pkt_size = h.pkt_size; s_feedback.msgid = h.msgid;
    s_feedback_valid = 1;
    #1; while (!s_feedback_ready) begin @(negedge clk); #1; end
    @(negedge clk); s_feedback_valid = 0;
    sem_fb.put(1);
  endtask

  assign m_her_ready = !pspin_rst && pspin_fetch_en;
  always @(posedge clk) if (!rst && m_her_valid && m_her_ready) begin
    automatic her_t h = m_her;
    fork handler(h); join_none
  end

  // ------------------------------------------------------------ ping-pong
  // Longest path of one round trip with idle neighbours: matcher 4, data
  // FIFO and allocator a few cycles, ingress copy n+3, HER and handler start,
  // egress read n+3 plus memory latency, arbiter and output register.
  task automatic ping(bit icmp, int len, output int rtt);
    byte unsigned req[$], rep[$];
    int t0, nb = (len + 63) / 64;
    hdr(req, len, icmp ? 8'd1 : 8'd17);
    if (icmp) req[34] = 8'd8;
    else begin req[36] = 8'h24; req[37] = 8'h73; end
    t0 = int'($time / 10);
    send(req);
    while (tx_q.size() == 0) @(negedge clk);
    rtt = t_last_tx - t0;
    rep = tx_q.pop_front();
    check(rep.size() == len, "reply length");
    for (int i = 0; i < len; i++) begin
      automatic byte unsigned e = req[i];
      if (i < 6) e = req[i + 6];
      else if (i < 12) e = req[i - 6];
      else if (i >= 26 && i < 30) e = req[i + 4];
      else if (i >= 30 && i < 34) e = req[i - 4];
      else if (icmp && i == 34) e = 8'h00;
      else if (!icmp && i >= 34 && i < 36) e = req[i + 2];
      else if (!icmp && i >= 36 && i < 38) e = req[i - 2];
      if (rep[i] != e) begin check(0, $sformatf("reply byte %0d of %0d", i, len)); break; end
    end
    checks++;
    check(rtt <= 3 * nb + 60, $sformatf("round trip %0d cycles for %0d bytes", rtt, len));
  endtask

  // ------------------------------------------------------------ SLMP
  function automatic byte unsigned fbyte(int w, int k);
    return 8'(k * 7 + w + (k >> 8));
  endfunction

  int acks = 0;
  bit slmp_mode = 0;
  always @(negedge clk) while (slmp_mode && tx_q.size() > 0) begin
    automatic byte unsigned f[$] = tx_q.pop_front();
    if (f.size() == 64 && f[43] == 8'h02) acks++;
  end

  task automatic slmp_transfer(int w, int nseg, output int cycles);
    int t0 = int'($time / 10);
    acks = 0;
    for (int s = 0; s < nseg; s++) begin
      automatic byte unsigned b[$];
      automatic int unsigned off = 32'(w) * 32'h100000 + 32'(s) * 1000;
      while (s - acks >= w) @(negedge clk);
      hdr(b, 52 + 1000, 8'd17);
      b[36] = 8'h24; b[37] = 8'h72;
      b[42] = 8'h00; b[43] = (s == nseg - 1) ? 8'h04 : 8'h00;
      {b[44], b[45], b[46], b[47]} = 32'(w);
      {b[48], b[49], b[50], b[51]} = off;
      for (int i = 0; i < 1000; i++) b[52 + i] = fbyte(w, s * 1000 + i);
      send(b);
    end
    while (acks < nseg) @(negedge clk);
    cycles = int'($time / 10) - t0;
    for (int k = 0; k < nseg * 1000; k++)
      if (hbyte(HOST_BASE + longint'(w) * 64'h100000 + k) != fbyte(w, k)) begin
        check(0, $sformatf("file byte %0d, window %0d", k, w)); break;
      end
    checks++;
  endtask

  initial begin
    #60000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_ctx(int c, int unsigned ph);
    axil_wr(32'h0400 + 32'h40 * c + 32'h08, 32'h2340_0000);
    axil_wr(32'h0400 + 32'h40 * c + 32'h0C, 32'h1);
    axil_wr(32'h0400 + 32'h40 * c + 32'h10, 32'h1000_0000);
    axil_wr(32'h0400 + 32'h40 * c + 32'h1C, ph);
    axil_wr(32'h0400 + 32'h40 * c + 32'h20, 32'h400);
  endtask

  initial begin
    logic [31:0] v;
    int rtt, rtt_first, cyc4, cyc16, cyc512, n_prev;
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

    set_ctx(0, 32'h100); set_ctx(1, 32'h200); set_ctx(2, 32'h300);
    // ruleset 0: ICMP echo request
    set_rule(0, 0, 3, 32'hffff0000, 32'h08000000, 32'h08000000);
    set_rule(0, 1, 5, 32'h000000ff, 32'd1, 32'd1);
    set_rule(0, 2, 8, 32'h0000ff00, 32'h00000800, 32'h00000800);
    // ruleset 1: UDP port 9331
    set_rule(1, 0, 3, 32'hffff0000, 32'h08000000, 32'h08000000);
    set_rule(1, 1, 5, 32'h000000ff, 32'd17, 32'd17);
    set_rule(1, 2, 9, 32'hffff0000, 32'd9331 << 16, 32'd9331 << 16);
    // ruleset 2: SLMP on port 9330, EOM flag
    set_rule(2, 0, 3, 32'hffff0000, 32'h08000000, 32'h08000000);
    set_rule(2, 1, 5, 32'h000000ff, 32'd17, 32'd17);
    set_rule(2, 2, 9, 32'hffff0000, 32'd9330 << 16, 32'd9330 << 16);
    set_rule(2, 3, 10, 32'h00000004, 32'd4, 32'd4);
    axil_wr(16'h0000, 32'h1);

    for (int icmp = 1; icmp >= 0; icmp--) begin
      for (int len = 64; len <= 1464; len += 100) begin
        ping(icmp[0], len, rtt);
        if (len == 64) rtt_first = rtt;
        $display("%s ping-pong %4d B: %0d cycles", icmp ? "ICMP" : "UDP ", len, rtt);
      end
      check(rtt > rtt_first, "round trip grows with size");
    end
    // echo replies are not for the handler
    n_prev = n_to_host;
    for (int k = 0; k < 3; k++) begin
      automatic byte unsigned b[$];
      hdr(b, 98, 8'd1); b[34] = 8'd0;
      send(b);
    end
    repeat (50) @(negedge clk);
    check(n_to_host == n_prev + 3, "ICMP echo replies go to the host");

    slmp_mode = 1;
    slmp_transfer(4, 125, cyc4);
    slmp_transfer(16, 125, cyc16);
    n_prev = n_stall;
    slmp_transfer(512, 400, cyc512);
    $display("SLMP window 4: %0d cycles, window 16: %0d cycles (125 KB); window 512: %0d cycles (400 KB)",
             cyc4, cyc16, cyc512);
    check(cyc16 < cyc4, "larger window, shorter transfer");
    check(n_stall > n_prev, "window 512 runs out of large slots and stalls the input");
    for (int k = 0; k < 3; k++) begin
      axil_rd(16'h0004, v);
      check(v == (k == 0 ? 4 : k == 1 ? 16 : 512), "end of message printed in order");
    end
    axil_rd(16'h000C, v); check(v == {16'd170, 16'd2048}, "every slot returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
