// tb_pspin_hostmem_dma: self-checking test of the host memory DMA bridge.
//
// The testbench plays both neighbours: PsPIN's AXI4 host master issuing
// bursts, and a behavioural descriptor DMA engine with a host memory that
// copies bytes between host memory and the bridge's bounce buffer (through
// its buffer port, one-cycle read latency) after a random delay, then reports
// the command's tag. Writes are random unaligned transfers (start anywhere in a
// 64-byte word, 1 byte to the end of the 4 KiB page) expressed the AXI way, as
// aligned beats with strobes. The test checks that the DMA command carries the
// recovered start address and exact length, that host memory afterwards
// holds exactly the written bytes while the bytes just before and after are
// untouched, and that B arrives only after the DMA completion. Reads check
// every returned beat against host memory.
module tb_pspin_hostmem_dma;
  import fpspin_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  axi_ax_t s_aw, s_ar; logic s_aw_valid, s_aw_ready, s_ar_valid, s_ar_ready;
  axi_w_t s_w; logic s_w_valid, s_w_ready;
  axi_b_t s_b; logic s_b_valid, s_b_ready;
  axi_r_t s_r; logic s_r_valid, s_r_ready;
  dma_desc_t m_wr_desc, m_rd_desc; logic m_wr_desc_valid, m_wr_desc_ready, m_rd_desc_valid, m_rd_desc_ready;
  dma_status_t s_wr_status, s_rd_status; logic s_wr_status_valid, s_rd_status_valid;
  logic ram_rd_en, ram_wr_en;
  logic [DMA_RAM_WORD_AW-1:0] ram_rd_addr, ram_wr_addr;
  logic [DATA_W-1:0] ram_rd_data, ram_wr_data;
  logic [KEEP_W-1:0] ram_wr_strb;

  pspin_hostmem_dma dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  byte unsigned host[longint];
  function automatic byte unsigned hbyte(longint a);
    return host.exists(a) ? host[a] : 8'(a ^ (a >> 8) ^ 8'h5a);
  endfunction

  // ------------------------------------------------- behavioural DMA engine
  dma_desc_t last_wr, last_rd;
  int wr_cmds = 0, rd_cmds = 0, dma_done = 0;
  bit b_early = 0;
  initial begin
    m_wr_desc_ready = 0; m_rd_desc_ready = 0; s_wr_status = '0; s_rd_status = '0;
    s_wr_status_valid = 0; s_rd_status_valid = 0;
    ram_rd_en = 0; ram_wr_en = 0; ram_rd_addr = '0; ram_wr_addr = '0; ram_wr_data = '0; ram_wr_strb = '0;
    forever begin
      @(negedge clk);
      m_wr_desc_ready = 1; m_rd_desc_ready = 1;
      if (m_wr_desc_valid) begin
        automatic dma_desc_t d = m_wr_desc;
        @(negedge clk); m_wr_desc_ready = 0; m_rd_desc_ready = 0;
        last_wr = d; wr_cmds++;
        repeat ($urandom_range(0, 10)) @(negedge clk);
        for (int i = 0; i < int'(d.len); i++) begin
          automatic int r = int'(d.ram_addr) + i;
          ram_rd_en = 1; ram_rd_addr = DMA_RAM_WORD_AW'(r / 64);
          @(negedge clk);
          ram_rd_en = 0;
          host[longint'(d.dma_addr) + i] = ram_rd_data[8 * (r % 64) +: 8];
        end
        s_wr_status.tag = d.tag; s_wr_status_valid = 1;
        @(negedge clk); s_wr_status_valid = 0; dma_done++;
      end else if (m_rd_desc_valid) begin
        automatic dma_desc_t d = m_rd_desc;
        @(negedge clk); m_wr_desc_ready = 0; m_rd_desc_ready = 0;
        last_rd = d; rd_cmds++;
        repeat ($urandom_range(0, 10)) @(negedge clk);
        for (int i = 0; i < int'(d.len); i++) begin
          automatic int r = int'(d.ram_addr) + i;
          ram_wr_en = 1; ram_wr_addr = DMA_RAM_WORD_AW'(r / 64);
          ram_wr_strb = '0; ram_wr_strb[r % 64] = 1'b1;
          ram_wr_data = '0; ram_wr_data[8 * (r % 64) +: 8] = hbyte(longint'(d.dma_addr) + i);
          @(negedge clk);
          ram_wr_en = 0;
        end
        s_rd_status.tag = d.tag; s_rd_status_valid = 1;
        @(negedge clk); s_rd_status_valid = 0; dma_done++;
      end
    end
  end

  // ----------------------------------------------------------- AXI master
  int unaligned = 0;
  task automatic axi_write(input longint addr, input int len);
    longint base = addr & ~64'h3f;
    int off = int'(addr & 63), nb = (off + len + 63) / 64;
    byte unsigned d[];
    int done_before;
    d = new[len];
    foreach (d[i]) d[i] = 8'($urandom);
    if (off != 0 || (len % 64) != 0) unaligned++;
    s_aw = '0; s_aw.addr = addr; s_aw.len = 8'(nb - 1); s_aw.size = 3'd6; s_aw.burst = BURST_INCR;
    s_aw.id = 4'($urandom);
    s_aw_valid = 1;
    #1; while (!s_aw_ready) @(negedge clk);
    @(negedge clk); s_aw_valid = 0;
    for (int b = 0; b < nb; b++) begin
      s_w = '0;
      for (int i = 0; i < 64; i++) begin
        automatic int k = 64 * b + i - off;
        if (k >= 0 && k < len) begin s_w.strb[i] = 1; s_w.data[8*i +: 8] = d[k]; end
      end
      s_w.last = (b == nb - 1);
      s_w_valid = 1;
      #1; while (!s_w_ready) @(negedge clk);
      @(negedge clk); s_w_valid = 0;
      if ($urandom_range(3) == 0) @(negedge clk);
    end
    done_before = dma_done;
    s_b_ready = 1;
    while (!s_b_valid) @(negedge clk);
    check(dma_done == done_before + 1, "B only after the DMA completion");
    check(s_b.id == s_aw.id && s_b.resp == RESP_OKAY, "B id and response");
    @(negedge clk); s_b_ready = 0;
    check(last_wr.dma_addr == 64'(addr), $sformatf("recovered address %h exp %h", last_wr.dma_addr, addr));
    check(int'(last_wr.len) == len, $sformatf("recovered length %0d exp %0d", last_wr.len, len));
    for (int i = 0; i < len; i++)
      check(hbyte(addr + i) == d[i], $sformatf("host byte %0d of %0d", i, len));
    check(!host.exists(addr - 1) && !host.exists(addr + len), "neighbouring bytes untouched");
    host.delete();   // back to the background pattern
  endtask

  task automatic axi_read(input longint addr, input int nb);
    longint base = addr & ~64'h3f;
    s_ar = '0; s_ar.addr = addr; s_ar.len = 8'(nb - 1); s_ar.size = 3'd6; s_ar.burst = BURST_INCR;
    s_ar.id = 4'($urandom);
    s_ar_valid = 1;
    #1; while (!s_ar_ready) @(negedge clk);
    @(negedge clk); s_ar_valid = 0;
    for (int b = 0; b < nb; b++) begin
      s_r_ready = 1'($urandom_range(2) != 0);
      #1; while (!(s_r_valid && s_r_ready)) begin
        @(negedge clk); s_r_ready = 1'($urandom_range(2) != 0); #1;
      end
      for (int i = 0; i < 64; i++)
        check(s_r.data[8*i +: 8] == hbyte(base + 64 * b + i), "read data");
      check(s_r.last == (b == nb - 1) && s_r.id == s_ar.id, "RLAST and RID");
      @(negedge clk); s_r_ready = 0;
    end
    check(last_rd.dma_addr == 64'(base) && int'(last_rd.len) == 64 * nb, "read command covers the burst");
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_aw = '0; s_ar = '0; s_w = '0; s_aw_valid = 0; s_ar_valid = 0; s_w_valid = 0;
    s_b_ready = 0; s_r_ready = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    axi_write(64'h1_0000_0000, 64);          // aligned, one beat
    axi_write(64'h1_0000_0103, 1);           // single byte
    axi_write(64'h1_0000_0207, 200);         // unaligned both ends
    axi_write(64'h1_0000_1000, 4096);        // a whole page
    for (int k = 0; k < 40; k++) begin
      automatic longint a = 64'h2_0000_0000 + 4096 * $urandom_range(0, 100) + $urandom_range(0, 4095);
      automatic int room = 4096 - int'(a & 4095);
      axi_write(a, $urandom_range(1, room > 600 ? 600 : room));
    end
    axi_read(64'h3_0000_0000, 1);
    axi_read(64'h3_0000_0040, 64);
    for (int k = 0; k < 20; k++) axi_read(64'h4_0000_0000 + 64 * $urandom_range(0, 1000), $urandom_range(1, 16));
    check(unaligned > 30, "unaligned writes exercised");
    check(wr_cmds == 44 && rd_cmds == 22, "one DMA command per burst");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
