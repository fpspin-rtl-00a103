// tb_pspin_pkt_alloc: self-checking test of the packet buffer allocator at its
// full size (512 KiB buffer: 2048 slots of 128 bytes, 170 of 1536 bytes).
//
// The testbench keeps its own set of outstanding slots and checks that every
// allocation returns a slot of the right size class, aligned to its slot size,
// inside the right half of the buffer and not already in use; that the
// address is added in the same cycle (zero latency); that a pool that has run
// dry holds the request back until a slot is freed, and then hands out exactly
// that slot; and that the free counters follow the model. Both pools are
// drained completely once, then random traffic with random frees follows.
module tb_pspin_pkt_alloc;
  import fpspin_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  pkt_meta_t s_meta, m_meta;
  logic s_valid, s_ready, m_valid, m_ready;
  feedback_t s_free;
  logic s_free_valid, s_free_ready;
  logic [15:0] small_free, large_free;

  pspin_pkt_alloc dut (.*);

  localparam int HALF = PKT_BUF_SIZE / 2;
  localparam int NS = HALF / SMALL_SLOT_B, NL = HALF / LARGE_SLOT_B;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  bit used[int];            // outstanding slot addresses
  int n_small = 0, n_large = 0;
  int stalls = 0;

  // Allocate one slot for a packet of len bytes; returns the address.
  task automatic alloc(input int len, output int addr);
    s_meta = '0;
    s_meta.len = LEN_W'(len);
    s_meta.msgid = $urandom;
    s_meta.ctx = CTX_W'($urandom);
    s_valid = 1;
    m_ready = 1;
    #1;
    while (!m_valid) begin @(negedge clk); end
    check(s_ready, "input accepted in the same cycle as output");
    check(m_meta.len == s_meta.len && m_meta.msgid == s_meta.msgid && m_meta.ctx == s_meta.ctx,
          "metadata passes through");
    addr = int'(m_meta.addr);
    if (len <= SMALL_SLOT_B) begin
      check(addr < HALF && addr % SMALL_SLOT_B == 0, $sformatf("small slot address %0h", addr));
      n_small++;
    end else begin
      check(addr >= HALF && (addr - HALF) % LARGE_SLOT_B == 0
            && addr - HALF + LARGE_SLOT_B <= HALF, $sformatf("large slot address %0h", addr));
      n_large++;
    end
    check(!used.exists(addr), $sformatf("slot %0h handed out twice", addr));
    used[addr] = 1;
    @(negedge clk);
    s_valid = 0;
  endtask

  task automatic free(input int addr);
    s_free = '0;
    s_free.pkt_addr = addr;
    s_free_valid = 1;
    check(s_free_ready, "free accepted");
    @(negedge clk);
    s_free_valid = 0;
    used.delete(addr);
    if (addr < HALF) n_small--; else n_large--;
  endtask

  task automatic check_counts();
    check(int'(small_free) == NS - n_small, $sformatf("small free %0d exp %0d", small_free, NS - n_small));
    check(int'(large_free) == NL - n_large, $sformatf("large free %0d exp %0d", large_free, NL - n_large));
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, held, list[$];
    s_valid = 0; s_meta = '0; m_ready = 1; s_free = '0; s_free_valid = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    check(NS == 2048 && NL == 170, "pool sizes from a 512 KiB buffer");
    check_counts();

    // drain the large pool
    for (int i = 0; i < NL; i++) begin alloc($urandom_range(129, 1536), a); list.push_back(a); end
    check_counts();
    // one more large request must wait
    s_meta = '0; s_meta.len = 16'd1000; s_valid = 1;
    repeat (5) begin
      @(negedge clk);
      check(!m_valid && !s_ready, "request waits while the large pool is empty");
    end
    stalls++;
    held = list[37];
    list.delete(37);
    free(held);
    #1;
    check(m_valid && int'(m_meta.addr) == held, "freed large slot is handed out next");
    used[held] = 1; n_large++;
    @(negedge clk); s_valid = 0;
    // a small request is not blocked by the empty large pool
    alloc(64, a); list.push_back(a);
    check_counts();
    while (list.size() > 0) begin free(list.pop_front()); end
    check_counts();

    // drain the small pool, then free everything
    for (int i = 0; i < NS; i++) begin alloc($urandom_range(1, 128), a); list.push_back(a); end
    check_counts();
    s_meta = '0; s_meta.len = 16'd100; s_valid = 1;
    @(negedge clk);
    check(!m_valid, "request waits while the small pool is empty");
    s_valid = 0;
    while (list.size() > 0) begin
      automatic int k = $urandom_range(list.size() - 1);
      free(list[k]); list.delete(k);
    end
    check_counts();

    // random mix
    for (int i = 0; i < 3000; i++) begin
      if (list.size() > 0 && ($urandom_range(2) == 0 || list.size() > 150)) begin
        automatic int k = $urandom_range(list.size() - 1);
        free(list[k]); list.delete(k);
      end else begin
        alloc($urandom_range(0, 1) ? $urandom_range(1, 128) : $urandom_range(129, 1536), a);
        list.push_back(a);
      end
    end
    check_counts();
    check(stalls > 0, "pool exhaustion exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
