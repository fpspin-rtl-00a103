// tb_pspin_her_gen: self-checking test of the HER generator. Four execution
// contexts are filled with random handler addresses, sizes and memory
// regions; random packet metadata then goes through, and every HER must carry
// the packet's message ID, end-of-message flag, address and size together with
// exactly the fields of the context the packet matched. The handshake must pass
// straight through in the same cycle (zero latency).
module tb_pspin_her_gen;
  import fpspin_pkg::*;

  her_ctx_t [NUM_RULESETS-1:0] cfg_ctx;
  pkt_meta_t s_meta;
  logic s_valid, s_ready, m_valid, m_ready;
  her_t m_her;

  pspin_her_gen dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] r32(); return $urandom; endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NUM_RULESETS; c++) begin
      cfg_ctx[c].handler_mem_addr = r32(); cfg_ctx[c].handler_mem_size = r32();
      cfg_ctx[c].host_mem_addr = {r32(), r32()}; cfg_ctx[c].host_mem_size = r32();
      cfg_ctx[c].hh_addr = r32(); cfg_ctx[c].hh_size = r32();
      cfg_ctx[c].ph_addr = r32(); cfg_ctx[c].ph_size = r32();
      cfg_ctx[c].th_addr = r32(); cfg_ctx[c].th_size = r32();
    end
    for (int k = 0; k < 500; k++) begin
      automatic int c = $urandom_range(NUM_RULESETS - 1);
      s_meta = '0;
      s_meta.ctx = CTX_W'(c); s_meta.msgid = r32(); s_meta.eom = 1'($urandom);
      s_meta.len = 16'($urandom_range(1, 1536)); s_meta.addr = r32();
      s_valid = 1'($urandom); m_ready = 1'($urandom);
      #1;
      check(m_valid == s_valid && s_ready == m_ready, "handshake passes through");
      check(m_her.msgid == s_meta.msgid && m_her.eom == s_meta.eom, "message fields");
      check(m_her.pkt_addr == s_meta.addr && m_her.pkt_size == s_meta.len, "packet fields");
      check(m_her.ctx.ph_addr == cfg_ctx[c].ph_addr && m_her.ctx.hh_addr == cfg_ctx[c].hh_addr
            && m_her.ctx.th_addr == cfg_ctx[c].th_addr, "handler addresses of the context");
      check(m_her.ctx.ph_size == cfg_ctx[c].ph_size && m_her.ctx.hh_size == cfg_ctx[c].hh_size
            && m_her.ctx.th_size == cfg_ctx[c].th_size, "handler sizes of the context");
      check(m_her.ctx.host_mem_addr == cfg_ctx[c].host_mem_addr
            && m_her.ctx.host_mem_size == cfg_ctx[c].host_mem_size
            && m_her.ctx.handler_mem_addr == cfg_ctx[c].handler_mem_addr
            && m_her.ctx.handler_mem_size == cfg_ctx[c].handler_mem_size, "memory regions");
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
