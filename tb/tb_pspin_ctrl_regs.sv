// tb_pspin_ctrl_regs: self-checking test of the control register block.
//
// Over the AXI4-Lite port it checks the reset state (cluster held in reset,
// fetch disabled, every rule "never match"), writes every ruleset and context
// register with random values and checks both the read-back and the
// configuration outputs that feed the matcher and HER generator, tests byte
// strobes, the cluster reset/fetch-enable outputs, the slot counters, and the
// stdout FIFO: words pushed by the cluster side come out in order, each read
// removes one, the count follows, an empty FIFO reads as 0 and a full one
// (depth reduced to 16 here) refuses further words.
module tb_pspin_ctrl_regs;
  import fpspin_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [AXIL_ADDR_W-1:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata; logic [3:0] s_wstrb; logic [1:0] s_bresp, s_rresp;
  logic pspin_rst, pspin_fetch_en;
  ruleset_t [NUM_RULESETS-1:0] cfg_ruleset;
  her_ctx_t [NUM_RULESETS-1:0] cfg_ctx;
  logic [31:0] stdout_data; logic stdout_valid, stdout_ready;
  logic [15:0] small_free, large_free;

  pspin_ctrl_regs #(.STDOUT_DEPTH(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int a, input logic [31:0] d, input logic [3:0] be = 4'hf);
    s_awaddr = 16'(a); s_wdata = d; s_wstrb = be; s_awvalid = 1; s_wvalid = 1; s_bready = 1;
    #1; while (!s_awready) @(negedge clk);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    @(negedge clk); s_bready = 0;
  endtask

  task automatic rd(input int a, output logic [31:0] d);
    s_araddr = 16'(a); s_arvalid = 1; s_rready = 1;
    #1; while (!s_arready) @(negedge clk);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v, exp_ctx[NUM_RULESETS][11], exp_rule[NUM_RULESETS][RULES_PER_SET][4];
    logic exp_mode[NUM_RULESETS];
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 0; s_rready = 0;
    s_awaddr = '0; s_araddr = '0; s_wdata = '0; s_wstrb = '0;
    stdout_data = '0; stdout_valid = 0; small_free = 16'd2048; large_free = 16'd170;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    // reset state
    check(pspin_rst && !pspin_fetch_en, "cluster held in reset after reset");
    rd(16'h0000, v); check(v == 32'h2, "CTRL reset value");
    for (int s = 0; s < NUM_RULESETS; s++)
      for (int r = 0; r < RULES_PER_SET; r++)
        check(cfg_ruleset[s].rule[r].start > cfg_ruleset[s].rule[r].stop, "rules never match after reset");
    rd(16'h000C, v); check(v == {16'd170, 16'd2048}, "slot counters");
    // cluster control
    wr(16'h0000, 32'h1);
    check(!pspin_rst && pspin_fetch_en, "release reset and enable fetch");
    // rulesets
    for (int s = 0; s < NUM_RULESETS; s++) begin
      exp_mode[s] = 1'($urandom);
      wr(16'h0100 + 16'h80 * s, {31'b0, exp_mode[s]});
      for (int r = 0; r < RULES_PER_SET; r++)
        for (int f = 0; f < 4; f++) begin
          exp_rule[s][r][f] = (f == 0) ? 32'($urandom_range(15)) : $urandom;
          wr(16'h0110 + 16'h80 * s + 16'h10 * r + 4 * f, exp_rule[s][r][f]);
        end
    end
    // contexts
    for (int c = 0; c < NUM_RULESETS; c++)
      for (int f = 0; f < 11; f++) begin
        exp_ctx[c][f] = $urandom;
        wr(16'h0400 + 16'h40 * c + 4 * f, exp_ctx[c][f]);
      end
    for (int s = 0; s < NUM_RULESETS; s++) begin
      check(cfg_ruleset[s].mode == match_mode_e'(exp_mode[s]), "ruleset mode output");
      rd(16'h0100 + 16'h80 * s, v); check(v == {31'b0, exp_mode[s]}, "ruleset mode read-back");
      for (int r = 0; r < RULES_PER_SET; r++) begin
        check(32'(cfg_ruleset[s].rule[r].idx) == exp_rule[s][r][0] && cfg_ruleset[s].rule[r].mask == exp_rule[s][r][1]
              && cfg_ruleset[s].rule[r].start == exp_rule[s][r][2] && cfg_ruleset[s].rule[r].stop == exp_rule[s][r][3],
              $sformatf("rule %0d.%0d output", s, r));
        for (int f = 0; f < 4; f++) begin
          rd(16'h0110 + 16'h80 * s + 16'h10 * r + 4 * f, v);
          check(v == exp_rule[s][r][f], "rule read-back");
        end
      end
    end
    for (int c = 0; c < NUM_RULESETS; c++) begin
      check(cfg_ctx[c].handler_mem_addr == exp_ctx[c][0] && cfg_ctx[c].handler_mem_size == exp_ctx[c][1]
            && cfg_ctx[c].host_mem_addr == {exp_ctx[c][3], exp_ctx[c][2]} && cfg_ctx[c].host_mem_size == exp_ctx[c][4]
            && cfg_ctx[c].hh_addr == exp_ctx[c][5] && cfg_ctx[c].hh_size == exp_ctx[c][6]
            && cfg_ctx[c].ph_addr == exp_ctx[c][7] && cfg_ctx[c].ph_size == exp_ctx[c][8]
            && cfg_ctx[c].th_addr == exp_ctx[c][9] && cfg_ctx[c].th_size == exp_ctx[c][10],
            $sformatf("context %0d output", c));
      for (int f = 0; f < 11; f++) begin
        rd(16'h0400 + 16'h40 * c + 4 * f, v); check(v == exp_ctx[c][f], "context read-back");
      end
    end
    // byte strobes
    wr(16'h0404, 32'hAABBCCDD, 4'b0101);
    rd(16'h0404, v);
    check(v == {exp_ctx[0][1][31:24], 8'hBB, exp_ctx[0][1][15:8], 8'hDD}, "byte strobes");
    // stdout FIFO
    rd(16'h0004, v); check(v == 0, "empty stdout reads 0");
    for (int k = 0; k < 10; k++) begin
      stdout_data = 32'h1000 + k; stdout_valid = 1;
      #1; check(stdout_ready, "stdout push accepted");
      @(negedge clk);
    end
    stdout_valid = 0;
    rd(16'h0008, v); check(v == 10, "stdout count");
    for (int k = 0; k < 10; k++) begin rd(16'h0004, v); check(v == 32'h1000 + k, "stdout order"); end
    rd(16'h0008, v); check(v == 0, "stdout drained");
    // a full FIFO refuses further words
    for (int k = 0; k < 16; k++) begin
      stdout_data = 32'h2000 + k; stdout_valid = 1;
      #1; check(stdout_ready, "stdout push while not full");
      @(negedge clk);
    end
    #1; check(!stdout_ready, "stdout full refuses a word");
    @(negedge clk); stdout_valid = 0;
    rd(16'h0008, v); check(v == 16, "stdout count when full");
    for (int k = 0; k < 16; k++) begin rd(16'h0004, v); check(v == 32'h2000 + k, "stdout order after full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
