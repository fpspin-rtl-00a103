// tb_pspin_async_fifo: self-checking test of the clock-crossing FIFO with the
// two clocks of the application block: 40 MHz (25 ns) on the PsPIN side and
// 250 MHz (4 ns) on the NIC side. Two instances carry data in each
// direction: slow to fast and fast to slow.
//
// For each instance the test checks four things:
//   - order and data: 3000 numbered words pass with random valid and ready on
//     both sides, and each comes out in order with its value intact;
//   - capacity: with the reader stopped, exactly DEPTH words are accepted;
//   - latency: a word written into an empty FIFO shows up after two to four
//     reader clock edges;
//   - full-to-free: after the reader takes one word, the writer sees space
//     again within two to four writer clock edges.
// Stimulus changes on the falling edge of the clock that owns it.
module tb_pspin_async_fifo;
  localparam int unsigned DEPTH = 16;
  localparam int unsigned N     = 3000;

  logic slow_clk = 0, fast_clk = 0, rst = 1;
  always #12.5 slow_clk = ~slow_clk;
  always #2    fast_clk = ~fast_clk;

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- DUTs
  // a: slow writer -> fast reader,  b: fast writer -> slow reader
  logic [31:0] a_in, a_out, b_in, b_out;
  logic a_iv, a_ir, a_ov, a_or, b_iv, b_ir, b_ov, b_or;

  pspin_async_fifo #(.T(logic [31:0]), .DEPTH(DEPTH)) u_a (
    .wr_clk(slow_clk), .wr_rst(rst), .in_data(a_in), .in_valid(a_iv), .in_ready(a_ir),
    .rd_clk(fast_clk), .rd_rst(rst), .out_data(a_out), .out_valid(a_ov), .out_ready(a_or));

  pspin_async_fifo #(.T(logic [31:0]), .DEPTH(DEPTH)) u_b (
    .wr_clk(fast_clk), .wr_rst(rst), .in_data(b_in), .in_valid(b_iv), .in_ready(b_ir),
    .rd_clk(slow_clk), .rd_rst(rst), .out_data(b_out), .out_valid(b_ov), .out_ready(b_or));

  function automatic logic [31:0] word_of(input int i, input int which);
    return {16'(i), 16'(i * 40503 + which * 7919)};
  endfunction

  // ----------------------------------------------------------- stimulus
  // Writer: N words in order with random gaps.
  task automatic writer(input int which);
    int i = 0;
    while (i < N) begin
      if (which == 0) begin
        @(negedge slow_clk);
        a_iv = ($urandom_range(0, 3) != 0);
        a_in = word_of(i, 0);
        if (a_iv && a_ir) i++;       // ready only changes on the writer's rising edge
        @(posedge slow_clk);
      end else begin
        @(negedge fast_clk);
        b_iv = ($urandom_range(0, 3) != 0);
        b_in = word_of(i, 1);
        if (b_iv && b_ir) i++;
        @(posedge fast_clk);
      end
    end
    if (which == 0) begin @(negedge slow_clk); a_iv = 0; end
    else            begin @(negedge fast_clk); b_iv = 0; end
  endtask

  // Reader: random ready, checks each accepted word.
  task automatic reader(input int which);
    int i = 0;
    while (i < N) begin
      logic v;
      logic [31:0] d;
      if (which == 0) begin
        @(negedge fast_clk);
        a_or = ($urandom_range(0, 2) != 0);
        @(posedge fast_clk);
        v = a_ov && a_or; d = a_out;
      end else begin
        @(negedge slow_clk);
        b_or = ($urandom_range(0, 2) != 0);
        @(posedge slow_clk);
        v = b_ov && b_or; d = b_out;
      end
      if (v) begin
        checks++;
        if (d !== word_of(i, which)) begin
          failures++;
          $display("FAIL fifo %0d word %0d: got %h expected %h", which, i, d, word_of(i, which));
        end
        i++;
      end
    end
    if (which == 0) begin @(negedge fast_clk); a_or = 0; end
    else            begin @(negedge slow_clk); b_or = 0; end
  endtask

  // Capacity, latency and full-to-free recovery of one FIFO, with it empty at the start.
  task automatic corners(input int which);
    int accepted = 0, edges;
    // latency: one word into the empty FIFO
    if (which == 0) begin
      @(negedge slow_clk); a_iv = 1; a_in = 32'hcafe_0000;
      @(posedge slow_clk); #0.1; a_iv = 0;      // pushed at this edge
      edges = 0;
      while (!a_ov && edges < 20) begin @(posedge fast_clk); #0.1; edges++; end
    end else begin
      @(negedge fast_clk); b_iv = 1; b_in = 32'hcafe_0001;
      @(posedge fast_clk); #0.1; b_iv = 0;
      edges = 0;
      while (!b_ov && edges < 20) begin @(posedge slow_clk); #0.1; edges++; end
    end
    checks++;
    if (edges < 1 || edges > 4) begin
      failures++;
      $display("FAIL fifo %0d: first word visible after %0d reader edges", which, edges);
    end
    // drain that word
    if (which == 0) begin @(negedge fast_clk); a_or = 1; @(negedge fast_clk); a_or = 0; end
    else            begin @(negedge slow_clk); b_or = 1; @(negedge slow_clk); b_or = 0; end
    repeat (8) @(posedge slow_clk);
    // capacity: push with the reader stopped
    for (int k = 0; k < 3 * DEPTH; k++) begin
      if (which == 0) begin
        @(negedge slow_clk); a_iv = 1; a_in = 32'(k);
        if (a_ir) accepted++;
      end else begin
        @(negedge fast_clk); b_iv = 1; b_in = 32'(k);
        if (b_ir) accepted++;
      end
    end
    if (which == 0) begin @(negedge slow_clk); a_iv = 0; end
    else            begin @(negedge fast_clk); b_iv = 0; end
    checks++;
    if (accepted != DEPTH) begin
      failures++;
      $display("FAIL fifo %0d: accepted %0d words while full, expected %0d", which, accepted, DEPTH);
    end
    // full-to-free: take one word, count writer edges until there is room
    if (which == 0) begin
      @(negedge fast_clk); a_or = 1; @(posedge fast_clk); #0.1; a_or = 0;   // popped here
      edges = 0;
      while (!a_ir && edges < 20) begin @(posedge slow_clk); #0.1; edges++; end
    end else begin
      @(negedge slow_clk); b_or = 1; @(posedge slow_clk); #0.1; b_or = 0;
      edges = 0;
      while (!b_ir && edges < 20) begin @(posedge fast_clk); #0.1; edges++; end
    end
    checks++;
    if (edges < 1 || edges > 4) begin
      failures++;
      $display("FAIL fifo %0d: room seen after %0d writer edges", which, edges);
    end
    // the remaining words come out in order
    for (int k = 1; k < DEPTH; k++) begin
      logic [31:0] d;
      if (which == 0) begin
        #0.1; while (!a_ov) begin @(posedge fast_clk); #0.1; end
        d = a_out; @(negedge fast_clk); a_or = 1; @(negedge fast_clk); a_or = 0;
      end else begin
        #0.1; while (!b_ov) begin @(posedge slow_clk); #0.1; end
        d = b_out; @(negedge slow_clk); b_or = 1; @(negedge slow_clk); b_or = 0;
      end
      checks++;
      if (d != 32'(k)) begin
        failures++;
        $display("FAIL fifo %0d: word %0d after refill is %0d", which, k, d);
      end
    end
  endtask

  initial begin
    a_iv = 0; a_or = 0; a_in = '0; b_iv = 0; b_or = 0; b_in = '0;
    repeat (4) @(posedge slow_clk);
    @(negedge slow_clk); rst = 0;
    repeat (2) @(posedge slow_clk);
    fork
      writer(0); reader(0); writer(1); reader(1);
    join
    repeat (8) @(posedge slow_clk);
    corners(0);
    corners(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
