// pspin_ctrl_regs: the control path of the application block. The host
// reaches it over an AXI4-Lite slave (Corundum's application BAR) to start and
// stop the PsPIN cluster, to read what the handlers print, and to load the
// matching rulesets and execution contexts.
//
// From the paper: PsPIN is held in reset and released from here; handler
// standard output goes into a FIFO the host polls (the driver's /dev/pspin1);
// the matching rules (mode AND/OR, per rule index, mask, start, end) and the
// HER fields of an execution context (handler addresses and sizes, handler and
// host memory regions) are set by the host. The register map, the FIFO depth
// and the reset values are this design's own:
//
//   0x0000 CTRL        bit0 fetch enable (0 at reset), bit1 cluster reset (1 at reset)
//   0x0004 STDOUT      read: oldest stdout word, removed by the read; 0 if empty
//   0x0008 STDOUT_CNT  read: number of words waiting
//   0x000C SLOT_FREE   read: [15:0] free small slots, [31:16] free large slots
//   0x0100 + 0x80*s    ruleset s: +0x00 mode (0 AND, 1 OR);
//                      rule r at +0x10 + 0x10*r: +0 index, +4 mask, +8 start, +C end
//   0x0400 + 0x40*c    context c: +00 handler mem addr, +04 handler mem size,
//                      +08/+0C host mem addr low/high, +10 host mem size,
//                      +14/+18 header handler addr/size, +1C/+20 packet handler
//                      addr/size, +24/+28 tail handler addr/size
//
// At reset every rule has start 1 and end 0, so no packet matches and all
// traffic goes to the host, as in the paper's "Host" mode. Undefined addresses
// read 0 and ignore writes. Timing: a write completes (B) one cycle after both
// AW and W are present; a read returns one cycle after AR.
module pspin_ctrl_regs
  import fpspin_pkg::*;
#(
  parameter int unsigned STDOUT_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst,

  input  logic [AXIL_ADDR_W-1:0] s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [AXIL_ADDR_W-1:0] s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,

  output logic        pspin_rst,
  output logic        pspin_fetch_en,
  output ruleset_t [NUM_RULESETS-1:0] cfg_ruleset,
  output her_ctx_t [NUM_RULESETS-1:0] cfg_ctx,

  input  logic [31:0] stdout_data,
  input  logic        stdout_valid,
  output logic        stdout_ready,

  input  logic [15:0] small_free,
  input  logic [15:0] large_free
);
  localparam int unsigned CW = $clog2(STDOUT_DEPTH + 1);

  logic [31:0] so_data;
  logic        so_valid, so_pop;
  logic [CW-1:0] so_cnt;

  pspin_fifo #(.T(logic [31:0]), .DEPTH(STDOUT_DEPTH)) u_stdout (
    .clk, .rst,
    .in_data(stdout_data), .in_valid(stdout_valid), .in_ready(stdout_ready),
    .out_data(so_data), .out_valid(so_valid), .out_ready(so_pop),
    .count(so_cnt));

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d,
                                        input logic [3:0] be);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = be[b] ? d[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  // ------------------------------------------------------------- writes
  wire wr_fire = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign s_bresp   = 2'b00;

  logic [AXIL_ADDR_W-1:0] wa;
  assign wa = s_awaddr;

  always_ff @(posedge clk) begin
    if (rst) begin
      s_bvalid       <= 1'b0;
      pspin_rst      <= 1'b1;
      pspin_fetch_en <= 1'b0;
      for (int s = 0; s < NUM_RULESETS; s++) begin
        cfg_ruleset[s].mode <= MODE_AND;
        for (int r = 0; r < RULES_PER_SET; r++) begin
          cfg_ruleset[s].rule[r].idx   <= '0;
          cfg_ruleset[s].rule[r].mask  <= '0;
          cfg_ruleset[s].rule[r].start <= 32'd1;
          cfg_ruleset[s].rule[r].stop  <= 32'd0;
        end
      end
      cfg_ctx <= '0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        if (wa == 16'h0000) begin
          if (s_wstrb[0]) begin
            pspin_fetch_en <= s_wdata[0];
            pspin_rst      <= s_wdata[1];
          end
        end
        for (int s = 0; s < NUM_RULESETS; s++) begin
          if (wa == 16'(32'h0100 + 32'h80 * s))
            cfg_ruleset[s].mode <= match_mode_e'(s_wstrb[0] ? s_wdata[0] : cfg_ruleset[s].mode);
          for (int r = 0; r < RULES_PER_SET; r++) begin
            logic [15:0] rb;
            rb = 16'(32'h0110 + 32'h80 * s + 32'h10 * r);
            if (wa == rb)
              cfg_ruleset[s].rule[r].idx <= s_wstrb[0] ? s_wdata[RULE_IDX_W-1:0]
                                                       : cfg_ruleset[s].rule[r].idx;
            if (wa == rb + 16'h4)
              cfg_ruleset[s].rule[r].mask  <= merge(cfg_ruleset[s].rule[r].mask, s_wdata, s_wstrb);
            if (wa == rb + 16'h8)
              cfg_ruleset[s].rule[r].start <= merge(cfg_ruleset[s].rule[r].start, s_wdata, s_wstrb);
            if (wa == rb + 16'hC)
              cfg_ruleset[s].rule[r].stop  <= merge(cfg_ruleset[s].rule[r].stop, s_wdata, s_wstrb);
          end
        end
        for (int c = 0; c < NUM_RULESETS; c++) begin
          logic [15:0] cb;
          cb = 16'(32'h0400 + 32'h40 * c);
          unique case (wa - cb)
            16'h00: cfg_ctx[c].handler_mem_addr    <= merge(cfg_ctx[c].handler_mem_addr, s_wdata, s_wstrb);
            16'h04: cfg_ctx[c].handler_mem_size    <= merge(cfg_ctx[c].handler_mem_size, s_wdata, s_wstrb);
            16'h08: cfg_ctx[c].host_mem_addr[31:0] <= merge(cfg_ctx[c].host_mem_addr[31:0], s_wdata, s_wstrb);
            16'h0C: cfg_ctx[c].host_mem_addr[63:32] <= merge(cfg_ctx[c].host_mem_addr[63:32], s_wdata, s_wstrb);
            16'h10: cfg_ctx[c].host_mem_size       <= merge(cfg_ctx[c].host_mem_size, s_wdata, s_wstrb);
            16'h14: cfg_ctx[c].hh_addr             <= merge(cfg_ctx[c].hh_addr, s_wdata, s_wstrb);
            16'h18: cfg_ctx[c].hh_size             <= merge(cfg_ctx[c].hh_size, s_wdata, s_wstrb);
            16'h1C: cfg_ctx[c].ph_addr             <= merge(cfg_ctx[c].ph_addr, s_wdata, s_wstrb);
            16'h20: cfg_ctx[c].ph_size             <= merge(cfg_ctx[c].ph_size, s_wdata, s_wstrb);
            16'h24: cfg_ctx[c].th_addr             <= merge(cfg_ctx[c].th_addr, s_wdata, s_wstrb);
            16'h28: cfg_ctx[c].th_size             <= merge(cfg_ctx[c].th_size, s_wdata, s_wstrb);
            default: ;
          endcase
        end
      end
    end
  end

  // -------------------------------------------------------------- reads
  logic [31:0] rd_val;

  always_comb begin
    logic [15:0] ra;
    ra     = s_araddr;
    rd_val = '0;
    if (ra == 16'h0000) rd_val = {30'b0, pspin_rst, pspin_fetch_en};
    if (ra == 16'h0004) rd_val = so_valid ? so_data : 32'h0;
    if (ra == 16'h0008) rd_val = 32'(so_cnt);
    if (ra == 16'h000C) rd_val = {large_free, small_free};
    for (int s = 0; s < NUM_RULESETS; s++) begin
      if (ra == 16'(32'h0100 + 32'h80 * s)) rd_val = {31'b0, cfg_ruleset[s].mode};
      for (int r = 0; r < RULES_PER_SET; r++) begin
        logic [15:0] rb;
        rb = 16'(32'h0110 + 32'h80 * s + 32'h10 * r);
        if (ra == rb)         rd_val = 32'(cfg_ruleset[s].rule[r].idx);
        if (ra == rb + 16'h4) rd_val = cfg_ruleset[s].rule[r].mask;
        if (ra == rb + 16'h8) rd_val = cfg_ruleset[s].rule[r].start;
        if (ra == rb + 16'hC) rd_val = cfg_ruleset[s].rule[r].stop;
      end
    end
    for (int c = 0; c < NUM_RULESETS; c++) begin
      logic [15:0] cb;
      cb = 16'(32'h0400 + 32'h40 * c);
      unique case (ra - cb)
        16'h00: rd_val = cfg_ctx[c].handler_mem_addr;
        16'h04: rd_val = cfg_ctx[c].handler_mem_size;
        16'h08: rd_val = cfg_ctx[c].host_mem_addr[31:0];
        16'h0C: rd_val = cfg_ctx[c].host_mem_addr[63:32];
        16'h10: rd_val = cfg_ctx[c].host_mem_size;
        16'h14: rd_val = cfg_ctx[c].hh_addr;
        16'h18: rd_val = cfg_ctx[c].hh_size;
        16'h1C: rd_val = cfg_ctx[c].ph_addr;
        16'h20: rd_val = cfg_ctx[c].ph_size;
        16'h24: rd_val = cfg_ctx[c].th_addr;
        16'h28: rd_val = cfg_ctx[c].th_size;
        default: ;
      endcase
    end
  end

  assign s_arready = !s_rvalid;
  assign s_rresp   = 2'b00;
  assign so_pop    = s_arvalid && s_arready && (s_araddr == 16'h0004) && so_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_val;
      end
    end
  end

endmodule
