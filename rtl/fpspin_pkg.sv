// fpspin_pkg: types and constants shared by the FPsPIN application block.
//
// The application block sits between the Corundum NIC datapath and the PsPIN
// packet-processing cluster. Everything here is a fixed-width packed struct so
// that the blocks can pass whole records over valid/ready handshakes.
//
// Taken from the paper: the slot sizes of the packet buffer allocator (128 and
// 1536 bytes), the 512 KiB L2 packet memory, the U32-style rule fields (index,
// mask, start, end), the AND/OR combination of three rules plus a fourth
// end-of-message rule, and the HER contents (message ID, end-of-message flag,
// packet address and size, handler addresses, handler and host memory regions).
// Own choices: all bus widths (512-bit data, 64-bit AXI addresses, 32-bit
// AXI-Lite), the number of rulesets/contexts (4) and the field widths.
package fpspin_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned DATA_W    = 512;          // AXI-Stream and AXI4 data
  localparam int unsigned KEEP_W    = DATA_W / 8;   // bytes per beat
  localparam int unsigned BEAT_B    = KEEP_W;       // 64
  localparam int unsigned AXI_ADDR_W = 64;
  localparam int unsigned AXI_ID_W  = 4;
  localparam int unsigned LEN_W     = 16;           // packet / transfer length in bytes
  localparam int unsigned AXIL_ADDR_W = 16;

  // ------------------------------------------------- packet buffer (Table I)
  localparam int unsigned PKT_BUF_SIZE = 512 * 1024;
  localparam int unsigned SMALL_SLOT_B = 128;
  localparam int unsigned LARGE_SLOT_B = 1536;

  // ------------------------------------------------------------- matching
  localparam int unsigned NUM_RULESETS  = 4;
  localparam int unsigned RULES_PER_SET = 4;        // r[0..2] combined, r[3] = end of message
  localparam int unsigned RULE_IDX_W    = 4;        // word index into the first 64 bytes
  localparam int unsigned CTX_W         = $clog2(NUM_RULESETS);

  typedef enum logic [0:0] {
    MODE_AND = 1'b0,
    MODE_OR  = 1'b1
  } match_mode_e;

  typedef struct packed {
    logic [RULE_IDX_W-1:0] idx;    // selects bytes 4*idx .. 4*idx+3 (network order)
    logic [31:0]           mask;
    logic [31:0]           start;
    logic [31:0]           stop;   // the paper's "end" value
  } match_rule_t;

  typedef struct packed {
    match_mode_e                   mode;
    match_rule_t [RULES_PER_SET-1:0] rule;
  } ruleset_t;

  // -------------------------------------------------------------- streams
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [KEEP_W-1:0] keep;
    logic              last;
  } axis_beat_t;

  // Packet metadata handed from the matcher to allocator, DMA and HER generator.
  typedef struct packed {
    logic [CTX_W-1:0] ctx;       // execution context = index of matching ruleset
    logic [31:0]      msgid;
    logic             eom;       // end-of-message rule hit
    logic [LEN_W-1:0] len;       // bytes
    logic [31:0]      addr;      // L2 packet buffer address (set by the allocator)
  } pkt_meta_t;

  // Per-execution-context HER fields written by the host.
  typedef struct packed {
    logic [31:0] handler_mem_addr;
    logic [31:0] handler_mem_size;
    logic [63:0] host_mem_addr;
    logic [31:0] host_mem_size;
    logic [31:0] hh_addr;
    logic [31:0] hh_size;
    logic [31:0] ph_addr;
    logic [31:0] ph_size;
    logic [31:0] th_addr;
    logic [31:0] th_size;
  } her_ctx_t;

  // Handler execution request to the PsPIN scheduler.
  typedef struct packed {
    logic [31:0]      msgid;
    logic             eom;
    logic [31:0]      pkt_addr;
    logic [LEN_W-1:0] pkt_size;
    her_ctx_t         ctx;
  } her_t;

  // Completion notification from PsPIN: the packet buffer may be freed.
  typedef struct packed {
    logic [31:0]      pkt_addr;
    logic [LEN_W-1:0] pkt_size;
    logic [31:0]      msgid;
  } feedback_t;

  // Send command from a handler (spin_send_packet) and its completion.
  localparam int unsigned EG_TAG_W = 8;
  typedef struct packed {
    logic [31:0]         addr;
    logic [LEN_W-1:0]    len;
    logic [EG_TAG_W-1:0] tag;
  } egress_cmd_t;

  // ----------------------------------------------------------------- AXI4
  typedef enum logic [1:0] {
    BURST_FIXED = 2'b00,
    BURST_INCR  = 2'b01,
    BURST_WRAP  = 2'b10
  } axi_burst_e;

  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } axi_resp_e;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_ADDR_W-1:0] addr;
    logic [7:0]            len;    // beats - 1
    logic [2:0]            size;   // log2(bytes per beat)
    axi_burst_e            burst;
  } axi_ax_t;

  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [KEEP_W-1:0] strb;
    logic              last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    axi_resp_e           resp;
  } axi_b_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [DATA_W-1:0]   data;
    axi_resp_e           resp;
    logic                last;
  } axi_r_t;

  // ---------------------------------------------- Corundum-style DMA commands
  localparam int unsigned DMA_RAM_ADDR_W = 12;       // 4 KiB bounce buffer
  localparam int unsigned DMA_TAG_W      = 8;
  localparam int unsigned DMA_RAM_WORDS  = (1 << DMA_RAM_ADDR_W) / BEAT_B;   // 64
  localparam int unsigned DMA_RAM_WORD_AW = $clog2(DMA_RAM_WORDS);

  typedef struct packed {
    logic [63:0]               dma_addr;   // host (PCIe) address
    logic [DMA_RAM_ADDR_W-1:0] ram_addr;   // byte address in the bounce buffer
    logic [LEN_W-1:0]          len;        // bytes
    logic [DMA_TAG_W-1:0]      tag;
  } dma_desc_t;

  typedef struct packed {
    logic [DMA_TAG_W-1:0] tag;
    logic [3:0]           error;
  } dma_status_t;

  // ------------------------------------------------------------ utilities
  // Number of 64-byte beats needed for len bytes (len >= 1).
  function automatic logic [LEN_W-1:0] beats_of(input logic [LEN_W-1:0] len);
    return (len + LEN_W'(BEAT_B - 1)) >> $clog2(BEAT_B);
  endfunction

  // tkeep of the last beat of a packet of len bytes.
  function automatic logic [KEEP_W-1:0] last_keep(input logic [LEN_W-1:0] len);
    logic [$clog2(KEEP_W)-1:0] rem;
    rem = len[$clog2(KEEP_W)-1:0];
    return (rem == 0) ? '1 : ~({KEEP_W{1'b1}} << rem);
  endfunction

  // Number of set bits in a tkeep (contiguous from bit 0 on a packet's last beat).
  function automatic logic [$clog2(KEEP_W):0] keep_count(input logic [KEEP_W-1:0] keep);
    logic [$clog2(KEEP_W):0] n;
    n = '0;
    for (int i = 0; i < KEEP_W; i++) n += {{$clog2(KEEP_W){1'b0}}, keep[i]};
    return n;
  endfunction

endpackage
