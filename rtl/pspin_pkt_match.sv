// pspin_pkt_match: the packet matching engine at the entry of the ingress
// datapath. It decides, per received packet, whether a handler is loaded for
// it (the packet then goes to PsPIN) or not (the packet goes back to the
// Corundum receive path and so to the host network stack, e.g. ARP traffic).
//
// Matching follows the iptables U32 idea described in the paper. A rule holds
// a word index I, a mask M and a range [S, E]; it hits when the 32-bit word at
// packet bytes 4I..4I+3, read in network byte order (byte 4I is the most
// significant), ANDed with M lies in S..E inclusive. A ruleset holds four
// rules: rules 0..2 are combined with AND or OR (the ruleset's mode) to decide
// the match, rule 3 marks the packet as the end of a message. Several rulesets
// are checked in parallel; the lowest-numbered matching one wins and its index
// becomes the packet's execution context. A rule with S > E never hits, which
// is how "never match" (all traffic to the host) is configured.
//
// Timing: a four-stage pipeline (register beat, evaluate rules, combine and
// select, output register), so a beat leaves four cycles after it was
// accepted, matching the four-cycle latency the paper gives for this block.
// All stages advance together when the output stage is empty or is being
// consumed. Throughput is one beat per cycle.
//
// Interface: AXI-Stream style input (beat struct + valid/ready), two outputs
// (to PsPIN ingress, to Corundum), and a metadata record (context, message ID,
// end-of-message, length) issued together with the last beat of every matched
// packet; that beat waits until both the stream and the metadata are accepted.
//
// Own choices (the paper is silent): rules may only address the first 64
// bytes (first beat, I = 0..15); four rulesets; the message ID is the 32-bit
// word at bytes 44..47, which is the Message ID field of the 10-byte SLMP
// header that follows the 2-byte flags in a UDP payload (14 + 20 + 8 bytes of
// Ethernet, IPv4 and UDP headers); the paper writes the upper bound as "S and
// M", which is read as S and E.
module pspin_pkt_match
  import fpspin_pkg::*;
#(
  parameter int unsigned MSGID_IDX = 11
) (
  input  logic       clk,
  input  logic       rst,
  input  ruleset_t [NUM_RULESETS-1:0] cfg_ruleset,

  input  axis_beat_t s_axis,
  input  logic       s_valid,
  output logic       s_ready,

  output axis_beat_t m_pspin,
  output logic       m_pspin_valid,
  input  logic       m_pspin_ready,

  output pkt_meta_t  m_meta,
  output logic       m_meta_valid,
  input  logic       m_meta_ready,

  output axis_beat_t m_host,
  output logic       m_host_valid,
  input  logic       m_host_ready
);

  typedef struct packed {
    logic       match;
    logic       eom;
    logic [CTX_W-1:0] ctx;
    logic [31:0] msgid;
  } decision_t;

  // 32-bit word I of a beat in network byte order.
  function automatic logic [31:0] word_at(input logic [DATA_W-1:0] d,
                                          input logic [RULE_IDX_W-1:0] idx);
    logic [31:0] w;
    for (int b = 0; b < 4; b++)
      w[31-8*b -: 8] = d[(int'(idx) * 4 + b) * 8 +: 8];
    return w;
  endfunction

  function automatic logic rule_hit(input logic [DATA_W-1:0] d, input match_rule_t r);
    logic [31:0] v;
    v = word_at(d, r.idx) & r.mask;
    return (v >= r.start) && (v <= r.stop);
  endfunction

  // ---------------------------------------------------------------- stages
  logic       s1_valid, s2_valid, s3_valid, s4_valid;
  axis_beat_t s1_beat, s2_beat, s3_beat, s4_beat;
  logic       s1_sop, s2_sop;
  logic [NUM_RULESETS-1:0][RULES_PER_SET-1:0] s2_hit;
  logic [31:0] s2_msgid;
  decision_t  s3_dec, s4_dec;
  logic       in_sop;             // next accepted input beat starts a packet
  logic [LEN_W-1:0] len_acc;      // bytes of the current output packet so far

  logic out_fire, advance;
  decision_t dec_new;

  // combine (stage 2 -> 3)
  always_comb begin
    dec_new       = '0;
    dec_new.msgid = s2_msgid;
    for (int rs = NUM_RULESETS - 1; rs >= 0; rs--) begin
      logic m;
      m = (cfg_ruleset[rs].mode == MODE_AND) ? &s2_hit[rs][2:0] : |s2_hit[rs][2:0];
      if (m) begin
        dec_new.match = 1'b1;
        dec_new.ctx   = CTX_W'(rs);
        dec_new.eom   = s2_hit[rs][3];
      end
    end
  end

  always_comb begin
    out_fire = 1'b0;
    if (s4_valid) begin
      if (s4_dec.match) out_fire = m_pspin_ready && (!s4_beat.last || m_meta_ready);
      else              out_fire = m_host_ready;
    end
  end
  assign advance = !s4_valid || out_fire;
  assign s_ready = advance;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid <= 1'b0;
      s2_valid <= 1'b0;
      s3_valid <= 1'b0;
      s4_valid <= 1'b0;
      in_sop   <= 1'b1;
      s3_dec   <= '0;
      s4_dec   <= '0;
    end else if (advance) begin
      // stage 1: register the input beat
      s1_valid <= s_valid;
      s1_beat  <= s_axis;
      s1_sop   <= in_sop;
      if (s_valid) in_sop <= s_axis.last;
      // stage 2: evaluate every rule of every ruleset
      s2_valid <= s1_valid;
      s2_beat  <= s1_beat;
      s2_sop   <= s1_sop;
      for (int rs = 0; rs < NUM_RULESETS; rs++)
        for (int r = 0; r < RULES_PER_SET; r++)
          s2_hit[rs][r] <= rule_hit(s1_beat.data, cfg_ruleset[rs].rule[r]);
      s2_msgid <= word_at(s1_beat.data, RULE_IDX_W'(MSGID_IDX));
      // stage 3: combine rules; later beats inherit the first beat's decision
      s3_valid <= s2_valid;
      s3_beat  <= s2_beat;
      if (s2_valid && s2_sop) s3_dec <= dec_new;
      // stage 4: output register
      s4_valid <= s3_valid;
      s4_beat  <= s3_beat;
      s4_dec   <= s3_dec;
    end
  end

  // byte count of the packet being emitted
  always_ff @(posedge clk) begin
    if (rst) len_acc <= '0;
    else if (out_fire) len_acc <= s4_beat.last ? '0 : len_acc + LEN_W'(keep_count(s4_beat.keep));
  end

  always_comb begin
    m_pspin        = s4_beat;
    m_host         = s4_beat;
    m_pspin_valid  = s4_valid && s4_dec.match && (!s4_beat.last || m_meta_ready);
    m_host_valid   = s4_valid && !s4_dec.match;
    m_meta         = '0;
    m_meta.ctx     = s4_dec.ctx;
    m_meta.msgid   = s4_dec.msgid;
    m_meta.eom     = s4_dec.eom;
    m_meta.len     = len_acc + LEN_W'(keep_count(s4_beat.keep));
    m_meta_valid   = s4_valid && s4_dec.match && s4_beat.last && m_pspin_ready;
  end

  // The rules only see the first beat, so the message ID word must be in it.
  initial assert (MSGID_IDX < BEAT_B / 4);

endmodule
