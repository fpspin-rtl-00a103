// pspin_axis_arb: two-input AXI-Stream multiplexer that arbitrates per packet,
// used to merge packets sent by PsPIN handlers into Corundum's transmit stream.
// The paper uses Corundum's axis_arb_mux for this; this is a minimal
// equivalent of the same job.
//
// When idle it grants an input with a valid beat, round-robin (after input i
// has sent a packet, the other input has priority next). The grant is held
// until the granted input's last beat has been accepted, so packets are never
// interleaved. The granted beat passes combinationally (no added latency);
// arbitration itself costs no cycle either.
module pspin_axis_arb
  import fpspin_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  axis_beat_t s0,
  input  logic       s0_valid,
  output logic       s0_ready,
  input  axis_beat_t s1,
  input  logic       s1_valid,
  output logic       s1_ready,
  output axis_beat_t m,
  output logic       m_valid,
  input  logic       m_ready
);
  logic busy, sel_q, prio;   // prio: input preferred at the next arbitration
  logic sel;

  always_comb begin
    if (busy)                     sel = sel_q;
    else if (s0_valid && s1_valid) sel = prio;
    else                          sel = s1_valid;
    m        = sel ? s1 : s0;
    m_valid  = sel ? s1_valid : s0_valid;
    s0_ready = m_ready && !sel;
    s1_ready = m_ready && sel;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      sel_q <= 1'b0;
      prio  <= 1'b0;
    end else if (m_valid && m_ready) begin
      busy  <= !m.last;
      sel_q <= sel;
      if (m.last) prio <= !sel;
    end
  end
endmodule
