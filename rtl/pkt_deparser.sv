// pkt_deparser: back of a Paxos pipeline.
//
// Reads frames from the packet buffer and pairs each with the verdict the
// match/action stage produced for it (one verdict per frame, in order). No
// word of a frame leaves before its verdict is present. A frame whose verdict
// says drop is read out of the buffer and discarded. Otherwise it is sent on
// unchanged, except that with rewrite set the UDP checksum bytes (40..41) and
// the 44 Paxos header bytes (42..85) are replaced by the verdict's values as
// the words pass by. The frame length never changes, as network hardware can
// only modify fields of the packet it is processing.
//
// Timing: one word per cycle when the output is ready; frames follow each
// other without idle cycles once their verdicts are available. m_valid does
// not depend on m_ready. The bus format is this design's choice.
// m_keep and m_last are the buffered input's own bits; only m_data changes.
module pkt_deparser
  import caans_pkg::*;
#(
  parameter int DATA_W = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  // packet buffer head
  input  logic                w_valid,
  input  logic [DATA_W-1:0]   w_data,
  input  logic [DATA_W/8-1:0] w_keep,
  input  logic                w_last,
  output logic                w_pop,
  // verdict queue head
  input  logic                v_valid,
  input  verdict_t            v_verdict,
  output logic                v_pop,
  // frame out
  output logic [DATA_W-1:0]   m_data,
  output logic [DATA_W/8-1:0] m_keep,
  output logic                m_last,
  output logic                m_valid,
  input  logic                m_ready
);
  localparam int BYTES = DATA_W / 8;

  logic [7:0] wcnt_q;      // word index within the frame (saturating)
  logic       go, adv;

  assign go      = w_valid && v_valid;
  assign m_valid = go && !v_verdict.drop;
  assign adv     = go && (v_verdict.drop || m_ready);
  assign w_pop   = adv;
  assign v_pop   = adv && w_last;
  assign m_keep  = w_keep;
  assign m_last  = w_last;

  always_comb begin
    m_data = w_data;
    if (v_verdict.rewrite) begin
      for (int i = REWRITE_OFF; i < HDR_END; i++) begin
        if (int'(wcnt_q) == i / BYTES) begin
          if (i == UDP_CSUM_OFF)          m_data[8*(i % BYTES) +: 8] = v_verdict.udp_csum[15:8];
          else if (i == UDP_CSUM_OFF + 1) m_data[8*(i % BYTES) +: 8] = v_verdict.udp_csum[7:0];
          else                            m_data[8*(i % BYTES) +: 8] = hdr_byte(v_verdict.hdr, i - PAXOS_OFF);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)          wcnt_q <= '0;
    else if (adv) begin
      if (w_last)        wcnt_q <= '0;
      else if (wcnt_q != 8'hFF) wcnt_q <= wcnt_q + 8'd1;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && $stable(m_data) && $stable(m_last));
endmodule
