// udp_csum_update: incremental UDP checksum update for a rewritten Paxos header.
//
// When a device rewrites header fields in place, the UDP checksum that the
// proposer computed no longer matches. Instead of summing the whole datagram
// again, the new checksum is derived from the old one and the 16-bit words
// that changed (RFC 1624, eqn. 3):  HC' = ~(~HC + sum(~m) + sum(m')).
// All 22 header words are folded in; unchanged words cancel out. The Paxos
// header starts at an even offset in the UDP datagram, so its 16-bit words
// line up with the checksum's words. A received checksum of 0 means the
// sender did not use one, and it stays 0. A computed result of 0 is sent as
// 0xFFFF, as UDP requires.
//
// Purely combinational. The paper only says that proposers rely on the UDP
// checksum; keeping it valid this way is this design's choice.
module udp_csum_update
  import caans_pkg::*;
(
  input  logic [15:0] old_csum,
  input  paxos_hdr_t  old_hdr,
  input  paxos_hdr_t  new_hdr,
  output logic [15:0] new_csum
);
  localparam int NW = PAXOS_HDR_W / 16;

  always_comb begin
    logic [PAXOS_HDR_W-1:0] o, n;
    logic [31:0] acc;
    logic [15:0] s;
    o   = old_hdr;
    n   = new_hdr;
    acc = {16'h0, ~old_csum};
    for (int i = 0; i < NW; i++) begin
      acc = acc + {16'h0, ~o[16*i +: 16]} + {16'h0, n[16*i +: 16]};
    end
    // fold carries back in (twice is enough for 45 terms)
    acc = {16'h0, acc[15:0]} + {16'h0, acc[31:16]};
    acc = {16'h0, acc[15:0]} + {16'h0, acc[31:16]};
    s   = ~acc[15:0];
    if (old_csum == 16'h0)      new_csum = 16'h0;
    else if (s == 16'h0)        new_csum = 16'hFFFF;
    else                        new_csum = s;
  end
endmodule
