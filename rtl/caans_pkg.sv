// caans_pkg: types and constants shared by the in-network Paxos pipelines.
//
// A consensus message is an ordinary UDP datagram whose payload starts with a
// 44-byte Paxos header. The header carries the union of the fields of every
// Paxos message, so a device can turn one message into the next by rewriting
// fields in place instead of building a new packet. Behind the header follows
// the application payload.
//
// Frame layout (byte offsets from the first byte of the Ethernet header,
// IPv4 without options):
//   0..13  Ethernet   (ethertype at 12..13)
//   14..33 IPv4       (version/IHL at 14, protocol at 23)
//   34..41 UDP        (destination port at 36..37, checksum at 40..41)
//   42..85 Paxos header, all fields big-endian:
//            msgtype 16 b | inst 32 b | rnd 16 b | vrnd 16 b | swid 16 b | value 256 b
//   86..   payload
// The 44-byte size, the field names and their meanings follow the paper. The
// paper's own field widths were not available, so the widths above are this
// design's choice, picked to fill exactly 44 bytes. The message type codes
// and the UDP port are also this design's choice.
package caans_pkg;

  localparam int PAXOS_HDR_BYTES = 44;
  localparam int PAXOS_HDR_W     = PAXOS_HDR_BYTES * 8;   // 352
  localparam int VALUE_W         = 256;
  localparam int ETH_TYPE_OFF    = 12;
  localparam int IP_VIHL_OFF     = 14;
  localparam int IP_PROTO_OFF    = 23;
  localparam int UDP_DPORT_OFF   = 36;
  localparam int UDP_CSUM_OFF    = 40;
  localparam int PAXOS_OFF       = 42;
  localparam int HDR_END         = PAXOS_OFF + PAXOS_HDR_BYTES;  // 86: bytes a parser must see
  localparam int REWRITE_OFF     = UDP_CSUM_OFF;                 // first byte a deparser may change

  localparam logic [15:0] DEFAULT_PAXOS_PORT = 16'h8888;

  typedef enum logic [15:0] {
    MSG_REQUEST = 16'd0,   // proposer -> coordinator
    MSG_1A      = 16'd1,   // prepare
    MSG_1B      = 16'd2,   // promise
    MSG_2A      = 16'd3,   // accept request
    MSG_2B      = 16'd4    // vote, acceptor -> learners
  } msgtype_e;

  typedef struct packed {
    logic [15:0]        msgtype;
    logic [31:0]        inst;
    logic [15:0]        rnd;
    logic [15:0]        vrnd;
    logic [15:0]        swid;
    logic [VALUE_W-1:0] value;
  } paxos_hdr_t;

  // What the parser hands to a match/action unit, one record per frame.
  typedef struct packed {
    logic        is_paxos;   // UDP to the Paxos port and long enough to hold the header
    logic [15:0] udp_csum;   // checksum as received
    paxos_hdr_t  hdr;        // header as received (don't care when !is_paxos)
  } parsed_t;

  // What a match/action unit hands to the deparser, one record per frame.
  typedef struct packed {
    logic        drop;       // discard the frame
    logic        rewrite;    // overwrite header and checksum bytes
    logic [15:0] udp_csum;   // checksum to write (valid with rewrite)
    paxos_hdr_t  hdr;        // header to write (valid with rewrite)
  } verdict_t;

  // One entry of an acceptor's history.
  typedef struct packed {
    logic [15:0]        rnd;    // highest round promised or voted in
    logic [15:0]        vrnd;   // round of the vote; 0 = no vote cast yet
    logic [VALUE_W-1:0] value;  // value voted for
  } hist_entry_t;

  // Header bytes of a frame as a flat array, byte i at bits [8*i +: 8].
  function automatic paxos_hdr_t hdr_from_bytes(input logic [HDR_END*8-1:0] b);
    logic [PAXOS_HDR_W-1:0] v;
    for (int i = 0; i < PAXOS_HDR_BYTES; i++)
      v[PAXOS_HDR_W-1-8*i -: 8] = b[8*(PAXOS_OFF+i) +: 8];
    return paxos_hdr_t'(v);
  endfunction

  // Byte k (0 = first on the wire) of a header.
  function automatic logic [7:0] hdr_byte(input paxos_hdr_t h, input int k);
    logic [PAXOS_HDR_W-1:0] v;
    v = h;
    return v[PAXOS_HDR_W-1-8*k -: 8];
  endfunction

endpackage
