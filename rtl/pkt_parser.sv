// pkt_parser: front of a Paxos pipeline.
//
// Takes a frame on a byte-enabled word stream (byte 0 of the frame in
// data[7:0], keep marks valid bytes, last marks the final word), copies every
// word into the packet buffer, and collects the first 86 bytes (Ethernet,
// IPv4, UDP and the Paxos header). As soon as the word holding byte 85 has
// arrived, or the frame ends earlier, it pushes one parsed_t record for the
// frame: whether it is a Paxos message and, if so, its header fields and UDP
// checksum. Every frame, Paxos or not, produces exactly one record, so the
// deparser can pair records and frames in order.
//
// A frame counts as Paxos when it is IPv4 (ethertype 0x0800) without options,
// carries UDP, is addressed to PAXOS_UDP_PORT and is at least 86 bytes long.
// The header placement behind UDP follows the paper; the port number, the
// no-options restriction and the bus format are this design's choices.
//
// Timing: one word per cycle. The input stalls (s_ready low) only when the
// packet buffer is full, or when a record is due and the record queue is
// full. The record leaves in the same cycle as the word that completes it.
// The buffer write port (w_data, w_keep, w_last) carries the input word
// unchanged, since the whole frame is kept for the deparser.
module pkt_parser
  import caans_pkg::*;
#(
  parameter int          DATA_W         = 64,
  parameter logic [15:0] PAXOS_UDP_PORT = DEFAULT_PAXOS_PORT
) (
  input  logic                clk,
  input  logic                rst_n,
  // frame in
  input  logic [DATA_W-1:0]   s_data,
  input  logic [DATA_W/8-1:0] s_keep,
  input  logic                s_last,
  input  logic                s_valid,
  output logic                s_ready,
  // words to the packet buffer
  output logic                w_push,
  output logic [DATA_W-1:0]   w_data,
  output logic [DATA_W/8-1:0] w_keep,
  output logic                w_last,
  input  logic                w_full,
  // one record per frame
  output logic                p_push,
  output parsed_t             p_rec,
  input  logic                p_full
);
  localparam int BYTES = DATA_W / 8;

  logic [HDR_END*8-1:0] hb_q, hb_d;      // header bytes collected so far
  logic [7:0]           wcnt_q;          // word index within the frame (saturating)
  logic [15:0]          nbytes_q;        // bytes seen before this word (saturating)
  logic                 rec_sent_q;      // record of this frame already pushed
  logic [15:0]          nbytes_d;
  logic                 rec_due, xfer;

  // Overlay the current word onto the collected header bytes.
  always_comb begin
    hb_d = hb_q;
    for (int i = 0; i < HDR_END; i++)
      if (int'(wcnt_q) == i / BYTES && s_keep[i % BYTES])
        hb_d[8*i +: 8] = s_data[8*(i % BYTES) +: 8];
  end

  always_comb begin
    nbytes_d = nbytes_q;
    for (int b = 0; b < BYTES; b++)
      if (s_keep[b] && nbytes_d != 16'hFFFF) nbytes_d = nbytes_d + 16'd1;
  end

  assign rec_due = !rec_sent_q && (s_last || nbytes_d >= 16'(HDR_END));
  assign s_ready = !w_full && !(rec_due && p_full);
  assign xfer    = s_valid && s_ready;

  assign w_push = xfer;
  assign w_data = s_data;
  assign w_keep = s_keep;
  assign w_last = s_last;

  assign p_push = xfer && rec_due;

  always_comb begin
    logic [15:0] etype, dport;
    etype = {hb_d[8*ETH_TYPE_OFF +: 8], hb_d[8*(ETH_TYPE_OFF+1) +: 8]};
    dport = {hb_d[8*UDP_DPORT_OFF +: 8], hb_d[8*(UDP_DPORT_OFF+1) +: 8]};
    p_rec.is_paxos = (nbytes_d >= 16'(HDR_END))
                  && (etype == 16'h0800)
                  && (hb_d[8*IP_VIHL_OFF +: 8] == 8'h45)
                  && (hb_d[8*IP_PROTO_OFF +: 8] == 8'd17)
                  && (dport == PAXOS_UDP_PORT);
    p_rec.udp_csum = {hb_d[8*UDP_CSUM_OFF +: 8], hb_d[8*(UDP_CSUM_OFF+1) +: 8]};
    p_rec.hdr      = hdr_from_bytes(hb_d);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hb_q       <= '0;
      wcnt_q     <= '0;
      nbytes_q   <= '0;
      rec_sent_q <= 1'b0;
    end else if (xfer) begin
      if (s_last) begin
        hb_q       <= '0;
        wcnt_q     <= '0;
        nbytes_q   <= '0;
        rec_sent_q <= 1'b0;
      end else begin
        hb_q       <= hb_d;
        wcnt_q     <= (wcnt_q == 8'hFF) ? wcnt_q : wcnt_q + 8'd1;
        nbytes_q   <= nbytes_d;
        rec_sent_q <= rec_sent_q || rec_due;
      end
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             s_valid && !s_ready |=> s_valid && $stable(s_data) && $stable(s_last));
endmodule
