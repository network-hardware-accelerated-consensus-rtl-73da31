// tb_pkg: frame builders and reference checks shared by the testbenches.
//
// make_frame builds a complete Ethernet/IPv4/UDP frame carrying a Paxos
// header and payload, with a correct IPv4 header checksum and a UDP checksum
// computed from scratch over the pseudo-header and datagram. The checks
// below read fields back from a frame and recompute the UDP checksum the
// same way, so a device's incremental checksum update is compared against a
// full recomputation. Byte offsets are written out here as numbers, not
// taken from the design's package.
package tb_pkg;

  typedef logic [7:0] byte_q_t [$];

  localparam logic [15:0] PORT = 16'h8888;

  function automatic logic [15:0] ones_sum(input byte_q_t b, input int from, input int to,
                                           input logic [31:0] start);
    logic [31:0] acc;
    acc = start;
    for (int i = from; i < to; i += 2) begin
      logic [15:0] w;
      w = {b[i], (i + 1 < to) ? b[i+1] : 8'h00};
      acc = acc + 32'(w);
      acc = {16'h0, acc[15:0]} + {16'h0, acc[31:16]};
    end
    acc = {16'h0, acc[15:0]} + {16'h0, acc[31:16]};
    return acc[15:0];
  endfunction

  // UDP checksum of frame f as it should be, ignoring the stored field.
  function automatic logic [15:0] udp_csum_ref(input byte_q_t f);
    byte_q_t t;
    logic [31:0] pseudo;
    logic [15:0] ulen, s;
    t = f;
    t[40] = 8'h00;
    t[41] = 8'h00;
    ulen  = {t[38], t[39]};
    pseudo = 32'({t[26], t[27]}) + 32'({t[28], t[29]}) + 32'({t[30], t[31]}) +
             32'({t[32], t[33]}) + 32'd17 + 32'(ulen);
    s = ~ones_sum(t, 34, 34 + int'(ulen), pseudo);
    return (s == 16'h0) ? 16'hFFFF : s;
  endfunction

  function automatic byte_q_t make_frame(input logic [15:0] msgtype, input logic [31:0] inst,
                                         input logic [15:0] rnd, input logic [15:0] vrnd,
                                         input logic [15:0] swid, input logic [255:0] value,
                                         input int payload_len = 16,
                                         input logic [15:0] dport = PORT,
                                         input bit use_csum = 1);
    byte_q_t f;
    logic [15:0] iplen, ulen, c;
    ulen  = 16'(8 + 44 + payload_len);
    iplen = 16'(20) + ulen;
    f = {8'h02, 8'h00, 8'h00, 8'h00, 8'h00, 8'h02,
         8'h02, 8'h00, 8'h00, 8'h00, 8'h00, 8'h01,
         8'h08, 8'h00,
         8'h45, 8'h00, iplen[15:8], iplen[7:0], 8'h00, 8'h00, 8'h40, 8'h00,
         8'h40, 8'd17, 8'h00, 8'h00,
         8'd10, 8'd0, 8'd0, 8'd1, 8'd10, 8'd0, 8'd0, 8'd2,
         8'h12, 8'h34, dport[15:8], dport[7:0], ulen[15:8], ulen[7:0], 8'h00, 8'h00};
    f.push_back(msgtype[15:8]); f.push_back(msgtype[7:0]);
    for (int i = 3; i >= 0; i--) f.push_back(inst[8*i +: 8]);
    f.push_back(rnd[15:8]);  f.push_back(rnd[7:0]);
    f.push_back(vrnd[15:8]); f.push_back(vrnd[7:0]);
    f.push_back(swid[15:8]); f.push_back(swid[7:0]);
    for (int i = 31; i >= 0; i--) f.push_back(value[8*i +: 8]);
    for (int i = 0; i < payload_len; i++) f.push_back(8'(8'hA0 + i));
    c = ~ones_sum(f, 14, 34, 0);
    f[24] = c[15:8];
    f[25] = c[7:0];
    if (use_csum) begin
      c = udp_csum_ref(f);
      f[40] = c[15:8];
      f[41] = c[7:0];
    end
    return f;
  endfunction

  function automatic logic [15:0] get16(input byte_q_t f, input int off);
    return {f[off], f[off+1]};
  endfunction
  function automatic logic [31:0] get32(input byte_q_t f, input int off);
    return {f[off], f[off+1], f[off+2], f[off+3]};
  endfunction
  function automatic logic [255:0] get_value(input byte_q_t f);
    logic [255:0] v;
    for (int i = 0; i < 32; i++) v[255-8*i -: 8] = f[54+i];
    return v;
  endfunction
  function automatic bit csum_ok(input byte_q_t f);
    logic [15:0] c;
    c = get16(f, 40);
    return (c == 16'h0) || (c == udp_csum_ref(f));
  endfunction

  // Number of bytes that differ outside the Paxos header and UDP checksum.
  function automatic int diff_outside_hdr(input byte_q_t a, input byte_q_t b);
    int n;
    n = 0;
    if (a.size() != b.size()) return 1000;
    for (int i = 0; i < a.size(); i++)
      if ((i < 40 || i >= 86) && a[i] != b[i]) n++;
    return n;
  endfunction

  function automatic byte_q_t set16(input byte_q_t f, input int off, input logic [15:0] v);
    byte_q_t t;
    t = f;
    t[off]   = v[15:8];
    t[off+1] = v[7:0];
    return t;
  endfunction
  function automatic byte_q_t set32(input byte_q_t f, input int off, input logic [31:0] v);
    byte_q_t t;
    t = f;
    for (int i = 0; i < 4; i++) t[off+i] = v[31-8*i -: 8];
    return t;
  endfunction
  function automatic byte_q_t set_value(input byte_q_t f, input logic [255:0] v);
    byte_q_t t;
    t = f;
    for (int i = 0; i < 32; i++) t[54+i] = v[255-8*i -: 8];
    return t;
  endfunction
  // Recompute the UDP checksum field (keeps 0 = unused).
  function automatic byte_q_t fix_csum(input byte_q_t f);
    if (get16(f, 40) == 16'h0) return f;
    return set16(f, 40, udp_csum_ref(f));
  endfunction

  // The 44 header bytes as one big-endian vector (msgtype in the top bits).
  function automatic logic [351:0] hdr_bits(input byte_q_t f);
    logic [351:0] v;
    for (int i = 0; i < 44; i++) v[351-8*i -: 8] = f[42+i];
    return v;
  endfunction
  function automatic byte_q_t put_hdr_bits(input byte_q_t f, input logic [351:0] v);
    byte_q_t t;
    t = f;
    for (int i = 0; i < 44; i++) t[42+i] = v[351-8*i -: 8];
    return t;
  endfunction

  function automatic logic [255:0] rand_value();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

endpackage
