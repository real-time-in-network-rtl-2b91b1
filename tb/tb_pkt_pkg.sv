// tb_pkt_pkg -- packet construction and checking helpers for the testbenches.
//
// build_pkt makes an Ethernet frame with an IPv4 or IPv6 header, a UDP or TCP
// header, the 7-byte NN encapsulation header, the features (big-endian) and a
// payload of pseudo-random bytes, with a correct IPv4 header checksum and a
// correct L4 checksum (computed over the pseudo-header and the segment).
// l4_csum_ok recomputes the L4 checksum of a frame from scratch.
package tb_pkt_pkg;

  typedef byte unsigned bytes_t[$];

  typedef struct {
    bit          ipv6;
    bit          tcp;
    bit          udp_zero_csum;  // IPv4/UDP only: send checksum 0
    int          ip_opt_words;   // IPv4 options, in 32-bit words
    int          tcp_opt_words;  // TCP options, in 32-bit words
    logic [15:0] dport;
    logic [15:0] model_id;
    int          nfeat;
    int          nout;
    logic [15:0] scale;
    logic [7:0]  flags;
    int          payload;
  } pkt_cfg_t;

  function automatic void put16(ref bytes_t b, input logic [15:0] v);
    b.push_back(v[15:8]); b.push_back(v[7:0]);
  endfunction

  function automatic void put32(ref bytes_t b, input logic [31:0] v);
    put16(b, v[31:16]); put16(b, v[15:0]);
  endfunction

  // One's-complement sum of bytes[from .. from+n-1], 16-bit words big-endian.
  function automatic int unsigned ones_sum(const ref bytes_t b, input int from, input int n);
    int unsigned s = 0;
    for (int i = 0; i < n; i += 2) begin
      s += 32'({b[from + i], (i + 1 < n) ? b[from + i + 1] : 8'h00});
      s = (s & 32'hFFFF) + (s >> 16);
    end
    return s;
  endfunction

  function automatic logic [15:0] fold(input int unsigned s);
    while ((s >> 16) != 0) s = (s & 32'hFFFF) + (s >> 16);
    return 16'(s);
  endfunction

  // L4 offset of a frame built here
  function automatic int l4_offset(const ref bytes_t b);
    if ({b[12], b[13]} == 16'h86DD) return 54;
    return 14 + 4 * int'(b[14][3:0]);
  endfunction

  // Pseudo-header + segment sum (including the checksum field as stored).
  function automatic logic [15:0] l4_sum(const ref bytes_t b);
    int l4, seglen;
    int unsigned s;
    bit v6;
    byte unsigned proto;
    v6 = ({b[12], b[13]} == 16'h86DD);
    l4 = l4_offset(b);
    seglen = b.size() - l4;
    if (v6) begin
      proto = b[20];
      s = ones_sum(b, 22, 32);
    end else begin
      proto = b[23];
      s = ones_sum(b, 26, 8);
    end
    s += 32'(proto);
    s += 32'(seglen);
    s += ones_sum(b, l4, seglen);
    return fold(s);
  endfunction

  function automatic bit l4_csum_ok(const ref bytes_t b);
    int l4;
    bit udp;
    l4  = l4_offset(b);
    udp = ((({b[12], b[13]} == 16'h86DD) ? b[20] : b[23]) == 8'd17);
    if (udp && {b[12], b[13]} == 16'h0800 && {b[l4 + 6], b[l4 + 7]} == 16'h0000) return 1'b1;
    return l4_sum(b) == 16'hFFFF;
  endfunction

  function automatic bytes_t build_pkt(input pkt_cfg_t c, input logic [31:0] feats[]);
    bytes_t b, seg;
    int l4, csum_at, iphl;
    logic [15:0] cs;
    // L4 segment
    put16(seg, 16'd5000);             // source port
    put16(seg, c.dport);
    if (c.tcp) begin
      put32(seg, 32'h0102_0304);      // seq
      put32(seg, 32'h0);              // ack
      seg.push_back(8'((5 + c.tcp_opt_words) << 4));
      seg.push_back(8'h18);           // PSH, ACK
      put16(seg, 16'hFFFF);           // window
      put16(seg, 16'h0);              // checksum
      put16(seg, 16'h0);              // urgent
      for (int i = 0; i < 4 * c.tcp_opt_words; i++) seg.push_back(8'h01);  // NOP
    end else begin
      put16(seg, 16'h0);              // length, patched below
      put16(seg, 16'h0);              // checksum
    end
    put16(seg, c.model_id);
    seg.push_back(8'(c.nfeat));
    seg.push_back(8'(c.nout));
    put16(seg, c.scale);
    seg.push_back(c.flags);
    for (int i = 0; i < c.nfeat; i++) put32(seg, feats[i]);
    for (int i = 0; i < c.payload; i++) seg.push_back(8'($urandom));
    if (!c.tcp) begin
      seg[4] = 8'(seg.size() >> 8); seg[5] = 8'(seg.size());
    end
    // Ethernet
    put32(b, 32'h0200_0000); put16(b, 16'h0001);   // dst MAC
    put32(b, 32'h0200_0000); put16(b, 16'h0002);   // src MAC
    put16(b, c.ipv6 ? 16'h86DD : 16'h0800);
    if (c.ipv6) begin
      put32(b, 32'h6000_0000);
      put16(b, 16'(seg.size()));
      b.push_back(c.tcp ? 8'd6 : 8'd17);
      b.push_back(8'd64);
      for (int i = 0; i < 16; i++) b.push_back(8'(8'h20 + i));   // src
      for (int i = 0; i < 16; i++) b.push_back(8'(8'h40 + i));   // dst
    end else begin
      iphl = 5 + c.ip_opt_words;
      b.push_back(8'(8'h40 | iphl));
      b.push_back(8'h00);
      put16(b, 16'(4 * iphl + seg.size()));
      put16(b, 16'h1234); put16(b, 16'h4000);
      b.push_back(8'd64);
      b.push_back(c.tcp ? 8'd6 : 8'd17);
      put16(b, 16'h0);
      put32(b, 32'h0A00_0001); put32(b, 32'h0A00_0002);
      for (int i = 0; i < 4 * c.ip_opt_words; i++) b.push_back(8'h01);
      cs = ~fold(ones_sum(b, 14, 4 * iphl));
      b[24] = cs[15:8]; b[25] = cs[7:0];
    end
    l4 = b.size();
    foreach (seg[i]) b.push_back(seg[i]);
    csum_at = l4 + (c.tcp ? 16 : 6);
    if (!(c.udp_zero_csum && !c.tcp && !c.ipv6)) begin
      cs = ~l4_sum(b);
      if (!c.tcp && cs == 16'h0000) cs = 16'hFFFF;
      b[csum_at] = cs[15:8]; b[csum_at + 1] = cs[7:0];
    end
    return b;
  endfunction

endpackage
