// nn_hdr_parser -- locates the NN encapsulation header inside a stored packet.
//
// Walks the header stack of the published packet format: Ethernet, then IPv4
// or IPv6, then UDP or TCP, then the 7-byte NN encapsulation header (model ID,
// feature count, output count, scale, flags), then feature_cnt 32-bit input
// features. It reports where each part starts and whether the packet is an NN
// packet at all.
//
// A packet is an NN packet when: the EtherType is IPv4 (0x0800) or IPv6
// (0x86DD); the IP protocol / next header is UDP (17) or TCP (6); the L4
// destination port equals NN_PORT; and the received length covers the NN
// header and all its features. Everything else passes through the pipeline
// untouched.
//
// The published design names this header stack but not how NN packets are
// recognised. The port match, the absence of VLAN tags and IPv6 extension
// headers, and the length check are this implementation's choices. IPv4
// options (IHL > 5) and TCP options (data offset > 5) are honoured.
//
// Interface: pkt is the flat packet store (byte b at pkt[8b+7:8b]), len the
// received length. All outputs are byte offsets from the start of the frame.
// csum_off is the L4 checksum field. Timing: purely combinational.
module nn_hdr_parser
  import nn_pkg::*;
#(
  parameter int unsigned PKT_BYTES = 2048,
  parameter logic [15:0] NN_PORT   = NN_PORT_DEFAULT,
  localparam int unsigned LEN_W    = $clog2(PKT_BYTES + 1),
  localparam int unsigned OFF_W    = $clog2(PKT_BYTES)
) (
  input  logic [8*PKT_BYTES-1:0] pkt,
  input  logic [LEN_W-1:0]       len,
  output logic                   is_nn,
  output logic                   is_ipv4,
  output logic                   is_udp,
  output nn_hdr_t                hdr,
  output logic [OFF_W-1:0]       l4_off,
  output logic [OFF_W-1:0]       nn_off,
  output logic [OFF_W-1:0]       feat_off,
  output logic [OFF_W-1:0]       csum_off
);

  function automatic logic [7:0] byte_at(input logic [8*PKT_BYTES-1:0] p, input int unsigned off);
    if (off < PKT_BYTES) return p[8*off +: 8];
    else                 return 8'h00;
  endfunction

  logic [15:0]     ethertype, dport;
  logic [7:0]      proto, vihl, tcp_doff;
  logic            ip_ok, l4_ok;
  int unsigned     l4o, l4len, nno, need;

  always_comb begin
    ethertype = {byte_at(pkt, 12), byte_at(pkt, 13)};
    is_ipv4   = (ethertype == ETH_IPV4);
    ip_ok     = 1'b0;
    proto     = '0;
    l4o       = 0;
    vihl      = byte_at(pkt, 14);
    if (ethertype == ETH_IPV4) begin
      ip_ok = (vihl[7:4] == 4'd4) && (vihl[3:0] >= 4'd5);
      proto = byte_at(pkt, 23);
      l4o   = 14 + 4 * int'(vihl[3:0]);
    end else if (ethertype == ETH_IPV6) begin
      ip_ok = (vihl[7:4] == 4'd6);
      proto = byte_at(pkt, 20);
      l4o   = 14 + 40;
    end

    is_udp = (proto == IP_UDP);
    l4_ok  = ip_ok && (proto == IP_UDP || proto == IP_TCP);
    dport  = {byte_at(pkt, l4o + 2), byte_at(pkt, l4o + 3)};
    tcp_doff = byte_at(pkt, l4o + 12);
    if (is_udp) begin
      l4len = 8;
      csum_off = OFF_W'(l4o + 6);
    end else begin
      l4len = 4 * int'(tcp_doff[7:4]);
      csum_off = OFF_W'(l4o + 16);
    end
    nno  = l4o + l4len;

    hdr.model_id = {byte_at(pkt, nno),     byte_at(pkt, nno + 1)};
    hdr.feat_cnt =  byte_at(pkt, nno + 2);
    hdr.out_cnt  =  byte_at(pkt, nno + 3);
    hdr.scale    = {byte_at(pkt, nno + 4), byte_at(pkt, nno + 5)};
    hdr.flags    =  byte_at(pkt, nno + 6);

    need  = nno + NN_HDR_BYTES + 4 * int'(hdr.feat_cnt);
    is_nn = l4_ok && (dport == NN_PORT) && (l4len >= 8) && (need <= int'(len));

    l4_off   = OFF_W'(l4o);
    nn_off   = OFF_W'(nno);
    feat_off = OFF_W'(nno + NN_HDR_BYTES);
  end

endmodule
