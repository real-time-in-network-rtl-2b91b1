// nn_hdr_rewrite -- egress header fields of a packet whose features were
// replaced by inference results.
//
// Two fields change besides the feature slots: the NN header's flags byte,
// which gets FLAG_RESULT set so the receiver knows the values are results,
// and the UDP/TCP checksum, which would otherwise no longer match the
// payload. The checksum is patched incrementally (RFC 1624, HC' = ~(~HC +
// ~m + m')), so the rest of the packet never has to be summed again.
//
// The inference engine delivers sum_old / sum_new: the one's-complement sums
// of the 32-bit feature words before and after the rewrite, taken as if they
// started at an even offset. feat_odd says that the features really start at
// an odd offset from the L4 header (true for UDP and TCP, as the NN header is
// 7 bytes long), in which case their 16-bit words are byte-rotated and the
// sums are byte-swapped (one's-complement sums commute with byte swapping).
// flags_odd does the same for the flags byte.
//
// UDP over IPv4 with a zero checksum means "no checksum" and is left at zero
// (csum_we low). A computed UDP checksum of zero is sent as 0xFFFF.
//
// The published design only says that the header is replaced with an output
// format; the flag bit and the checksum patch are this implementation's.
// Timing: purely combinational.
module nn_hdr_rewrite
  import nn_pkg::*;
(
  input  logic [7:0]  flags_in,
  input  logic        flags_odd,
  input  logic [15:0] csum_in,
  input  logic        feat_odd,
  input  logic [15:0] sum_old,
  input  logic [15:0] sum_new,
  input  logic        is_ipv4,
  input  logic        is_udp,
  output logic [7:0]  flags_out,
  output logic [15:0] csum_out,
  output logic        csum_we
);

  function automatic logic [15:0] swap16(input logic [15:0] v);
    return {v[7:0], v[15:8]};
  endfunction

  logic [15:0] f_old, f_new, m_old, m_new, hc;

  always_comb begin
    flags_out = flags_in | FLAG_RESULT;
    f_old = flags_odd ? {8'h00, flags_in}  : {flags_in, 8'h00};
    f_new = flags_odd ? {8'h00, flags_out} : {flags_out, 8'h00};
    m_old = csum_add(feat_odd ? swap16(sum_old) : sum_old, f_old);
    m_new = csum_add(feat_odd ? swap16(sum_new) : sum_new, f_new);
    hc    = ~csum_add(csum_add(~csum_in, ~m_old), m_new);
    if (is_udp && hc == 16'h0000) hc = 16'hFFFF;
    csum_out = hc;
    csum_we  = !(is_udp && is_ipv4 && csum_in == 16'h0000);
  end

endmodule
