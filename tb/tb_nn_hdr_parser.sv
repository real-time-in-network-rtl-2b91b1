// tb_nn_hdr_parser -- self-checking test of the header parser.
//
// Builds frames for every header combination (IPv4 with and without options,
// IPv6, UDP, TCP with and without options) and checks the decoded NN header
// fields and offsets against the values the frame was built with; then checks
// that a wrong port, a non-IP frame, a non-UDP/TCP protocol and a frame too
// short for its features are not taken for NN packets.
module tb_nn_hdr_parser;
  import nn_pkg::*;
  import tb_pkt_pkg::*;
  localparam int PB = 512;

  logic [8*PB-1:0] pkt;
  logic [9:0]      len;
  logic            is_nn, is_ipv4, is_udp;
  nn_hdr_t         hdr;
  logic [8:0]      l4_off, nn_off, feat_off, csum_off;
  int checks = 0, failures = 0;

  nn_hdr_parser #(.PKT_BYTES(PB)) dut (.*);

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic load(const ref bytes_t b, input int l);
    pkt = '0;
    foreach (b[i]) pkt[8*i +: 8] = b[i];
    len = 10'(l);
    #1;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pkt_cfg_t c;
    bytes_t b;
    logic [31:0] f[];
    int exp_l4, exp_nn;
    f = new[16];
    foreach (f[i]) f[i] = $urandom;
    for (int v6 = 0; v6 < 2; v6++)
      for (int tcp = 0; tcp < 2; tcp++)
        for (int opt = 0; opt < 2; opt++) begin
          c = '{ipv6: v6, tcp: tcp, udp_zero_csum: 0, ip_opt_words: (v6 ? 0 : 2 * opt),
                tcp_opt_words: (tcp ? 3 * opt : 0), dport: NN_PORT_DEFAULT,
                model_id: 16'(16'hA000 + 4 * v6 + 2 * tcp + opt), nfeat: 5 + opt, nout: 2,
                scale: 16'd16, flags: 8'h05, payload: 10};
          b = build_pkt(c, f);
          load(b, b.size());
          exp_l4 = v6 ? 54 : 14 + 4 * (5 + c.ip_opt_words);
          exp_nn = exp_l4 + (tcp ? 4 * (5 + c.tcp_opt_words) : 8);
          chk(is_nn, $sformatf("is_nn v6=%0d tcp=%0d opt=%0d", v6, tcp, opt));
          chk(is_ipv4 == !v6 && is_udp == !tcp, "ip/l4 kind");
          chk(32'(l4_off) == exp_l4, $sformatf("l4_off %0d exp %0d", l4_off, exp_l4));
          chk(32'(nn_off) == exp_nn, $sformatf("nn_off %0d exp %0d", nn_off, exp_nn));
          chk(32'(feat_off) == exp_nn + 7, "feat_off");
          chk(32'(csum_off) == exp_l4 + (tcp ? 16 : 6), "csum_off");
          chk(hdr.model_id == c.model_id && hdr.feat_cnt == 8'(c.nfeat) && hdr.out_cnt == 8'd2 &&
              hdr.scale == 16'd16 && hdr.flags == 8'h05, "header fields");
          // truncated: one byte short of the last feature
          load(b, exp_nn + 7 + 4 * c.nfeat - 1);
          chk(!is_nn, "truncated frame rejected");
        end
    // wrong port
    c.ipv6 = 0; c.tcp = 0; c.ip_opt_words = 0; c.tcp_opt_words = 0; c.dport = 16'd53;
    b = build_pkt(c, f); load(b, b.size());
    chk(!is_nn, "wrong port rejected");
    // non-IP ethertype
    c.dport = NN_PORT_DEFAULT;
    b = build_pkt(c, f); b[12] = 8'h08; b[13] = 8'h06; load(b, b.size());
    chk(!is_nn, "ARP rejected");
    // ICMP protocol
    b = build_pkt(c, f); b[23] = 8'd1; load(b, b.size());
    chk(!is_nn, "ICMP rejected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
