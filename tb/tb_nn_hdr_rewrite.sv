// tb_nn_hdr_rewrite -- self-checking test of the flags / checksum patch.
//
// For each header kind, builds a frame with a valid L4 checksum, replaces
// out_cnt features by random results, feeds the unit the one's-complement sums
// of the old and new feature words, applies its flags byte and checksum to the
// frame and checks that (a) the flag is set, (b) the checksum equals the one
// computed from scratch over the rewritten frame, and (c) an IPv4/UDP frame
// without checksum keeps a zero checksum.
module tb_nn_hdr_rewrite;
  import nn_pkg::*;
  import tb_pkt_pkg::*;

  logic [7:0]  flags_in, flags_out;
  logic        flags_odd, feat_odd, is_ipv4, is_udp, csum_we;
  logic [15:0] csum_in, sum_old, sum_new, csum_out;
  int checks = 0, failures = 0;

  nn_hdr_rewrite dut (.*);

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pkt_cfg_t c;
    bytes_t b, r;
    logic [31:0] f[];
    for (int t = 0; t < 200; t++) begin
      int l4, nn, fo, co, nf, no;
      logic [15:0] so, sn, full;
      nf = $urandom_range(1, 20);
      no = $urandom_range(1, nf);
      f = new[nf];
      foreach (f[i]) f[i] = $urandom;
      c = '{ipv6: t[0], tcp: t[1], udp_zero_csum: (t % 8 == 4), ip_opt_words: (t[0] ? 0 : t[3:2]),
            tcp_opt_words: t[1] ? t[4:3] : 0, dport: NN_PORT_DEFAULT, model_id: 16'(t),
            nfeat: nf, nout: no, scale: 16'd16, flags: 8'($urandom) & 8'h7F,
            payload: $urandom_range(0, 30)};
      b  = build_pkt(c, f);
      chk(l4_csum_ok(b), "built frame has a valid checksum");
      l4 = l4_offset(b);
      nn = l4 + (c.tcp ? 4 * (5 + c.tcp_opt_words) : 8);
      fo = nn + 7;
      co = l4 + (c.tcp ? 16 : 6);
      r  = b;
      so = 0; sn = 0;
      for (int j = 0; j < no; j++) begin
        logic [31:0] nv;
        nv = $urandom;
        so = csum_add(so, csum_fold32(f[j]));
        sn = csum_add(sn, csum_fold32(nv));
        for (int k = 0; k < 4; k++) r[fo + 4 * j + k] = nv[(3 - k) * 8 +: 8];
      end
      flags_in  = c.flags;
      flags_odd = 1'((nn + 6 - l4) % 2);
      feat_odd  = 1'((fo - l4) % 2);
      csum_in   = {b[co], b[co + 1]};
      sum_old   = so;
      sum_new   = sn;
      is_ipv4   = !c.ipv6;
      is_udp    = !c.tcp;
      #1;
      r[nn + 6] = flags_out;
      chk(flags_out == (c.flags | 8'h80), "result flag set");
      if (c.udp_zero_csum && !c.tcp && !c.ipv6) begin
        chk(!csum_we, "zero UDP checksum left alone");
      end else begin
        chk(csum_we, "checksum written");
        r[co] = 0; r[co + 1] = 0;
        full = ~l4_sum(r);
        if (!c.tcp && full == 16'h0000) full = 16'hFFFF;
        chk(csum_out == full, $sformatf("checksum %h exp %h (t=%0d)", csum_out, full, t));
        r[co] = csum_out[15:8]; r[co + 1] = csum_out[7:0];
        chk(l4_csum_ok(r), "rewritten frame verifies");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
