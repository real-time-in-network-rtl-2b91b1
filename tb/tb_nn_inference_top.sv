// tb_nn_inference_top -- end-to-end test of the inference pipeline at its
// default sizes (2048-byte packets, 8 model slots, up to 255 features and 255
// outputs, 8 MAC lanes).
//
// The control plane loads seven models: sigmoid of order 1, 3 and 5, ReLU,
// leaky ReLU, a linear regression with a non-zero encoding offset, and a
// full-size 255-feature x 255-output layer. A stream of frames (IPv4/IPv6,
// UDP/TCP, with and without options, one UDP frame without checksum) is sent
// with random gaps while the egress applies random back-pressure. Each frame
// is predicted independently: for an NN frame with a known model the first
// out_cnt features are replaced by act(((sum (w-b)*x) >> s) + bias - b) from
// a 64-bit integer model, the result flag is set and the L4 checksum is
// recomputed from scratch; frames that are not NN frames, name an unknown
// model or carry a bad output count must come out unchanged; a frame longer
// than the buffer must vanish. Egress frames are compared byte for byte, the
// statistics counters are checked, and the latency from the last ingress beat
// to the first egress beat is checked against
// out_cnt * ceil(feat_cnt / 8) + out_cnt + 12 cycles.
//
// Every mechanism must occur at least once: each activation and Taylor order,
// bypass, model miss, bad header, overflow drop, ingress stall, egress stall,
// IPv6, TCP, and the untouched zero UDP checksum.
module tb_nn_inference_top;
  import nn_pkg::*;
  import tb_pkt_pkg::*;

  localparam int MF = 255, MO = 255, LN = 8, NSL = 7;

  logic clk = 0, rst_n = 0;
  logic [AXIS_W-1:0] s_axis_tdata = '0, m_axis_tdata;
  logic [BEAT_BYTES-1:0] s_axis_tkeep = '0, m_axis_tkeep;
  logic s_axis_tvalid = 0, s_axis_tlast = 0, s_axis_tready;
  logic m_axis_tvalid, m_axis_tlast, m_axis_tready = 0;
  logic cp_we = 0;
  logic [31:0] cp_addr = 0, cp_wdata = 0;
  logic [31:0] cnt_inferred, cnt_bypass, cnt_miss, cnt_bad, cnt_drop;

  nn_inference_top dut (.*);

  always #2 clk = ~clk;   // 250 MHz

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- model store for the reference ----
  typedef struct {
    logic [15:0] id;
    act_e act;
    int ord;
    longint alpha, off;
    int nf, no;
  } model_t;
  model_t models[NSL];
  longint W[NSL][][];
  longint B[NSL][];

  // ---- expected egress ----
  bytes_t exp_q[$];
  int     exp_lat[$];      // -1: do not check latency
  int     last_in_cyc[$];

  // ---- mechanism coverage ----
  int cov_act[4], cov_ord[6], cov_bypass = 0, cov_miss = 0, cov_bad = 0, cov_drop = 0;
  int cov_in_stall = 0, cov_out_stall = 0, cov_v6 = 0, cov_tcp = 0, cov_zero = 0;

  always @(posedge clk) begin
    if (rst_n && s_axis_tvalid && !s_axis_tready) cov_in_stall++;
    if (rst_n && m_axis_tvalid && !m_axis_tready) cov_out_stall++;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic cpw(logic [31:0] a, logic [31:0] d);
    @(negedge clk); cp_we = 1; cp_addr = a; cp_wdata = d;
    @(negedge clk); cp_we = 0;
  endtask

  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic longint act_ref(model_t m, longint z, int sh);
    longint p2, p3, p5, r;
    case (m.act)
      ACT_NONE:  return z;
      ACT_RELU:  return z > 0 ? z : 0;
      ACT_LEAKY: return z > 0 ? z : sat32((m.alpha * z) >>> sh);
      default: begin
        p2 = (z * z) >>> sh; p3 = (p2 * z) >>> sh; p5 = (p3 * p2) >>> sh;
        r = 32768 + ((16384 * z) >>> sh);
        if (m.ord >= 3) r += (-1365 * p3) >>> sh;
        if (m.ord >= 5) r += (45 * p5) >>> sh;
        if (r < 0) r = 0;
        if (r > (64'sd1 <<< sh)) r = 64'sd1 <<< sh;
        return r;
      end
    endcase
  endfunction

  task automatic load_model(int k, logic [15:0] id, act_e a, int ord, longint off, int nf, int no,
                            int wrange);
    models[k] = '{id: id, act: a, ord: ord, alpha: 1311, off: off, nf: nf, no: no};
    W[k] = new[no];
    B[k] = new[no];
    cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_ID}, {15'd0, 1'b1, id});
    cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_MODE}, {21'd0, 3'(ord), 6'd0, a});
    cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_ALPHA}, 32'd1311);
    cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_OFFSET}, 32'(off));
    for (int o = 0; o < no; o++) begin
      W[k][o] = new[nf];
      B[k][o] = longint'($urandom_range(0, 1 << 17)) - (1 << 16);
      cpw({CP_REG_BIAS, 12'(k), 8'h0, 8'(o)}, 32'(B[k][o]));
      for (int i = 0; i < nf; i++) begin
        W[k][o][i] = longint'($urandom_range(0, 2 * wrange)) - longint'(wrange) + off;
        cpw({CP_REG_WEIGHT, 12'(k), 8'(o), 8'(i)}, 32'(W[k][o][i]));
      end
    end
  endtask

  // Build a frame for model slot k (k < 0: unknown model id) and predict it.
  // kind: 0 normal, 1 not NN (wrong port), 2 bad output count, 3 oversize
  task automatic make(int k, int kind, bit v6, bit tcp, bit zero, int frange,
                      output bytes_t b, output bytes_t e, output int lat);
    pkt_cfg_t c;
    logic [31:0] f[];
    int nf, no, l4, fo, co, nn;
    model_t m;
    m  = (k >= 0) ? models[k] : models[0];
    nf = m.nf;
    no = (kind == 2) ? nf + 1 : m.no;
    if (kind == 2 && nf == 255) no = 0;
    f = new[nf];
    foreach (f[i]) f[i] = 32'(longint'($urandom_range(0, 2 * frange)) - frange);
    c = '{ipv6: v6, tcp: tcp, udp_zero_csum: zero, ip_opt_words: v6 ? 0 : $urandom_range(0, 2),
          tcp_opt_words: tcp ? $urandom_range(0, 3) : 0,
          dport: (kind == 1) ? 16'd80 : NN_PORT_DEFAULT,
          model_id: (k >= 0) ? m.id : 16'hBEEF, nfeat: nf, nout: no, scale: 16'd16,
          flags: 8'h01, payload: (kind == 3) ? 2100 : $urandom_range(0, 100)};
    b = build_pkt(c, f);
    e = b;
    lat = -1;
    if (v6) cov_v6++;
    if (tcp) cov_tcp++;
    if (kind == 3) begin cov_drop++; return; end
    if (kind == 1) begin cov_bypass++; return; end
    if (k < 0) begin cov_miss++; return; end
    if (kind == 2) begin cov_bad++; return; end
    l4 = l4_offset(b);
    nn = l4 + (tcp ? 4 * (5 + c.tcp_opt_words) : 8);
    fo = nn + 7;
    co = l4 + (tcp ? 16 : 6);
    for (int o = 0; o < no; o++) begin
      longint acc, z, y;
      acc = 0;
      for (int i = 0; i < nf; i++) acc += (W[k][o][i] - m.off) * longint'(signed'(f[i]));
      z = sat32((acc >>> 16) + B[k][o] - m.off);
      y = act_ref(m, z, 16);
      for (int q = 0; q < 4; q++) e[fo + 4 * o + q] = 8'(y >> (8 * (3 - q)));
    end
    e[nn + 6] = e[nn + 6] | 8'h80;
    if (zero && !tcp && !v6) cov_zero++;
    else begin
      logic [15:0] cs;
      e[co] = 0; e[co + 1] = 0;
      cs = ~l4_sum(e);
      if (!tcp && cs == 16'h0000) cs = 16'hFFFF;
      e[co] = cs[15:8]; e[co + 1] = cs[7:0];
    end
    cov_act[m.act]++;
    if (m.act == ACT_SIGMOID) cov_ord[m.ord]++;
    lat = no * ((nf + LN - 1) / LN) + no + 12;
  endtask

  task automatic send(const ref bytes_t b);
    int n = b.size();
    for (int i = 0; i < n; i += BEAT_BYTES) begin
      @(negedge clk);
      while ($urandom_range(0, 7) == 0) begin s_axis_tvalid = 0; @(negedge clk); end
      s_axis_tvalid = 1;
      s_axis_tdata  = '0;
      s_axis_tkeep  = '0;
      for (int k = 0; k < BEAT_BYTES; k++)
        if (i + k < n) begin s_axis_tdata[8*k +: 8] = b[i + k]; s_axis_tkeep[k] = 1'b1; end
      s_axis_tlast = (i + BEAT_BYTES >= n);
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
    end
    last_in_cyc.push_back(cyc);
    @(negedge clk);
    s_axis_tvalid = 0; s_axis_tlast = 0;
  endtask

  // egress monitor
  int rx_pkts = 0;
  bytes_t cur;
  bit     first_beat = 1;
  always @(negedge clk) m_axis_tready <= ($urandom_range(0, 3) != 0);
  bit     lat_taken = 0;
  always @(posedge clk) begin
    if (rst_n && m_axis_tvalid && first_beat && !lat_taken) begin
      int li, el;
      lat_taken = 1;
      li = (last_in_cyc.size() != 0) ? last_in_cyc.pop_front() : -1;
      el = (exp_lat.size() != 0) ? exp_lat[0] : -1;
      if (el >= 0)
        chk(cyc - li == el, $sformatf("latency %0d exp %0d", cyc - li, el));
    end
    if (rst_n && m_axis_tvalid && m_axis_tready) begin
      if (m_axis_tlast) lat_taken = 0;
      for (int k = 0; k < BEAT_BYTES; k++)
        if (m_axis_tkeep[k]) cur.push_back(m_axis_tdata[8*k +: 8]);
      first_beat = m_axis_tlast;
      if (m_axis_tlast) begin
        bytes_t e;
        rx_pkts++;
        if (exp_q.size() == 0) chk(0, "unexpected egress frame");
        else begin
          e = exp_q.pop_front();
          void'(exp_lat.pop_front());
          chk(e.size() == cur.size(), $sformatf("frame %0d length %0d exp %0d", rx_pkts, cur.size(), e.size()));
          begin
            int bad;
            bad = -1;
            for (int i = 0; i < e.size() && i < cur.size(); i++) if (e[i] != cur[i]) begin bad = i; break; end
            chk(bad < 0, $sformatf("frame %0d differs at byte %0d", rx_pkts, bad));
          end
          chk(l4_csum_ok(cur), $sformatf("frame %0d L4 checksum", rx_pkts));
        end
        cur.delete();
      end
    end
  end

  initial begin
    #40ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bytes_t b, e;
    int lat, n_exp;
    repeat (4) @(negedge clk);
    rst_n = 1;
    load_model(0, 16'h0101, ACT_SIGMOID, 3, 0,   12, 4, 3000);
    load_model(1, 16'h0202, ACT_RELU,    3, 0,   20, 5, 1 << 14);
    load_model(2, 16'h0303, ACT_LEAKY,   3, 0,    9, 9, 1 << 14);
    load_model(3, 16'h0404, ACT_NONE,    3, 37,  16, 2, 1 << 14);
    load_model(4, 16'h0505, ACT_SIGMOID, 5, -5,   7, 3, 3000);
    load_model(5, 16'h0606, ACT_SIGMOID, 1, 0,   30, 6, 3000);
    load_model(6, 16'h0707, ACT_NONE,    3, 0,  MF, MO, 1 << 10);
    n_exp = 0;
    for (int t = 0; t < 44; t++) begin
      int k, kind;
      k    = (t < 40) ? t % 6 : (t == 40) ? 6 : (t == 41) ? -1 : (t == 42) ? 1 : 2;
      kind = (t < 40) ? 0 : (t == 42) ? 1 : (t == 43) ? 2 : 0;
      if (t == 20) kind = 3;
      make(k, kind, t[0], t[1], (t % 8 == 4), (k == 6) ? 1 << 12 : 1 << 16, b, e, lat);
      if (kind != 3) begin exp_q.push_back(e); exp_lat.push_back(lat); n_exp++; end
      send(b);
      if (kind == 3) void'(last_in_cyc.pop_back());
    end
    // let everything drain
    while (rx_pkts < n_exp && cyc < 2_000_000) @(negedge clk);
    repeat (20) @(negedge clk);
    chk(rx_pkts == n_exp, $sformatf("frames out %0d exp %0d", rx_pkts, n_exp));
    chk(cnt_inferred == 32'(n_exp - cov_bypass - cov_miss - cov_bad), "inferred counter");
    chk(cnt_bypass == 32'(cov_bypass), "bypass counter");
    chk(cnt_miss == 32'(cov_miss), "miss counter");
    chk(cnt_bad == 32'(cov_bad), "bad-header counter");
    chk(cnt_drop == 32'(cov_drop), "drop counter");
    // mechanism coverage
    $display("coverage: none=%0d relu=%0d leaky=%0d sigmoid o1=%0d o3=%0d o5=%0d bypass=%0d miss=%0d bad=%0d drop=%0d in_stall=%0d out_stall=%0d ipv6=%0d tcp=%0d zero_csum=%0d",
             cov_act[ACT_NONE], cov_act[ACT_RELU], cov_act[ACT_LEAKY], cov_ord[1], cov_ord[3], cov_ord[5],
             cov_bypass, cov_miss, cov_bad, cov_drop, cov_in_stall, cov_out_stall, cov_v6, cov_tcp, cov_zero);
    chk(cov_act[ACT_NONE] > 0 && cov_act[ACT_RELU] > 0 && cov_act[ACT_LEAKY] > 0, "activations covered");
    chk(cov_ord[1] > 0 && cov_ord[3] > 0 && cov_ord[5] > 0, "Taylor orders covered");
    chk(cov_bypass > 0 && cov_miss > 0 && cov_bad > 0 && cov_drop > 0, "pass-through paths covered");
    chk(cov_in_stall > 0 && cov_out_stall > 0, "stalls covered");
    chk(cov_v6 > 0 && cov_tcp > 0 && cov_zero > 0, "header kinds covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
