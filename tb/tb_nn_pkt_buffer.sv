// tb_nn_pkt_buffer -- self-checking test of the packet store.
//
// A 256-byte instance (4 beats) receives packets of random length with random
// valid gaps, has a few bytes rewritten through the byte port, and streams
// them out under random back-pressure. Checks rx_len, rx_done one cycle after
// the last beat, the egress bytes (with the rewrites), tkeep and tlast, the
// overflow flag for a packet longer than the store, and the drop path.
module tb_nn_pkt_buffer;
  import nn_pkg::*;
  localparam int PB = 256;

  logic clk = 0, rst_n = 0;
  logic [AXIS_W-1:0] s_axis_tdata = '0, m_axis_tdata;
  logic [BEAT_BYTES-1:0] s_axis_tkeep = '0, m_axis_tkeep;
  logic s_axis_tvalid = 0, s_axis_tlast = 0, s_axis_tready;
  logic m_axis_tvalid, m_axis_tlast, m_axis_tready = 0;
  logic rx_en = 1, rx_done, rx_ovf;
  logic [8:0] rx_len;
  logic [8*PB-1:0] pkt;
  logic wr_en = 0;
  logic [7:0] wr_off = 0;
  logic [31:0] wr_data = 0;
  logic [2:0] wr_nbytes = 0;
  logic tx_start = 0, tx_drop = 0, tx_done;
  int checks = 0, failures = 0;
  int cyc = 0, last_beat_cyc = 0, done_cyc = 0;

  nn_pkt_buffer #(.PKT_BYTES(PB)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    if (s_axis_tvalid && s_axis_tready && s_axis_tlast) last_beat_cyc <= cyc;
    if (rx_done) done_cyc <= cyc;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic send(const ref byte unsigned b[$]);
    int n = b.size();
    for (int i = 0; i < n; i += BEAT_BYTES) begin
      while ($urandom_range(0, 3) == 0) begin
        @(negedge clk); s_axis_tvalid = 0;
      end
      @(negedge clk);
      s_axis_tvalid = 1;
      s_axis_tdata  = '0;
      s_axis_tkeep  = '0;
      for (int k = 0; k < BEAT_BYTES; k++)
        if (i + k < n) begin
          s_axis_tdata[8*k +: 8] = b[i + k];
          s_axis_tkeep[k] = 1'b1;
        end
      s_axis_tlast = (i + BEAT_BYTES >= n);
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
    end
    @(negedge clk);
    s_axis_tvalid = 0; s_axis_tlast = 0;
  endtask

  task automatic bwrite(int off, logic [31:0] d, int nb);
    @(negedge clk); wr_en = 1; wr_off = 8'(off); wr_data = d; wr_nbytes = 3'(nb);
    @(negedge clk); wr_en = 0;
  endtask

  task automatic receive(ref byte unsigned got[$]);
    bit fin = 0;
    got.delete();
    @(negedge clk); tx_start = 1; @(negedge clk); tx_start = 0;
    while (!fin) begin
      m_axis_tready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (m_axis_tvalid && m_axis_tready) begin
        for (int k = 0; k < BEAT_BYTES; k++)
          if (m_axis_tkeep[k]) got.push_back(m_axis_tdata[8*k +: 8]);
        if (!m_axis_tlast) chk(&m_axis_tkeep, "full tkeep before tlast");
        fin = m_axis_tlast;
      end
      @(negedge clk);
    end
    m_axis_tready = 0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned b[$], got[$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int n, off;
      n = (t == 0) ? 64 : (t == 1) ? PB : $urandom_range(1, PB);
      b.delete();
      for (int i = 0; i < n; i++) b.push_back(8'($urandom));
      send(b);
      wait (rx_done); @(negedge clk);
      chk(32'(rx_len) == n && !rx_ovf, $sformatf("rx_len %0d exp %0d", rx_len, n));
      chk(done_cyc == last_beat_cyc + 1, "rx_done one cycle after the last beat");
      chk(!s_axis_tready, "no ingress while holding");
      // rewrite 1..4 bytes at a random place inside the packet
      if (n >= 4) begin
        int nb;
        logic [31:0] d;
        nb  = $urandom_range(1, 4);
        off = $urandom_range(0, n - nb);
        d   = $urandom;
        bwrite(off, d, nb);
        for (int k = 0; k < nb; k++) b[off + k] = d[(3 - k) * 8 +: 8];
        chk(pkt[8*off +: 8] == d[31:24], "flat view shows the rewrite");
      end
      receive(got);
      chk(got.size() == n, $sformatf("egress length %0d exp %0d", got.size(), n));
      for (int i = 0; i < n && i < got.size(); i++)
        if (got[i] != b[i]) begin chk(0, $sformatf("byte %0d", i)); break; end
    end
    // overflow: a packet one beat longer than the store
    b.delete();
    for (int i = 0; i < PB + BEAT_BYTES; i++) b.push_back(8'(i));
    send(b);
    wait (rx_done); @(negedge clk);
    chk(rx_ovf, "overflow flagged");
    @(negedge clk); tx_start = 1; tx_drop = 1; @(negedge clk); tx_start = 0; tx_drop = 0;
    repeat (2) @(negedge clk);
    chk(!m_axis_tvalid && s_axis_tready && !rx_ovf, "dropped, back to receive");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
