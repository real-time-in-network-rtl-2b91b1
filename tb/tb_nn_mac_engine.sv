// tb_nn_mac_engine -- self-checking test of the inference engine.
//
// The engine runs against a real nn_ctrl_tables instance (2 slots, 20
// features, 8 outputs, 4 lanes) and a packet vector that this testbench
// updates from the engine's write port. Each test programs a model (random
// weights, biases, offset, activation, Taylor order), places random features
// at a random offset, starts the engine and checks: every result word written
// over the feature slots against a 64-bit integer model of
// act(((sum (w-b)*x) >> s) + bias - b); that the features past out_cnt are
// untouched; the one's-complement sums of old and new words; and the latency
// start -> done = out_cnt * ceil(feat_cnt / 4) + out_cnt + 4 cycles.
// One test drives z beyond 32 bits to check the saturation.
module tb_nn_mac_engine;
  import nn_pkg::*;
  localparam int PB = 512, NS = 2, MF = 20, MO = 8, LN = 4;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [0:0] slot = 0, w_slot, b_slot;
  model_entry_t entry;
  logic [4:0] s = 16;
  logic [7:0] feat_cnt = 0, out_cnt = 0;
  logic [8:0] feat_off = 0;
  logic [8*PB-1:0] pkt = '0;
  logic [2:0] w_out, b_out;
  logic [2:0] w_grp;
  logic [LN*32-1:0] w_data;
  logic signed [31:0] b_data;
  logic wr_en;
  logic [8:0] wr_off;
  logic [31:0] wr_data;
  logic [2:0] wr_nbytes;
  logic busy, done;
  logic [15:0] sum_old, sum_new;
  logic cp_we = 0;
  logic [31:0] cp_addr = 0, cp_wdata = 0;
  logic [15:0] lk_model_id = 0;
  logic lk_hit;
  logic [0:0] lk_slot;
  int checks = 0, failures = 0;
  int cyc = 0;

  nn_mac_engine #(.PKT_BYTES(PB), .N_SLOTS(NS), .MAX_FEAT(MF), .MAX_OUT(MO), .LANES(LN)) dut (
    .clk, .rst_n, .start, .slot, .entry, .s, .feat_cnt, .out_cnt, .feat_off, .pkt,
    .w_slot, .w_out, .w_grp, .w_data, .b_slot, .b_out, .b_data,
    .wr_en, .wr_off, .wr_data, .wr_nbytes, .busy, .done, .sum_old, .sum_new);

  nn_ctrl_tables #(.N_SLOTS(NS), .MAX_FEAT(MF), .MAX_OUT(MO), .LANES(LN)) u_tbl (
    .clk, .rst_n, .cp_we, .cp_addr, .cp_wdata, .lk_model_id, .lk_hit, .lk_slot,
    .lk_entry(entry), .w_slot, .w_out, .w_grp, .w_data, .b_slot, .b_out, .b_data);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // packet store model: apply the engine's writes
  always @(posedge clk)
    if (wr_en)
      for (int k = 0; k < 4; k++)
        if (k < 32'(wr_nbytes)) pkt[8 * (32'(wr_off) + k) +: 8] <= wr_data[(3 - k) * 8 +: 8];

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

  function automatic longint act_ref(act_e a, int ord, longint z, longint al, int sh);
    longint p2, p3, p5, r;
    case (a)
      ACT_NONE:  return z;
      ACT_RELU:  return z > 0 ? z : 0;
      ACT_LEAKY: return z > 0 ? z : sat32((al * z) >>> sh);
      default: begin
        p2 = (z * z) >>> sh; p3 = (p2 * z) >>> sh; p5 = (p3 * p2) >>> sh;
        r = 32768 + ((16384 * z) >>> sh);
        if (ord >= 3) r += (-1365 * p3) >>> sh;
        if (ord >= 5) r += (45 * p5) >>> sh;
        if (r < 0) r = 0;
        if (r > (64'sd1 <<< sh)) r = 64'sd1 <<< sh;
        return r;
      end
    endcase
  endfunction

  function automatic logic [31:0] rd32(int off);
    return {pkt[8*off +: 8], pkt[8*(off+1) +: 8], pkt[8*(off+2) +: 8], pkt[8*(off+3) +: 8]};
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int nf, no, fo, sl, ord, big, start_cyc;
      act_e a;
      longint off, al, xs[MF], ws[MO][MF], bs[MO], acc, z, e;
      logic [15:0] so, sn;
      big = (t == 29);
      sl  = t % NS;
      nf  = big ? 2 : $urandom_range(1, MF);
      no  = big ? 1 : $urandom_range(1, (nf < MO) ? nf : MO);
      a   = big ? ACT_NONE : act_e'(t % 4);
      ord = (t % 3 == 0) ? 1 : (t % 3 == 1) ? 3 : 5;
      off = big ? 0 : longint'($urandom_range(0, 200)) - 100;
      al  = 655 + t;
      fo  = $urandom_range(40, 200);
      cpw({CP_REG_MODEL, 12'(sl), 12'h0, MF_ID}, {15'd0, 1'b1, 16'(500 + t)});
      cpw({CP_REG_MODEL, 12'(sl), 12'h0, MF_MODE}, {21'd0, 3'(ord), 6'd0, a});
      cpw({CP_REG_MODEL, 12'(sl), 12'h0, MF_ALPHA}, 32'(al));
      cpw({CP_REG_MODEL, 12'(sl), 12'h0, MF_OFFSET}, 32'(off));
      for (int o = 0; o < no; o++) begin
        bs[o] = longint'($urandom_range(0, 1 << 18)) - (1 << 17);
        cpw({CP_REG_BIAS, 12'(sl), 8'h0, 8'(o)}, 32'(bs[o]));
        for (int i = 0; i < nf; i++) begin
          ws[o][i] = big ? (64'sd1 <<< 30) : longint'($urandom_range(0, 1 << 15)) - (1 << 14);
          cpw({CP_REG_WEIGHT, 12'(sl), 8'(o), 8'(i)}, 32'(ws[o][i]));
        end
      end
      pkt = '0;
      for (int i = 0; i < MF + 2; i++) begin
        logic [31:0] v;
        v = (i < nf) ? (big ? 32'h4000_0000 : 32'(longint'($urandom_range(0, 1 << 18)) - (1 << 17)))
                     : $urandom;
        if (i < nf) xs[i] = longint'(signed'(v));
        for (int k = 0; k < 4; k++) pkt[8 * (fo + 4 * i + k) +: 8] = v[(3 - k) * 8 +: 8];
      end
      lk_model_id = 16'(500 + t);
      slot = 1'(sl); feat_cnt = 8'(nf); out_cnt = 8'(no); feat_off = 9'(fo); s = 16;
      @(negedge clk);
      chk(lk_hit && lk_slot == 1'(sl), "model found");
      start = 1; start_cyc = cyc;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      chk(cyc - start_cyc == no * ((nf + LN - 1) / LN) + no + 4,
          $sformatf("latency %0d exp %0d", cyc - start_cyc, no * ((nf + LN - 1) / LN) + no + 4));
      @(negedge clk);
      so = 0; sn = 0;
      for (int o = 0; o < no; o++) begin
        acc = 0;
        for (int i = 0; i < nf; i++) acc += (ws[o][i] - off) * xs[i];
        z = sat32((acc >>> 16) + bs[o] - off);
        e = act_ref(a, ord, z, al, 16);
        chk(rd32(fo + 4 * o) == 32'(e),
            $sformatf("t=%0d out %0d act=%s got %0d exp %0d", t, o, a.name(), signed'(rd32(fo + 4 * o)), e));
        so = csum_add(so, csum_fold32(32'(xs[o])));
        sn = csum_add(sn, csum_fold32(32'(e)));
      end
      if (no < nf) chk(rd32(fo + 4 * no) == 32'(xs[no]), "feature past out_cnt untouched");
      chk(sum_old == so && sum_new == sn, "checksum sums");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
