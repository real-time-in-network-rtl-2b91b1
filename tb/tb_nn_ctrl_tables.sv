// tb_nn_ctrl_tables -- self-checking test of the control-plane tables.
//
// Small instance (4 slots, 20 features, 6 outputs, 4 lanes). Checks the reset
// values of the model entries (Taylor constants 32768, 16384, -1365, 45),
// exact-match lookup hits and misses, every entry field, and that every
// weight and bias written can be read back through the one-cycle read ports
// at the right lane, with writes outside the sizes ignored.
module tb_nn_ctrl_tables;
  import nn_pkg::*;
  localparam int NS = 4, MF = 20, MO = 6, LN = 4, GR = (MF + LN - 1) / LN;

  logic clk = 0, rst_n = 0;
  logic cp_we = 0;
  logic [31:0] cp_addr = 0, cp_wdata = 0;
  logic [15:0] lk_model_id = 0;
  logic lk_hit;
  logic [1:0] lk_slot, w_slot = 0, b_slot = 0;
  model_entry_t lk_entry;
  logic [2:0] w_out = 0, b_out = 0;
  logic [2:0] w_grp = 0;
  logic [LN*32-1:0] w_data;
  logic signed [31:0] b_data;
  int checks = 0, failures = 0;
  logic [31:0] wref [NS][MO][MF];
  logic [31:0] bref [NS][MO];

  nn_ctrl_tables #(.N_SLOTS(NS), .MAX_FEAT(MF), .MAX_OUT(MO), .LANES(LN)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic cpw(logic [31:0] a, logic [31:0] d);
    @(negedge clk); cp_we = 1; cp_addr = a; cp_wdata = d;
    @(negedge clk); cp_we = 0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // reset state: no hit, default coefficients
    lk_model_id = 16'h0000; #1;
    chk(!lk_hit, "no hit after reset");
    chk(lk_entry.c0 == 32768 && lk_entry.c1 == 16384 && lk_entry.c3 == -1365 && lk_entry.c5 == 45,
        "reset Taylor constants");
    chk(lk_entry.order == 3 && lk_entry.act == ACT_NONE, "reset order/activation");
    // program models: slot k has id 100+k
    for (int k = 0; k < NS; k++) begin
      cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_ID}, {15'd0, 1'b1, 16'(100 + k)});
      cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_MODE}, {21'd0, 3'(k == 0 ? 1 : 5), 6'd0, 2'(k)});
      cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_ALPHA}, 32'(1000 + k));
      cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_OFFSET}, 32'(-k));
      cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_C0}, 32'(10 + k));
      cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_C1}, 32'(20 + k));
      cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_C3}, 32'(30 + k));
      cpw({CP_REG_MODEL, 12'(k), 12'h0, MF_C5}, 32'(40 + k));
    end
    // write to a slot out of range must be ignored (would alias slot 0 if decoded short)
    cpw({CP_REG_MODEL, 12'(NS), 12'h0, MF_ID}, {15'd0, 1'b1, 16'd999});
    for (int k = 0; k < NS; k++) begin
      lk_model_id = 16'(100 + k); #1;
      chk(lk_hit && lk_slot == 2'(k), $sformatf("lookup id %0d", 100 + k));
      chk(lk_entry.act == act_e'(k) && lk_entry.order == 3'(k == 0 ? 1 : 5), "mode field");
      chk(lk_entry.alpha == 1000 + k && lk_entry.offset == -k, "alpha/offset");
      chk(lk_entry.c0 == 10 + k && lk_entry.c1 == 20 + k && lk_entry.c3 == 30 + k && lk_entry.c5 == 40 + k,
          "coefficients");
    end
    lk_model_id = 16'd999; #1; chk(!lk_hit, "miss for out-of-range slot write");
    lk_model_id = 16'd7;   #1; chk(!lk_hit, "miss for unknown id");
    // invalidate slot 2
    cpw({CP_REG_MODEL, 12'd2, 12'h0, MF_ID}, {15'd0, 1'b0, 16'd102});
    lk_model_id = 16'd102; #1; chk(!lk_hit, "miss after invalidation");
    // weights and biases
    for (int k = 0; k < NS; k++)
      for (int o = 0; o < MO; o++) begin
        bref[k][o] = $urandom;
        cpw({CP_REG_BIAS, 12'(k), 8'h0, 8'(o)}, bref[k][o]);
        for (int f = 0; f < MF; f++) begin
          wref[k][o][f] = $urandom;
          cpw({CP_REG_WEIGHT, 12'(k), 8'(o), 8'(f)}, wref[k][o][f]);
        end
      end
    // out-of-range feature write must not land anywhere
    cpw({CP_REG_WEIGHT, 12'd0, 8'd0, 8'(MF)}, 32'hDEADBEEF);
    for (int k = 0; k < NS; k++)
      for (int o = 0; o < MO; o++) begin
        for (int g = 0; g < GR; g++) begin
          @(negedge clk);
          w_slot = 2'(k); w_out = 3'(o); w_grp = 3'(g); b_slot = 2'(k); b_out = 3'(o);
          @(negedge clk);
          for (int l = 0; l < LN; l++)
            if (g * LN + l < MF)
              chk(w_data[l*32 +: 32] == wref[k][o][g*LN+l],
                  $sformatf("weight s%0d o%0d f%0d", k, o, g * LN + l));
          chk(b_data == bref[k][o], $sformatf("bias s%0d o%0d", k, o));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
