// tb_nn_activation -- self-checking test of the activation unit.
//
// Random neuron sums at s = 16 through identity, ReLU, leaky ReLU (alpha =
// 0.01 and a "learned" alpha = 0.25) and the order-3 Taylor sigmoid, each
// compared with a 64-bit integer model.
module tb_nn_activation;
  import nn_pkg::*;
  act_e act;
  logic signed [31:0] z, alpha, c0, c1, c3, c5, y;
  logic [4:0] s;
  logic [2:0] order;
  int checks = 0, failures = 0;

  nn_activation dut (.act, .z, .s, .alpha, .order, .c0, .c1, .c3, .c5, .y);

  function automatic longint ref_act(act_e a, longint zv, longint al);
    longint p2, p3, r;
    case (a)
      ACT_NONE:  return zv;
      ACT_RELU:  return (zv > 0) ? zv : 0;
      ACT_LEAKY: return (zv > 0) ? zv : ((al * zv) >>> 16);
      default: begin
        p2 = (zv * zv) >>> 16;
        p3 = (p2 * zv) >>> 16;
        r  = 32768 + ((16384 * zv) >>> 16) + ((-1365 * p3) >>> 16);
        if (r < 0) r = 0;
        if (r > 65536) r = 65536;
        return r;
      end
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act_e acts[4] = '{ACT_NONE, ACT_RELU, ACT_LEAKY, ACT_SIGMOID};
    longint alphas[2] = '{655, 16384};
    s = 16; order = 3; c0 = 32768; c1 = 16384; c3 = -1365; c5 = 45;
    foreach (acts[a])
      foreach (alphas[k])
        for (int i = 0; i < 200; i++) begin
          longint zv, e;
          act = acts[a];
          alpha = 32'(alphas[k]);
          zv = (i == 0) ? 0 : longint'($urandom_range(0, 400000)) - 200000;
          z = 32'(zv);
          #1;
          e = ref_act(act, zv, alphas[k]);
          checks++;
          if (longint'(y) != e) begin
            failures++;
            if (failures < 10) $display("FAIL act=%s z=%0d y=%0d exp=%0d", act.name(), zv, y, e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
