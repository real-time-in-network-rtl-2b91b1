// tb_fx_taylor_sigmoid -- self-checking test of the Taylor sigmoid.
//
// Compares the unit against an integer model written with 64-bit arithmetic
// (valid for |x| < 8 at s = 16, where no power saturates), for orders 1, 3
// and 5, at s = 16 with the published constants and at s = 12 with the
// constants rescaled. Also checks the clamp to [0, 1] and, in real numbers,
// that the order-5 result is within 0.002 of the true sigmoid for |x| <= 1.
module tb_fx_taylor_sigmoid;
  logic signed [31:0] x, c0, c1, c3, c5, y;
  logic [4:0] s;
  logic [2:0] order;
  int checks = 0, failures = 0;

  fx_taylor_sigmoid dut (.x, .s, .order, .c0, .c1, .c3, .c5, .y);

  function automatic longint ref_sig(longint xv, int sh, int ord, longint k0, longint k1, longint k3, longint k5);
    longint p2, p3, p5, r;
    p2 = (xv * xv) >>> sh;
    p3 = (p2 * xv) >>> sh;
    p5 = (p3 * p2) >>> sh;
    r  = k0 + ((k1 * xv) >>> sh);
    if (ord >= 3) r += (k3 * p3) >>> sh;
    if (ord >= 5) r += (k5 * p5) >>> sh;
    if (r < 0) r = 0;
    if (r > (64'sd1 <<< sh)) r = 64'sd1 <<< sh;
    return r;
  endfunction

  task automatic check(longint xv, int sh, int ord, longint k0, longint k1, longint k3, longint k5);
    longint e;
    x = 32'(xv); s = 5'(sh); order = 3'(ord); c0 = 32'(k0); c1 = 32'(k1); c3 = 32'(k3); c5 = 32'(k5);
    #1;
    e = ref_sig(xv, sh, ord, k0, k1, k3, k5);
    checks++;
    if (longint'(y) != e) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d s=%0d order=%0d y=%0d exp=%0d", xv, sh, ord, y, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ords[3] = '{1, 3, 5};
    real xr, yr, tr;
    // published constants, s = 16
    foreach (ords[o]) begin
      check(0, 16, ords[o], 32768, 16384, -1365, 45);
      check(65536, 16, ords[o], 32768, 16384, -1365, 45);
      check(-65536, 16, ords[o], 32768, 16384, -1365, 45);
      for (int i = 0; i < 300; i++) begin
        longint xv;
        xv = longint'($urandom_range(0, 2 * 300000)) - 300000;  // about +-4.6
        check(xv, 16, ords[o], 32768, 16384, -1365, 45);
      end
    end
    // s = 12, constants rescaled: 2048, 1024, round(-4096/48) = -85, round(4096/1440) = 3
    foreach (ords[o])
      for (int i = 0; i < 200; i++) begin
        longint xv;
        xv = longint'($urandom_range(0, 2 * 20000)) - 20000;
        check(xv, 12, ords[o], 2048, 1024, -85, 3);
      end
    // clamp: order 1 at x = 8 would give 2.5, at x = -8 gives -1.5
    x = 32'sd524288; s = 16; order = 1; c0 = 32768; c1 = 16384; c3 = -1365; c5 = 45; #1;
    checks++; if (y != 32'sd65536) begin failures++; $display("FAIL clamp high y=%0d", y); end
    x = -32'sd524288; #1;
    checks++; if (y != 0) begin failures++; $display("FAIL clamp low y=%0d", y); end
    // accuracy against the real sigmoid, order 5, |x| <= 1
    for (int i = -16; i <= 16; i++) begin
      x = 32'(i * 4096); s = 16; order = 5; #1;
      xr = real'(i) / 16.0;
      tr = 1.0 / (1.0 + $exp(-xr));
      yr = real'(y) / 65536.0;
      checks++;
      if ((yr - tr) > 0.002 || (tr - yr) > 0.002) begin
        failures++; $display("FAIL accuracy x=%f y=%f sigmoid=%f", xr, yr, tr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
