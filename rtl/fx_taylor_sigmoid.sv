// fx_taylor_sigmoid -- fixed-point sigmoid by truncated Taylor series around 0.
//
//   order 1: y = c0 + c1*x
//   order 3: y = c0 + c1*x + c3*x^3
//   order 5: y = c0 + c1*x + c3*x^3 + c5*x^5
//
// x, y and the coefficients are signed fixed-point numbers with s fractional
// bits. With s = 16 the coefficients are 0.5, 1/4, -1/48 and 1/1440, i.e.
// 32768, 16384, -1365 and 45. The coefficients are inputs because they live in
// the control-plane tables next to the weights.
//
// How it works: each power is formed by a full-width multiply followed by an
// arithmetic right shift by s (x2 = x*x >> s, x3 = x2*x >> s, x5 = x3*x2 >> s),
// each term is c*x^k >> s, and the terms are summed at full width. The shifts
// truncate towards minus infinity. Intermediate powers saturate at 48 bits.
// Because a truncated series diverges for large |x|, the result is clamped to
// the sigmoid's range [0, 1.0] (0 .. 2^s). Shift rounding, the 48-bit power
// saturation and the clamp are choices of this implementation; the series and
// the constants are the published ones. An order other than 3 or 5 is treated
// as 1.
//
// Timing: purely combinational. s must be at most 30.
module fx_taylor_sigmoid (
  input  logic signed [31:0] x,
  input  logic        [4:0]  s,
  input  logic        [2:0]  order,
  input  logic signed [31:0] c0,
  input  logic signed [31:0] c1,
  input  logic signed [31:0] c3,
  input  logic signed [31:0] c5,
  output logic signed [31:0] y
);

  localparam int unsigned PW = 48;   // width of the saturated powers

  function automatic logic signed [PW-1:0] sat_pw(input logic signed [127:0] v);
    logic signed [127:0] lim;
    lim = (128'sd1 <<< (PW - 1));
    if (v >= lim)       return {1'b0, {(PW-1){1'b1}}};
    else if (v < -lim)  return {1'b1, {(PW-1){1'b0}}};
    else                return v[PW-1:0];
  endfunction

  logic signed [PW-1:0]  x2, x3, x5;
  logic signed [127:0]   t1, t3, t5, sum, one;

  always_comb begin
    x2 = sat_pw((128'(x) * 128'(x)) >>> s);
    x3 = sat_pw((128'(x2) * 128'(x)) >>> s);
    x5 = sat_pw((128'(x3) * 128'(x2)) >>> s);
    t1 = (128'(c1) * 128'(x))  >>> s;
    t3 = (128'(c3) * 128'(x3)) >>> s;
    t5 = (128'(c5) * 128'(x5)) >>> s;
    sum = 128'(c0) + t1;
    if (order == 3'd3 || order == 3'd5) sum = sum + t3;
    if (order == 3'd5)                  sum = sum + t5;
    one = 128'sd1 <<< s;
    if (sum < 0)        y = '0;
    else if (sum > one) y = one[31:0];
    else                y = sum[31:0];
  end

endmodule
