// fp16_mul: combinational IEEE half-precision multiplier.
//
// Used by the 16x16 MAC array of the BP engine and by the leak (alpha) and
// gradient products of the Soma and Grad lanes. The 11x11-bit significand
// product is normalised by at most one place and rounded to nearest, ties to
// even. Number-format corners are this design's choice: a zero (or subnormal)
// operand gives +0, which lets a gated lane feed anything without creating a
// NaN; overflow gives infinity and an underflowing result is flushed to zero.
// Interface: y = a * b, purely combinational.
module fp16_mul
  import snn_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);

  always_comb begin
    logic        s;
    logic [21:0] prod;
    logic [11:0] mant;
    logic        g, st;
    int          er;

    s    = a[15] ^ b[15];
    prod = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    er   = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (prod[21]) begin
      er   = er + 1;
      mant = {1'b0, prod[21:11]};
      g    = prod[10];
      st   = |prod[9:0];
    end else begin
      mant = {1'b0, prod[20:10]};
      g    = prod[9];
      st   = |prod[8:0];
    end
    mant = mant + 12'(g & (st | mant[0]));
    if (mant[11]) begin
      mant = mant >> 1;
      er   = er + 1;
    end
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) y = 16'h0000;
    else if (a[14:10] == 5'd31 || b[14:10] == 5'd31) y = {s, 5'd31, 10'd0};
    else if (er >= 31) y = {s, 5'd31, 10'd0};
    else if (er <= 0)  y = 16'h0000;
    else               y = {s, 5'(er), mant[9:0]};
  end

endmodule
