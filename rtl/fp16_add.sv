// fp16_add: combinational IEEE half-precision adder.
//
// Used by every selector/adder array, accumulator, Soma and Grad lane of the
// engines, all of which work in FP16. The smaller operand is aligned to the
// larger one in a 24-bit field (13 bits below the mantissa); an operand shifted
// further than that is replaced by a single sticky bit, which rounds exactly as
// the lost bits would. The sum is normalised and rounded to nearest, ties to
// even. Number-format corners are this design's choice: subnormal inputs and
// results are flushed to zero, overflow gives infinity, infinity plus anything
// keeps the infinity and no NaN is produced.
// Interface: y = a + b, purely combinational (no clock).
module fp16_add
  import snn_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);

  always_comb begin
    logic        a_big;
    fp16_t       big, sml;
    logic [4:0]  eb, es;
    logic [23:0] mbig, msml;
    logic [24:0] sum;
    logic [24:0] norm;
    logic        stk;
    int          d, p, er;
    logic [11:0] mant;
    logic        g, st;

    a_big = (a[14:0] >= b[14:0]);
    big   = a_big ? a : b;
    sml   = a_big ? b : a;
    eb    = big[14:10];
    es    = sml[14:10];
    y     = 16'h0000;
    sum   = '0;
    norm  = '0;
    stk   = 1'b0;
    p     = -1;
    er    = 0;
    mant  = '0;
    g     = 1'b0;
    st    = 1'b0;
    mbig  = '0;
    msml  = '0;
    d     = 0;
    if (eb == 5'd31) begin
      y = {big[15], 5'd31, 10'd0};
      if (es == 5'd31 && big[15] != sml[15]) y = 16'h0000;
    end else if (eb == 5'd0) begin
      y = 16'h0000;                       // both operands zero / subnormal
    end else if (es == 5'd0) begin
      y = big;
    end else begin
      d    = int'(eb) - int'(es);
      mbig = {1'b1, big[9:0], 13'd0};
      msml = (d > 13) ? 24'd1 : ({1'b1, sml[9:0], 13'd0} >> d);
      if (big[15] == sml[15]) sum = {1'b0, mbig} + {1'b0, msml};
      else                    sum = {1'b0, mbig} - {1'b0, msml};
      for (int i = 0; i < 25; i++) if (sum[i]) p = i;
      if (p < 0) begin
        y = 16'h0000;
      end else begin
        if (p == 24) begin
          norm = sum >> 1;
          stk  = sum[0];
        end else begin
          norm = sum << (23 - p);
        end
        er   = int'(eb) + p - 23;
        g    = norm[12];
        st   = (|norm[11:0]) | stk;
        mant = {1'b0, norm[23:13]} + 12'(g & (st | norm[13]));
        if (mant[11]) begin
          mant = mant >> 1;
          er   = er + 1;
        end
        if (er >= 31)     y = {big[15], 5'd31, 10'd0};
        else if (er <= 0) y = 16'h0000;
        else              y = {big[15], 5'(er), mant[9:0]};
      end
    end
  end

endmodule
