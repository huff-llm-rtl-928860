// fp32_add: combinational IEEE 754 single-precision adder with
// round-to-nearest-even, used as the accumulator adder of a PE. Subnormal
// inputs and results are handled; overflow gives infinity; inf + -inf and
// NaN inputs give the quiet NaN 0x7FC00000; an exact zero sum of operands of
// opposite sign is +0. The operand of smaller magnitude is aligned with
// guard, round and sticky bits, the sum is normalised and rounded once.
// The paper does not give the accumulator format; FP32 is this design's
// choice.
module fp32_add
  import hd_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t s
);

  fp32_t       op_l, op_s;
  logic        a_nan, b_nan, a_inf, b_inf;
  logic [23:0] mb, ms;
  logic [8:0]  eb, es, e;
  logic [8:0]  d;
  logic [26:0] x, y, x_s;
  logic [27:0] sum;
  logic        sticky;
  logic [4:0]  lz;
  logic [8:0]  sh;
  logic [24:0] mr;
  logic        rnd;

  always_comb begin
    lz    = '0;
    sh    = '0;
    s     = '0;
    a_nan = (a.exp == 8'hff) && (a.man != '0);
    b_nan = (b.exp == 8'hff) && (b.man != '0);
    a_inf = (a.exp == 8'hff) && (a.man == '0);
    b_inf = (b.exp == 8'hff) && (b.man == '0);

    if ({a.exp, a.man} >= {b.exp, b.man}) begin
      op_l = a; op_s = b;
    end else begin
      op_l = b; op_s = a;
    end
    mb = {op_l.exp   != 8'd0, op_l.man};
    ms = {op_s.exp != 8'd0, op_s.man};
    eb = (op_l.exp   == 8'd0) ? 9'd1 : {1'b0, op_l.exp};
    es = (op_s.exp == 8'd0) ? 9'd1 : {1'b0, op_s.exp};
    d  = eb - es;

    // align the smaller operand, keeping a sticky bit
    x   = {mb, 3'b000};
    x_s = {ms, 3'b000};
    if (d >= 9'd27) begin
      y      = '0;
      sticky = (ms != '0);
    end else begin
      y      = x_s >> d;
      sticky = |(x_s & ~({27{1'b1}} << d));
    end
    y[0] = y[0] | sticky;

    if (op_l.sign == op_s.sign) sum = {1'b0, x} + {1'b0, y};
    else                        sum = {1'b0, x} - {1'b0, y};
    e = eb;

    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 9'd1;
    end else begin
      lz = 5'(lzc32({sum[26:0], 5'b11111}));   // 27 when the sum is zero
      sh  = (9'(lz) < e - 9'd1) ? 9'(lz) : e - 9'd1;
      sum = sum << sh;
      e   = e - sh;
    end

    rnd = sum[2] && (sum[1] || sum[0] || sum[3]);
    mr  = {1'b0, sum[26:3]} + 25'(rnd);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 9'd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (a.sign != b.sign))) begin
      s = 32'h7FC0_0000;
    end else if (a_inf || b_inf) begin
      s = a_inf ? a : b;
    end else if (mr == '0) begin
      s = '{sign: a.sign & b.sign, exp: 8'd0, man: '0};
    end else if (e >= 9'd255) begin
      s = '{sign: op_l.sign, exp: 8'hff, man: '0};
    end else begin
      s.sign = op_l.sign;
      s.exp  = mr[23] ? e[7:0] : 8'd0;   // no hidden one: subnormal
      s.man  = mr[22:0];
    end
  end

endmodule
