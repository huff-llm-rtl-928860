// fp16_mul: combinational FP16 x FP16 multiplier with an FP32 result. The
// product of two 11-bit significands has at most 22 bits and its exponent
// always lies in the FP32 normal range, so the FP32 result is exact: no
// rounding takes place. FP16 subnormal inputs are supported. Infinity and
// NaN follow IEEE 754 (inf x 0 and any NaN give the quiet NaN 0x7FC00000).
// The paper's PE multiplies FP16 weights by FP16 inputs; producing an exact
// FP32 product for an FP32 accumulator is this design's choice.
module fp16_mul
  import hd_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp32_t p
);

  logic        sign;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [10:0] ma, mb;
  logic [5:0]  ea, eb;
  logic [21:0] prod;
  logic [4:0]  k;
  logic [20:0] norm;

  always_comb begin
    sign   = a.sign ^ b.sign;
    a_zero = (a.exp == 5'd0) && (a.man == '0);
    b_zero = (b.exp == 5'd0) && (b.man == '0);
    a_inf  = (a.exp == 5'h1f) && (a.man == '0);
    b_inf  = (b.exp == 5'h1f) && (b.man == '0);
    a_nan  = (a.exp == 5'h1f) && (a.man != '0);
    b_nan  = (b.exp == 5'h1f) && (b.man != '0);
    ma     = {a.exp != 5'd0, a.man};
    mb     = {b.exp != 5'd0, b.man};
    ea     = (a.exp == 5'd0) ? 6'd1 : {1'b0, a.exp};
    eb     = (b.exp == 5'd0) ? 6'd1 : {1'b0, b.exp};
    prod   = ma * mb;
    // position of the leading one of the product
    k = 5'(6'd31 - lzc32({10'd0, prod}));
    norm = 21'(prod << (5'd21 - k));   // leading one shifted out at bit 21
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      p = 32'h7FC0_0000;
    end else if (a_inf || b_inf) begin
      p = '{sign: sign, exp: 8'hff, man: '0};
    end else if (a_zero || b_zero) begin
      p = '{sign: sign, exp: 8'h00, man: '0};
    end else begin
      // value = prod * 2^(ea+eb-50); FP32 biased exponent = ea+eb-50+k+127
      p.sign = sign;
      p.exp  = 8'(ea) + 8'(eb) + 8'(k) + 8'd77;
      p.man  = {norm[20:0], 2'b00};
    end
  end

endmodule
