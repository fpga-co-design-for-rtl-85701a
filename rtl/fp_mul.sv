// fp_mul: the multiplier of the PE's multiply-accumulate.
//
// Multiplies an FP16 activation by an FP16 (dequantized) weight and returns
// the product in FP32. Two 11-bit significands give a 22-bit product, which
// fits in the 24-bit FP32 significand, and the exponent range of FP16 x FP16
// (2^-48 .. 2^32) lies inside the normal FP32 range, so the product is exact:
// no rounding step exists. FP16 subnormal inputs are normalised first.
// Infinity and NaN inputs give FP32 infinity / quiet NaN (inf x 0 = NaN).
//
// Interface: purely combinational, a, b -> p.
// The paper only says the PE performs "a standard floating-point MAC"; the
// FP16 x FP16 -> exact FP32 split is this design's choice.
module fp_mul
  import nm_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp32_t p
);

  // Unpack one FP16 operand into sign, unbiased exponent and an 11-bit
  // significand with its leading one at bit 10.
  typedef struct packed {
    logic        sign;
    logic        zero;
    logic        inf;
    logic        nan;
    logic signed [6:0] exp;   // unbiased, -24 .. 15
    logic [10:0] man;         // 1.xxxxxxxxxx
  } unp16_t;

  function automatic unp16_t unpack(fp16_t v);
    unp16_t u;
    logic [9:0] f;
    int unsigned lz;
    u.sign = v[15];
    u.zero = (v[14:0] == 15'd0);
    u.inf  = (v[14:10] == 5'h1F) && (v[9:0] == 10'd0);
    u.nan  = (v[14:10] == 5'h1F) && (v[9:0] != 10'd0);
    f = v[9:0];
    if (v[14:10] != 5'd0) begin
      u.exp = 7'(signed'({2'b00, v[14:10]}) - 15);
      u.man = {1'b1, f};
    end else begin
      // subnormal: value = f * 2^-24; shift the leading one up to bit 10
      lz = 0;
      for (int i = 9; i >= 0; i--) begin
        if (f[i]) break;
        lz++;
      end
      u.man = {1'b0, f} << (lz + 1);
      u.exp = 7'(-14 - signed'(lz) - 1);
    end
    return u;
  endfunction

  unp16_t ua, ub;
  logic [21:0] prod;
  logic signed [7:0] e_sum;
  logic sign;

  always_comb begin
    ua    = unpack(a);
    ub    = unpack(b);
    sign  = ua.sign ^ ub.sign;
    prod  = ua.man * ub.man;               // value prod * 2^-20, in [1,4)
    e_sum = 8'(ua.exp) + 8'(ub.exp);
    if (ua.nan || ub.nan || ((ua.inf || ub.inf) && (ua.zero || ub.zero))) begin
      p = FP32_QNAN;
    end else if (ua.inf || ub.inf) begin
      p = {sign, 8'hFF, 23'd0};
    end else if (ua.zero || ub.zero) begin
      p = {sign, 31'd0};
    end else if (prod[21]) begin
      p = {sign, 8'(e_sum) + 8'd128, prod[20:0], 2'b00};
    end else begin
      p = {sign, 8'(e_sum) + 8'd127, prod[19:0], 3'b000};
    end
  end

endmodule
