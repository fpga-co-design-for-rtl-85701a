// fp_add: the accumulate adder of the PE's multiply-accumulate.
//
// IEEE-754 binary32 addition with round-to-nearest-even. The larger-magnitude
// operand is kept, the smaller one is shifted right into three extra bits
// (guard, round, sticky), the significands are added or subtracted, the result
// is renormalised with a leading-zero count and rounded once. Subnormal
// inputs are read as zero and results below the normal range flush to +/-0;
// the PE never produces them, since every product of two FP16 values and
// every sum of such products is a multiple of 2^-48, far above 2^-126.
// Overflow gives infinity; NaN or inf - inf gives a quiet NaN; x + (-x)
// gives +0.
//
// Interface: purely combinational, a, b -> s.
// The paper names a floating-point MAC only; this adder and its rounding
// choices belong to this design.
module fp_add
  import nm_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t s
);

  logic        sa, sb, sx, sy;
  logic [7:0]  ea, eb, ex, ey;
  logic [23:0] ma, mb, mx, my;
  logic        a_special, b_special;
  logic [7:0]  d;
  logic [26:0] mx_e, my_e;          // significand + guard, round, sticky
  logic [27:0] sum;
  logic [4:0]  lz;
  logic signed [9:0] e_res;
  logic [26:0] norm;
  logic [23:0] man_r;
  logic        round_up;
  logic [24:0] man_c;

  always_comb begin
    sa = a[31];  ea = a[30:23];
    sb = b[31];  eb = b[30:23];
    // flush-to-zero on input: exponent 0 means zero
    ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    a_special = (ea == 8'hFF);
    b_special = (eb == 8'hFF);

    // order by magnitude: x is the larger
    if ({ea, ma} >= {eb, mb}) begin
      sx = sa; ex = ea; mx = ma; sy = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy = sa; ey = ea; my = ma;
    end

    d    = ex - ey;
    mx_e = {mx, 3'b000};
    if (d >= 8'd27) begin
      my_e = {26'd0, |my};
    end else begin
      my_e = {my, 3'b000} >> d;
      // sticky: any bit shifted out below the three extra bits
      my_e[0] = my_e[0] | |({my, 3'b000} & ~(27'h7FF_FFFF << d));
    end

    if (sx == sy) sum = {1'b0, mx_e} + {1'b0, my_e};
    else          sum = {1'b0, mx_e} - {1'b0, my_e};

    e_res = signed'({2'b00, ex});
    lz    = 5'd0;
    norm  = 27'd0;
    if (sum[27]) begin
      norm  = {sum[27:2], sum[1] | sum[0]};
      e_res = e_res + 10'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      norm  = sum[26:0] << lz;
      e_res = e_res - signed'({5'd0, lz});
    end

    man_r    = norm[26:3];
    round_up = norm[2] && (norm[1] || norm[0] || norm[3]);
    man_c    = {1'b0, man_r} + {24'd0, round_up};
    if (man_c[24]) begin
      man_c = man_c >> 1;
      e_res = e_res + 10'sd1;
    end

    if ((a_special && a[22:0] != 23'd0) || (b_special && b[22:0] != 23'd0) ||
        (a_special && b_special && sa != sb)) begin
      s = FP32_QNAN;
    end else if (a_special) begin
      s = a;
    end else if (b_special) begin
      s = b;
    end else if (sum == 28'd0) begin
      s = (sa && sb) ? 32'h8000_0000 : FP32_ZERO;   // -0 only for -0 + -0
    end else if (e_res >= 10'sd255) begin
      s = {sx, 8'hFF, 23'd0};
    end else if (e_res <= 10'sd0) begin
      s = {sx, 31'd0};
    end else begin
      s = {sx, e_res[7:0], man_c[22:0]};
    end
  end

endmodule
