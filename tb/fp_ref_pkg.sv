// fp_ref_pkg: reference arithmetic for the testbenches.
//
// Works through the simulator's double-precision `real` type, independent of
// the RTL's bit-level datapath: FP16 and FP32 values are widened exactly to
// double, the arithmetic is done in double, and the result is rounded to FP32
// by round-to-nearest-even on the double's bit pattern. Values below the FP32
// normal range flush to zero, as in the RTL. The package also holds the
// generators of random FP16 activations and of N:M-pruned weight columns.
package fp_ref_pkg;

  function automatic real fp16_to_real(logic [15:0] v);
    real r;
    if (v[14:10] == 5'd0) begin
      r = real'(v[9:0]) * (2.0 ** -24);
      return v[15] ? -r : r;
    end
    return $bitstoreal({v[15], 11'(int'(v[14:10]) - 15 + 1023), v[9:0], 42'd0});
  endfunction

  function automatic real fp32_to_real(logic [31:0] v);
    if (v[30:23] == 8'd0) return 0.0;
    return $bitstoreal({v[31], 11'(int'(v[30:23]) - 127 + 1023), v[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] real_to_fp32(real r);
    logic [63:0] b;
    int          e;
    logic [24:0] m;
    logic        g, st;
    b = $realtobits(r);
    if (b[62:0] == 63'd0) return {b[63], 31'd0};
    e  = int'(b[62:52]) - 1023;
    m  = {2'b01, b[51:29]};
    g  = b[28];
    st = |b[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e > 127)  return {b[63], 8'hFF, 23'd0};
    if (e < -126) return {b[63], 31'd0};
    return {b[63], 8'(e + 127), m[22:0]};
  endfunction

  // Round a double to FP16 (nearest even); magnitudes below the FP16
  // normal range flush to zero, overflow gives infinity.
  function automatic logic [15:0] real_to_fp16(real r);
    logic [63:0] b;
    int          e;
    logic [11:0] m;
    b = $realtobits(r);
    if (b[62:0] == 63'd0) return {b[63], 15'd0};
    e = int'(b[62:52]) - 1023;
    m = {2'b01, b[51:42]};
    if (b[41] && ((|b[40:0]) || m[0])) m = m + 12'd1;
    if (m[11]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e > 15)  return {b[63], 5'h1F, 10'd0};
    if (e < -14) return {b[63], 15'd0};
    return {b[63], 5'(e + 15), m[9:0]};
  endfunction

  // Offline weight preparation of one weight column of length k, as the host
  // software does it: keep the n largest magnitudes in every group of m along
  // K, quantize the survivors symmetrically to INT4 with one scale
  // s = 7 / max|w| (round, clip to [-8, 7]), then dequantize as q * (1/s) and
  // round to FP16. inv_s is the reciprocal scale, the same for all columns.
  function automatic void nm_prune_quant(ref real w[], input int n, input int m,
                                         input real inv_s, ref logic [15:0] wq[]);
    int k;
    bit keep[];
    k  = w.size();
    wq = new[k];
    keep = new[m];
    for (int g = 0; g < k / m; g++) begin
      // selection of the n largest |w| in the group
      for (int i = 0; i < m; i++) keep[i] = 0;
      for (int j = 0; j < n; j++) begin
        int best = -1;
        for (int i = 0; i < m; i++)
          if (!keep[i] && (best < 0 || (w[g*m+i] < 0 ? -w[g*m+i] : w[g*m+i]) >
                                       (w[g*m+best] < 0 ? -w[g*m+best] : w[g*m+best])))
            best = i;
        keep[best] = 1;
      end
      for (int i = 0; i < m; i++) begin
        real q;
        if (!keep[i]) begin
          wq[g*m+i] = 16'h0000;
          continue;
        end
        q = w[g*m+i] / inv_s;
        q = (q < 0) ? -$floor(-q + 0.5) : $floor(q + 0.5);
        if (q > 7.0)  q = 7.0;
        if (q < -8.0) q = -8.0;
        wq[g*m+i] = real_to_fp16(q * inv_s);
      end
    end
  endfunction

  // Random finite FP16 with exponent field in [lo, hi] (0 gives subnormals).
  function automatic logic [15:0] rand_fp16(int lo, int hi);
    logic [4:0] e;
    e = 5'(lo + ($urandom % (hi - lo + 1)));
    return {1'($urandom), e, 10'($urandom)};
  endfunction

  // Random FP32 with exponent field in [lo, hi].
  function automatic logic [31:0] rand_fp32(int lo, int hi);
    logic [7:0] e;
    e = 8'(lo + ($urandom % (hi - lo + 1)));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

endpackage
