// fp64_add: combinational IEEE-754 binary64 adder, y = a + b (or a - b with
// sub = 1). Operands are aligned with guard, round and sticky bits, summed,
// normalised and rounded to nearest-even, which gives the same result as a
// software double add for normal numbers. This design's own simplifications:
// subnormal inputs are read as zero and subnormal results are flushed to
// zero; an infinite or NaN operand is passed through; overflow gives
// infinity. No latency: the result is valid in the cycle the inputs are.
module fp64_add
  import oselm_pkg::*;
(
  input  fp64_t a,
  input  fp64_t b,
  input  logic  sub,
  output fp64_t y
);
  logic        sa, sb, sl, ss, eff_sub;
  logic [10:0] ea, eb, el, es;
  logic [52:0] ma, mb, ml, msm;
  logic [11:0] d;
  logic [55:0] lx, sx, sx_full_mask;
  logic [56:0] sum;
  logic [55:0] nrm;
  logic [5:0]  lz;
  logic signed [13:0] e;
  logic [53:0] rnd;
  logic        sticky, rup;

  always_comb begin
    sa = a[63];
    sb = b[63] ^ sub;
    ea = a[62:52];
    eb = b[62:52];
    ma = (ea == 11'd0) ? 53'd0 : {1'b1, a[51:0]};
    mb = (eb == 11'd0) ? 53'd0 : {1'b1, b[51:0]};
    // larger magnitude first
    if ({ea, a[51:0]} >= {eb, b[51:0]}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; msm = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; msm = ma;
    end
    eff_sub = sl ^ ss;
    d  = {1'b0, el} - {1'b0, es};
    lx = {ml, 3'b000};
    sx_full_mask = '0;
    if (d >= 12'd56) begin
      sx     = '0;
      sticky = |msm;
    end else begin
      sx           = {msm, 3'b000} >> d;
      sx_full_mask = (56'd1 << d) - 56'd1;
      sticky       = |({msm, 3'b000} & sx_full_mask);
    end
    sx[0] = sx[0] | sticky;
    sum = eff_sub ? ({1'b0, lx} - {1'b0, sx}) : ({1'b0, lx} + {1'b0, sx});
    e   = {3'b000, el};
    nrm = '0;
    lz  = '0;
    if (sum[56]) begin
      nrm = {sum[56:2], sum[1] | sum[0]};
      e   = e + 14'sd1;
    end else begin
      for (int i = 55; i >= 0; i--) begin
        if (sum[i] && lz == 6'd0 && nrm == '0) begin
          lz  = 6'(55 - i);
          nrm = sum[55:0] << (55 - i);
        end
      end
      e = e - 14'(lz);
    end
    rup = nrm[2] & (nrm[1] | nrm[0] | nrm[3]);
    rnd = {1'b0, nrm[55:3]} + 54'(rup);
    if (rnd[53]) begin
      rnd = rnd >> 1;
      e   = e + 14'sd1;
    end
    // result
    if (ea == 11'h7FF) begin
      y = a;
    end else if (eb == 11'h7FF) begin
      y = {sb, b[62:0]};
    end else if (ma == 53'd0 && mb == 53'd0) begin
      y = {sa & sb, 63'd0};
    end else if (sum == 57'd0) begin
      y = FP_ZERO;
    end else if (e >= 14'sd2047) begin
      y = {sl, 11'h7FF, 52'd0};
    end else if (e <= 14'sd0) begin
      y = {sl, 63'd0};
    end else begin
      y = {sl, e[10:0], rnd[51:0]};
    end
  end
endmodule
