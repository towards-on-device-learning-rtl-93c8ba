// fp64_mul: combinational IEEE-754 binary64 multiplier, y = a * b, rounded to
// nearest-even. The 53x53-bit significand product is normalised by at most
// one place, then rounded with a guard bit and a sticky bit. This design's
// own simplifications: subnormals are read as zero and flushed to zero,
// infinities and NaNs give infinity, overflow gives infinity. No latency.
module fp64_mul
  import oselm_pkg::*;
(
  input  fp64_t a,
  input  fp64_t b,
  output fp64_t y
);
  logic               s;
  logic [10:0]        ea, eb;
  logic [105:0]       p;
  logic [52:0]        m;
  logic               g, st, rup;
  logic [53:0]        rnd;
  logic signed [13:0] e;

  always_comb begin
    s  = a[63] ^ b[63];
    ea = a[62:52];
    eb = b[62:52];
    p  = {1'b1, a[51:0]} * {1'b1, b[51:0]};
    e  = 14'(ea) + 14'(eb) - 14'sd1023;
    if (p[105]) begin
      m  = p[105:53];
      g  = p[52];
      st = |p[51:0];
      e  = e + 14'sd1;
    end else begin
      m  = p[104:52];
      g  = p[51];
      st = |p[50:0];
    end
    rup = g & (st | m[0]);
    rnd = {1'b0, m} + 54'(rup);
    if (rnd[53]) begin
      rnd = rnd >> 1;
      e   = e + 14'sd1;
    end
    if (ea == 11'h7FF || eb == 11'h7FF)
      y = {s, 11'h7FF, 52'd0};
    else if (ea == 11'd0 || eb == 11'd0)
      y = {s, 63'd0};
    else if (e >= 14'sd2047)
      y = {s, 11'h7FF, 52'd0};
    else if (e <= 14'sd0)
      y = {s, 63'd0};
    else
      y = {s, e[10:0], rnd[51:0]};
  end
endmodule
