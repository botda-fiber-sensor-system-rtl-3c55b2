// fp32_mul: combinational IEEE-754 single-precision multiplier, the
// multiplier of every MAC lane.
//
// The 24-bit significands are multiplied into a 48-bit product, normalised
// by at most one place and rounded to nearest, ties to even, from a guard
// bit and a sticky bit. Simplifications, this design's own: subnormal
// inputs are read as zero and subnormal results are flushed to zero (with
// the product's sign); a result above the largest finite value becomes
// infinity; NaN and infinity inputs are not treated specially. Normalised
// gains, support vectors and coefficients never reach those ranges.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        s;
  logic [7:0]  ea, eb;
  logic [47:0] p;
  logic [23:0] m;
  logic        g, st, inc;
  logic [24:0] mr;
  logic signed [10:0] e;

  always_comb begin
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    p  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e  = 11'(signed'({3'b000, ea})) + 11'(signed'({3'b000, eb})) - 11'sd127;
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = |p[22:0];
      e  = e + 11'sd1;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = |p[21:0];
    end
    inc = g & (st | m[0]);
    mr  = {1'b0, m} + 25'(inc);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if (ea == 8'd0 || eb == 8'd0 || e <= 11'sd0) y = {s, 31'd0};
    else if (e >= 11'sd255)                      y = {s, 8'hFF, 23'd0};
    else                                         y = {s, e[7:0], mr[22:0]};
  end
endmodule
