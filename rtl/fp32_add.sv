// fp32_add: combinational IEEE-754 single-precision adder, the adder of the
// partial-sum lanes, of the cascaded adder chain and of the adder tree.
//
// The operand of smaller magnitude is aligned to the larger one with three
// extra bits (guard, round, sticky); the significands are added or
// subtracted, the result is normalised (one place right, or left by its
// leading-zero count) and rounded to nearest, ties to even. An exact zero
// difference gives +0. Simplifications, this design's own: subnormal inputs
// are read as zero and subnormal results flushed to zero; overflow gives
// infinity; NaN and infinity inputs are not treated specially.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [31:0] x, z;              // |x| >= |z|
  logic        az, bz;
  logic [7:0]  d;
  logic [26:0] mx, mz, mzs;       // {1, 23-bit fraction, g, r, s}
  logic        sticky;
  logic [27:0] sum;
  logic [26:0] n;
  logic [4:0]  lz;
  logic        inc, found;
  logic [24:0] mr;
  logic signed [9:0] e;

  always_comb begin
    az = (a[30:23] == 8'd0);
    bz = (b[30:23] == 8'd0);
    if (a[30:0] >= b[30:0]) begin x = a; z = b; end
    else                    begin x = b; z = a; end
    d   = x[30:23] - z[30:23];
    mx  = {1'b1, x[22:0], 3'b000};
    mz  = {1'b1, z[22:0], 3'b000};
    if (d >= 8'd27) begin
      mzs    = '0;
      sticky = 1'b1;
    end else begin
      mzs    = mz >> d;
      sticky = |(mz & ~(27'h7FF_FFFF << d));
    end
    mzs[0] = mzs[0] | sticky;
    if (x[31] == z[31]) sum = {1'b0, mx} + {1'b0, mzs};
    else                sum = {1'b0, mx} - {1'b0, mzs};
    e = 10'(signed'({2'b00, x[30:23]}));
    lz = 5'd0;
    found = 1'b0;
    if (sum[27]) begin
      n = sum[27:1];
      n[0] = n[0] | sum[0];
      e = e + 10'sd1;
    end else begin
      for (int q = 26; q >= 0; q--) begin
        if (sum[q]) found = 1'b1;
        if (!found) lz = lz + 5'd1;
      end
      n = sum[26:0] << lz;
      e = e - 10'(signed'({5'b00000, lz}));
    end
    inc = n[2] & (n[1] | n[0] | n[3]);
    mr  = {1'b0, n[26:3]} + 25'(inc);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 10'sd1;
    end
    if (az && bz)            y = {a[31] & b[31], 31'd0};
    else if (bz)             y = a;
    else if (az)             y = b;
    else if (sum == '0)      y = 32'd0;
    else if (e <= 10'sd0)    y = {x[31], 31'd0};
    else if (e >= 10'sd255)  y = {x[31], 8'hFF, 23'd0};
    else                     y = {x[31], e[7:0], mr[22:0]};
  end
endmodule
