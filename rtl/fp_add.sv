// fp_add: combinational binary floating-point adder, parameterised by exponent width
// EW and mantissa width MW (EW=5/MW=10 is FP16, EW=8/MW=23 is FP32).
//
// The larger-magnitude operand is kept, the smaller one is shifted right with guard,
// round and sticky bits, the two are added or subtracted, the sum is renormalised and
// rounded to nearest, ties to even.  Subnormal inputs read as zero, subnormal results
// flush to zero, overflow returns infinity; exact cancellation gives +0.  These rules
// are this design's choice: the accelerator description does not give the insides of
// its floating-point adders.  Purely combinational.
module fp_add #(
  parameter int unsigned EW = 5,
  parameter int unsigned MW = 10
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int EMAX = (1 << EW) - 1;
  localparam int W    = MW + 4;          // hidden bit, mantissa, guard, round, sticky

  logic [EW+MW:0] x, z;                  // |x| >= |z|
  logic           xz, zz, sub;
  logic [W-1:0]   mx, mz, mzs;
  logic [W:0]     sum;
  logic [MW:0]    mant;
  logic [MW+1:0]  mr;
  logic           g, st, up;
  int             d, e, lz;

  always_comb begin
    if (a[EW+MW-1:0] >= b[EW+MW-1:0]) begin x = a; z = b; end
    else                              begin x = b; z = a; end
    xz  = (x[EW+MW-1:MW] == '0);
    zz  = (z[EW+MW-1:MW] == '0);
    sub = x[EW+MW] ^ z[EW+MW];
    mx  = {1'b1, x[MW-1:0], 3'b000};
    mz  = zz ? '0 : {1'b1, z[MW-1:0], 3'b000};
    d   = int'(x[EW+MW-1:MW]) - int'(z[EW+MW-1:MW]);
    if (d >= W) mzs = {{(W-1){1'b0}}, |mz};
    else begin
      mzs = mz >> d;
      for (int i = 0; i < W; i++) if (i < d && mz[i]) mzs[0] = 1'b1;
    end
    sum = sub ? ({1'b0, mx} - {1'b0, mzs}) : ({1'b0, mx} + {1'b0, mzs});
    e   = int'(x[EW+MW-1:MW]);
    lz  = 0;
    if (sum[W]) begin
      sum = {1'b0, sum[W:2], sum[1] | sum[0]};
      e   = e + 1;
    end else begin
      for (int i = W - 1; i >= 0; i--) begin
        if (sum[i]) break;
        lz = lz + 1;
      end
      sum = sum << lz;
      e   = e - lz;
    end
    mant = sum[W-1:3];
    g    = sum[2];
    st   = sum[1] | sum[0];
    up   = g & (st | mant[0]);
    mr   = {1'b0, mant} + (MW+2)'(up);
    if (mr[MW+1]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (xz)                      y = zz ? {a[EW+MW] & b[EW+MW], {(EW+MW){1'b0}}} : z;
    else if (zz)                 y = x;
    else if (lz >= W)            y = '0;
    else if (e >= EMAX)          y = {x[EW+MW], {EW{1'b1}}, {MW{1'b0}}};
    else if (e <= 0)             y = '0;
    else                         y = {x[EW+MW], EW'(e), mr[MW-1:0]};
  end
endmodule
