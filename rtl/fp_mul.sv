// fp_mul: combinational binary floating-point multiplier, parameterised by exponent
// width EW and mantissa width MW (EW=5/MW=10 is FP16, EW=8/MW=23 is FP32).
//
// Round to nearest, ties to even.  Subnormal inputs are read as zero and results that
// would be subnormal flush to zero; an overflow returns infinity.  The design only
// feeds it finite values.  These corner-case rules are this design's choice; the
// accelerator description names an FP16 multiplier for the scaling factors without
// giving its insides.  Purely combinational: result is valid in the same cycle.
module fp_mul #(
  parameter int unsigned EW = 5,
  parameter int unsigned MW = 10
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int BIAS = (1 << (EW - 1)) - 1;
  localparam int EMAX = (1 << EW) - 1;

  logic              s;
  logic [EW-1:0]     ea, eb;
  logic [2*MW+1:0]   prod;
  logic [MW:0]       mant;
  logic              g, st, up;
  logic [MW+1:0]     mr;
  int                e;

  always_comb begin
    s    = a[EW+MW] ^ b[EW+MW];
    ea   = a[EW+MW-1:MW];
    eb   = b[EW+MW-1:MW];
    prod = {1'b1, a[MW-1:0]} * {1'b1, b[MW-1:0]};
    e    = int'(ea) + int'(eb) - BIAS;
    if (prod[2*MW+1]) begin
      mant = prod[2*MW+1:MW+1];
      g    = prod[MW];
      st   = |prod[MW-1:0];
      e    = e + 1;
    end else begin
      mant = prod[2*MW:MW];
      g    = prod[MW-1];
      st   = |prod[MW-2:0];
    end
    up = g & (st | mant[0]);
    mr = {1'b0, mant} + (MW+2)'(up);
    if (mr[MW+1]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (ea == '0 || eb == '0)  y = {s, {(EW+MW){1'b0}}};
    else if (e >= EMAX)        y = {s, {EW{1'b1}}, {MW{1'b0}}};
    else if (e <= 0)           y = {s, {(EW+MW){1'b0}}};
    else                       y = {s, EW'(e), mr[MW-1:0]};
  end
endmodule
