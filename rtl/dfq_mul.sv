// dfq_mul: multiplier of the DFQ GeMM unit (DFQ activation code x FP4-E2M1 weight).
//
// Two 256-entry FP8 product tables are addressed by the concatenated operands {a, w}:
// one reads the activation code in the negative (E1M2) format, the other in the
// positive (E2M1) format.  A multiplexer driven by a control signal picks the table, as
// in the published DFQ multiplier diagram.  The diagram does not say where the control
// signal comes from; here it is the activation code's sign bit, which is exactly the
// format flag a DFQ code carries (this design's reading).  The sign is also passed on
// as neg_part so the lane can accumulate the two parts under their own scales.
// Purely combinational.
module dfq_mul
  import fpq_pkg::*;
(
  input  fp4_t a,          // DFQ activation code
  input  fp4_t w,          // E2M1 weight code
  output fp8_t p,          // FP8 product (in activation-part units)
  output logic neg_part    // 1: product belongs to the negative (s-) part
);
  localparam lut256_t LUT_NEG = build_dfq_mul_lut(1'b1);
  localparam lut256_t LUT_POS = build_dfq_mul_lut(1'b0);

  logic sel;
  assign sel      = a[3];
  assign p        = sel ? LUT_NEG[{a, w}] : LUT_POS[{a, w}];
  assign neg_part = sel;
endmodule
