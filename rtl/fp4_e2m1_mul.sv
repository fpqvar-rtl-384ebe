// fp4_e2m1_mul: FP4-E2M1 x FP4-E2M1 multiplier built as a lookup table.
//
// The two 4-bit operands are concatenated into an 8-bit address {a, w} that selects one
// of 256 precomputed FP8 products, as in the published multiplier diagram.  The table is
// computed at elaboration from the E2M1 value set (fpq_pkg::e2m1_mul_entry); the FP8
// format (S1 E3M4, bias 2) is this design's choice and holds every product exactly.
// Purely combinational; on an FPGA each output bit maps to LUT6 pairs.
module fp4_e2m1_mul
  import fpq_pkg::*;
(
  input  fp4_t a,   // activation code
  input  fp4_t w,   // weight code
  output fp8_t p    // FP8 product
);
  localparam lut256_t LUT = build_e2m1_mul_lut();

  assign p = LUT[{a, w}];
endmodule
