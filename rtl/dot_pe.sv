// dot_pe: one lane of a GeMM unit -- LUT multipliers, INT32 adder tree, scaling and
// accumulation, following the published adder-tree diagram.
//
// Per cycle the lane takes one quantization group: G activation codes, G weight codes,
// the activation scale(s) and the weight scale.  Its three pipeline stages are
//   S1: G LUT multipliers -> FP8 -> INT32 (units of 1/4) -> binary adder tree;
//   S2: the group sum times Sx*Sw (Sx*Sw is an FP16 x FP16 product, exact in FP32);
//   S3: the FP32 accumulator adds the group's contribution (first group loads it).
// With DFQ=1 the multipliers are dfq_mul and the lane keeps two adder-tree sums, one
// for the negative part and one for the positive part of the DFQ activation, because
// the two parts have different scales:  S2 computes (sum- * s- + sum+ * s+) * Sw.
// The split accumulation and the FP32 accumulator are this design's choices; the
// diagram shows one adder tree, an FP16 multiplier for Sx Sw and an accumulate loop.
//
// Interface: in_valid qualifies a group; first marks the first group of an output and
// last its final group.  out_valid pulses for one cycle with the finished out_acc three
// cycles after the last group.  There is no back-pressure: the lane accepts one group
// every cycle.  With DFQ=0 the negative-part signals (second sum, s-, its partial
// product) are declared but left unread; the lint tool reports them as unused.
module dot_pe
  import fpq_pkg::*;
#(
  parameter int unsigned G   = GROUP,
  parameter bit          DFQ = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  first,
  input  logic  last,
  input  fp4_t  a_code [G],
  input  fp4_t  w_code [G],
  input  fp16_t sx,        // activation scale (positive-part scale s+ when DFQ)
  input  fp16_t sx_neg,    // negative-part scale s- (DFQ only)
  input  fp16_t sw,        // weight scale of this lane for this group
  output logic  out_valid,
  output fp32_t out_acc
);
  // ---------------- S1: multipliers and adder tree
  fp8_t               prod [G];
  logic               negp [G];
  logic signed [31:0] tpos [2*G];
  logic signed [31:0] tneg [2*G];

  for (genvar i = 0; i < G; i++) begin : g_mul
    if (DFQ) begin : g_dfq
      dfq_mul u_mul (.a(a_code[i]), .w(w_code[i]), .p(prod[i]), .neg_part(negp[i]));
    end else begin : g_e2m1
      fp4_e2m1_mul u_mul (.a(a_code[i]), .w(w_code[i]), .p(prod[i]));
      assign negp[i] = 1'b0;
    end
  end

  always_comb begin
    tpos[0] = '0;
    tneg[0] = '0;
    for (int i = 0; i < G; i++) begin
      tpos[G+i] = negp[i] ? 32'sd0 : fp8_to_int(prod[i]);
      tneg[G+i] = negp[i] ? fp8_to_int(prod[i]) : 32'sd0;
    end
    for (int i = G - 1; i >= 1; i--) begin
      tpos[i] = tpos[2*i] + tpos[2*i+1];
      tneg[i] = tneg[2*i] + tneg[2*i+1];
    end
  end

  logic               s1_v, s1_first, s1_last;
  logic signed [31:0] s1_pos, s1_neg;
  fp16_t              s1_sx, s1_sxn, s1_sw;

  always_ff @(posedge clk) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= in_valid;
    s1_first <= first;
    s1_last  <= last;
    s1_pos   <= tpos[1];
    s1_neg   <= tneg[1];
    s1_sx    <= sx;
    s1_sxn   <= DFQ ? sx_neg : 16'h0000;
    s1_sw    <= sw;
  end

  // ---------------- S2: scale by Sx * Sw  (1/4 unit folded into the exponent)
  fp32_t sxw_p, sxw_n, part_p, part_n, part;

  fp_mul #(.EW(8), .MW(23)) u_sxw_p  (.a(fp16_to_fp32(s1_sx)),  .b(fp16_to_fp32(s1_sw)), .y(sxw_p));
  fp_mul #(.EW(8), .MW(23)) u_part_p (.a(int_to_fp32(s1_pos, -2)), .b(sxw_p), .y(part_p));

  if (DFQ) begin : g_neg
    fp_mul #(.EW(8), .MW(23)) u_sxw_n  (.a(fp16_to_fp32(s1_sxn)), .b(fp16_to_fp32(s1_sw)), .y(sxw_n));
    fp_mul #(.EW(8), .MW(23)) u_part_n (.a(int_to_fp32(s1_neg, -2)), .b(sxw_n), .y(part_n));
    fp_add #(.EW(8), .MW(23)) u_sum    (.a(part_p), .b(part_n), .y(part));
  end else begin : g_noneg
    assign sxw_n  = '0;
    assign part_n = '0;
    assign part   = part_p;
  end

  logic  s2_v, s2_first, s2_last;
  fp32_t s2_part;

  always_ff @(posedge clk) begin
    if (!rst_n) s2_v <= 1'b0;
    else        s2_v <= s1_v;
    s2_first <= s1_first;
    s2_last  <= s1_last;
    s2_part  <= part;
  end

  // ---------------- S3: accumulate across groups
  fp32_t acc_q, acc_sum;

  fp_add #(.EW(8), .MW(23)) u_acc (.a(acc_q), .b(s2_part), .y(acc_sum));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_valid <= 1'b0;
      out_acc   <= '0;
    end else begin
      out_valid <= s2_v && s2_last;
      if (s2_v) begin
        acc_q <= s2_first ? s2_part : acc_sum;
        if (s2_last) out_acc <= s2_first ? s2_part : acc_sum;
      end
    end
  end
endmodule
