// fp4_e2m1_quantizer: per-group FP16 -> FP4-E2M1 quantizer ("Quant1" of the FMU).
//
// One group of GROUP FP16 activations enters per handshake.  The quantizer has the two
// passes of the published block diagram:
//   pass 1 (stage 1): absolute value and maximum over the group; the group is held in
//                     a buffer register;
//   pass 2 (stage 2): scale s = max/6, each element scaled to x/s*2 in [-12,12],
//                     offset by +12 and mapped through the 25-entry FP4-E2M1 LUT to a
//                     4-bit code.
// The scaled value is rounded to the nearest integer with ties away from zero, which is
// what the printed LUT does (e.g. 5 -> 6, 7 -> 8).  The division x/s is realised as
// threshold comparisons on exact fixed-point magnitudes instead of a divider; the
// scale output is max times the FP16 constant 1/6 (rounded, relative error 2.5e-4).
// Both are this design's choices.  An all-zero group yields scale 0 and code 0000.
//
// Interface: valid/ready on both sides; in_data is held stable while in_valid && !in_ready.
// Timing: two register stages, a new group every cycle when out_ready stays high;
// result appears two cycles after the input handshake.
module fp4_e2m1_quantizer
  import fpq_pkg::*;
#(
  parameter int unsigned G = GROUP
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  fp16_t in_data [G],
  output logic  out_valid,
  input  logic  out_ready,
  output fp4_t  out_code [G],
  output fp16_t out_scale
);
  // ---------------- pass 1: abs, max, buffer
  logic  s1_valid, s1_adv, s2_adv;
  fp16_t buf_q [G];
  fp16_t max_q, max_d;

  always_comb begin
    max_d = '0;
    for (int i = 0; i < G; i++)
      if (in_data[i][14:0] > max_d[14:0]) max_d = {1'b0, in_data[i][14:0]};
  end

  assign s2_adv   = !out_valid || out_ready;
  assign s1_adv   = !s1_valid || s2_adv;
  assign in_ready = s1_adv;

  always_ff @(posedge clk) begin
    if (!rst_n) s1_valid <= 1'b0;
    else if (s1_adv) s1_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (s1_adv && in_valid) begin
      buf_q <= in_data;
      max_q <= max_d;
    end
  end

  // ---------------- pass 2: scale, offset, LUT
  fp16_t        scale_d;
  fp4_t         code_d [G];
  logic [39:0]  maxf;

  fp_mul #(.EW(5), .MW(10)) u_scale (.a(max_q), .b(FP16_INV_6), .y(scale_d));

  always_comb begin
    logic [3:0] q;
    maxf = fp16_mag_fixed(max_q[14:0]);
    for (int i = 0; i < G; i++) begin
      q = ratio_round(fp16_mag_fixed(buf_q[i][14:0]), maxf, 12);
      code_d[i] = e2m1_qlut(buf_q[i][15] ? 5'd12 - 5'(q) : 5'd12 + 5'(q));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (s2_adv) out_valid <= s1_valid;
  end

  always_ff @(posedge clk) begin
    if (s2_adv && s1_valid) begin
      out_code  <= code_d;
      out_scale <= scale_d;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_scale));
endmodule
