// dfq_quantizer: Dual Format Quantizer ("Quant2" of the FMU), FP16 -> 4-bit codes.
//
// Dual Format Quantization splits a group into its non-positive part (x <= 0) and its
// positive part (x > 0) and gives each its own grid and scale:
//   negative part: E1M2 grid, s- = max|x-| / 3.5, code from the 8-entry DFQ neg LUT at
//                  address round(2*x/s-) + 7;
//   positive part: E2M1 grid, s+ = max(x+) / 6,  code from the 13-entry DFQ pos LUT at
//                  address round(2*x/s+).
// Codes of the negative part have the sign bit set (E1M2), codes of the positive part
// have it clear (E2M1), so one 4-bit code per element tells both the value and which
// scale applies; zero is 0000 in either part.
// Pass 1 (stage 1) splits, takes the absolute values and the two maxima and buffers the
// group; pass 2 (stage 2) scales and looks up.  Rounding is to nearest with ties away
// from zero, as the printed LUTs do.  Division is realised with threshold comparisons,
// and the scales are max times FP16 constants 1/3.5 and 1/6: this design's choices.
//
// Interface: valid/ready on both sides.  Timing: two register stages, one group per
// cycle, result two cycles after the input handshake.
module dfq_quantizer
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
  output fp16_t out_scale_neg,
  output fp16_t out_scale_pos
);
  // ---------------- pass 1: split by sign, abs, two maxima, buffer
  logic  s1_valid, s1_adv, s2_adv;
  fp16_t buf_q [G];
  fp16_t maxn_q, maxp_q, maxn_d, maxp_d;

  always_comb begin
    maxn_d = '0;
    maxp_d = '0;
    for (int i = 0; i < G; i++) begin
      if (in_data[i][15]) begin
        if (in_data[i][14:0] > maxn_d[14:0]) maxn_d = {1'b0, in_data[i][14:0]};
      end else begin
        if (in_data[i][14:0] > maxp_d[14:0]) maxp_d = {1'b0, in_data[i][14:0]};
      end
    end
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
      buf_q  <= in_data;
      maxn_q <= maxn_d;
      maxp_q <= maxp_d;
    end
  end

  // ---------------- pass 2: scale, offset, two LUTs
  fp16_t       sn_d, sp_d;
  fp4_t        code_d [G];
  logic [39:0] maxnf, maxpf;

  fp_mul #(.EW(5), .MW(10)) u_scale_neg (.a(maxn_q), .b(FP16_INV_3P5), .y(sn_d));
  fp_mul #(.EW(5), .MW(10)) u_scale_pos (.a(maxp_q), .b(FP16_INV_6),   .y(sp_d));

  always_comb begin
    logic [3:0] q;
    maxnf = fp16_mag_fixed(maxn_q[14:0]);
    maxpf = fp16_mag_fixed(maxp_q[14:0]);
    for (int i = 0; i < G; i++) begin
      if (buf_q[i][15] || buf_q[i][14:0] == '0) begin
        q = ratio_round(fp16_mag_fixed(buf_q[i][14:0]), maxnf, 7);
        code_d[i] = dfq_neg_qlut(3'd7 - 3'(q));
      end else begin
        q = ratio_round(fp16_mag_fixed(buf_q[i][14:0]), maxpf, 12);
        code_d[i] = dfq_pos_qlut(q);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (s2_adv) out_valid <= s1_valid;
  end

  always_ff @(posedge clk) begin
    if (s2_adv && s1_valid) begin
      out_code      <= code_d;
      out_scale_neg <= sn_d;
      out_scale_pos <= sp_d;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_scale_pos));
endmodule
