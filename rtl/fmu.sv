// fmu: FP Matrix Multiplication Unit -- two quantizer + GeMM pipelines.
//
//   PE1: fp4_e2m1_quantizer ("Quant1") -> gemm_unit DFQ=0 (FP4-E2M1 GeMM, "GEMM1"),
//        used for the Condition MLP, QKV projection, Out projection and FC1;
//   PE2: dfq_quantizer ("Quant2")      -> gemm_unit DFQ=1 (DFQ GeMM, "GEMM2"), used for FC2.
// The two pipelines are independent so that PE1 and PE2 can work at the same time.
// Each takes FP16 activation groups (PE1's come through the GHTU), quantizes them group
// by group and feeds the GeMM unit, so quantization and multiplication of consecutive
// groups overlap.  Lane counts: LANES1 = 36 and LANES2 = 24 lanes of 128 multipliers
// give 7680 FP4 MACs per cycle, 15360 ops per cycle, 6144 GOPS at 400 MHz, the reported
// throughput; the 36:24 split follows the reported 576:384 DSP split of the two GeMM
// units (16 DSP blocks per lane in both).  The lane counts are this design's reading of those figures.
//
// Interface: see gemm_unit for jobs, weight ports and results.  Timing: a group is in
// a GeMM lane 2 cycles after its quantizer handshake; results follow gemm_unit.
module fmu
  import fpq_pkg::*;
#(
  parameter int unsigned G      = GROUP,
  parameter int unsigned LANES1 = 36,
  parameter int unsigned LANES2 = 24,
  parameter int unsigned AW     = 6,
  localparam int unsigned WA    = LANES1 * (16 + 4 * G),
  localparam int unsigned WB    = LANES2 * (16 + 4 * G)
) (
  input  logic          clk,
  input  logic          rst_n,
  // PE1: FP4-E2M1 path
  input  logic          job1_start,
  input  gemm_job_t     job1,
  output logic          job1_busy,
  output logic          job1_done,
  input  logic          act1_valid,
  output logic          act1_ready,
  input  fp16_t         act1_data [G],
  output logic          w1_rd_en,
  output logic [AW-1:0] w1_rd_addr,
  input  logic [WA-1:0] w1_rd_data,
  output logic          res1_valid,
  output fp32_t         res1_data [LANES1],
  output logic [15:0]   res1_tile,
  // PE2: DFQ path
  input  logic          job2_start,
  input  gemm_job_t     job2,
  output logic          job2_busy,
  output logic          job2_done,
  input  logic          act2_valid,
  output logic          act2_ready,
  input  fp16_t         act2_data [G],
  output logic          w2_rd_en,
  output logic [AW-1:0] w2_rd_addr,
  input  logic [WB-1:0] w2_rd_data,
  output logic          res2_valid,
  output fp32_t         res2_data [LANES2],
  output logic [15:0]   res2_tile,
  // activity, for pipeline monitoring
  output logic          q1_active,
  output logic          q2_active
);
  // ---------------- PE1
  logic  q1_valid, q1_ready;
  fp4_t  q1_code [G];
  fp16_t q1_scale;

  fp4_e2m1_quantizer #(.G(G)) u_quant1 (
    .clk, .rst_n,
    .in_valid (act1_valid), .in_ready (act1_ready), .in_data (act1_data),
    .out_valid(q1_valid),   .out_ready(q1_ready),   .out_code(q1_code), .out_scale(q1_scale)
  );

  gemm_unit #(.G(G), .LANES(LANES1), .DFQ(1'b0), .AW(AW)) u_gemm1 (
    .clk, .rst_n,
    .start(job1_start), .n_groups(job1.n_groups), .n_tiles(job1.n_tiles),
    .w_base(job1.w_base[AW-1:0]), .busy(job1_busy), .done(job1_done),
    .a_valid(q1_valid), .a_ready(q1_ready), .a_code(q1_code),
    .a_scale(q1_scale), .a_scale_neg(16'h0000),
    .w_rd_en(w1_rd_en), .w_rd_addr(w1_rd_addr), .w_rd_data(w1_rd_data),
    .res_valid(res1_valid), .res_data(res1_data), .res_tile(res1_tile)
  );

  // ---------------- PE2
  logic  q2_valid, q2_ready;
  fp4_t  q2_code [G];
  fp16_t q2_sneg, q2_spos;

  dfq_quantizer #(.G(G)) u_quant2 (
    .clk, .rst_n,
    .in_valid (act2_valid), .in_ready (act2_ready), .in_data (act2_data),
    .out_valid(q2_valid),   .out_ready(q2_ready),   .out_code(q2_code),
    .out_scale_neg(q2_sneg), .out_scale_pos(q2_spos)
  );

  gemm_unit #(.G(G), .LANES(LANES2), .DFQ(1'b1), .AW(AW)) u_gemm2 (
    .clk, .rst_n,
    .start(job2_start), .n_groups(job2.n_groups), .n_tiles(job2.n_tiles),
    .w_base(job2.w_base[AW-1:0]), .busy(job2_busy), .done(job2_done),
    .a_valid(q2_valid), .a_ready(q2_ready), .a_code(q2_code),
    .a_scale(q2_spos), .a_scale_neg(q2_sneg),
    .w_rd_en(w2_rd_en), .w_rd_addr(w2_rd_addr), .w_rd_data(w2_rd_data),
    .res_valid(res2_valid), .res_data(res2_data), .res_tile(res2_tile)
  );

  assign q1_active = q1_valid && q1_ready;
  assign q2_active = q2_valid && q2_ready;
endmodule
