// fpqvar_top: programmable-logic part of the FP4 VAR transformer-block accelerator.
//
// One transformer block is mapped onto the fabric and reused for every block:
//   act1 (FP16 groups) -> ghtu -> fmu.PE1 (Quant1 + FP4-E2M1 GeMM) -> res1
//   act2 (FP16 groups) ->         fmu.PE2 (Quant2/DFQ + DFQ GeMM)   -> res2
//   global_buffer supplies both GeMM units with FP4 weight words;
//   pipeline_scheduler runs the phases of n_blocks blocks with the second-level overlap.
// First-level pipeline: rotation (GHTU), quantization and matrix multiplication work on
// consecutive 128-element groups at the same time, linked by valid/ready handshakes.
// Second-level pipeline: the Condition MLP of block b+1 (PE1) overlaps FC2 of block b
// (PE2) when overlap_en = 1.  Activation groups are rotated only in the main phase
// (inputs of QKV projection and FC1); the Condition MLP bypasses the GHTU.
//
// The special function unit (LayerNorm, Softmax, GeLU, attention), the AXI port, the
// processing system with its memory controller and the LPDDR are not part of this RTL:
// their connections appear as ports.  act1/act2 carry the FP16 activation groups the
// SFU would produce; pe1_start/pe1_job/pe1_blk and pe2_start/pe2_blk tell that source
// which phase's activations to send; wa_*/wb_* are the AXI-side weight writes.
//
// Each job descriptor (mlp_job, main_job, fc2_job) gives tiles, groups and the weight
// base address of that phase; the same descriptors are used for every block.
// The GeMM busy flags and the Quant2 activity flag are connected but not needed here (the
// scheduler works from the done pulses), so the lint tool lists them as unused.
// The structure (GHTU, FMU with two GeMM units, global buffer, two-level pipeline)
// follows the published architecture; the ports, handshakes and job descriptors are this
// design's own.
module fpqvar_top
  import fpq_pkg::*;
#(
  parameter int unsigned G      = GROUP,
  parameter int unsigned LANES1 = 36,
  parameter int unsigned LANES2 = 24,
  parameter int unsigned DEPTH  = 64,
  parameter int unsigned BW     = 8,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned WA    = LANES1 * (16 + 4 * G),
  localparam int unsigned WB    = LANES2 * (16 + 4 * G)
) (
  input  logic          clk,
  input  logic          rst_n,
  // control
  input  logic          go,
  input  logic [BW-1:0] n_blocks,
  input  logic          overlap_en,
  input  gemm_job_t     mlp_job,
  input  gemm_job_t     main_job,
  input  gemm_job_t     fc2_job,
  output logic          busy,
  output logic          all_done,
  output logic [31:0]   overlap_cycles,
  // phase announcements to the activation source
  output logic          pe1_start,
  output job_e          pe1_job,
  output logic [BW-1:0] pe1_blk,
  output logic          pe2_start,
  output logic [BW-1:0] pe2_blk,
  // weight writes from the AXI side
  input  logic          wa_en,
  input  logic [AW-1:0] wa_addr,
  input  logic [WA-1:0] wa_data,
  input  logic          wb_en,
  input  logic [AW-1:0] wb_addr,
  input  logic [WB-1:0] wb_data,
  // FP16 activation groups
  input  logic          act1_valid,
  output logic          act1_ready,
  input  fp16_t         act1_data [G],
  input  logic          act2_valid,
  output logic          act2_ready,
  input  fp16_t         act2_data [G],
  // results
  output logic          res1_valid,
  output fp32_t         res1_data [LANES1],
  output logic [15:0]   res1_tile,
  output logic          res2_valid,
  output fp32_t         res2_data [LANES2],
  output logic [15:0]   res2_tile,
  // first-level pipeline monitor: the GHTU is working on one group while GEMM1 takes
  // an earlier, already quantized group
  output logic          l1_overlap
);
  // ---------------- scheduler
  logic job1_done, job2_done, job1_busy, job2_busy;

  pipeline_scheduler #(.BW(BW)) u_sched (
    .clk, .rst_n,
    .go, .n_blocks, .overlap_en,
    .pe1_start, .pe1_job, .pe1_blk, .pe1_done(job1_done),
    .pe2_start, .pe2_blk, .pe2_done(job2_done),
    .busy, .all_done, .overlap_cycles
  );

  gemm_job_t job1;
  assign job1 = (pe1_job == JOB_MAIN) ? main_job : mlp_job;

  // ---------------- GHTU in front of PE1
  logic  r_valid, r_ready;
  fp16_t r_data [G];

  ghtu #(.G(G)) u_ghtu (
    .clk, .rst_n,
    .in_valid(act1_valid), .in_ready(act1_ready),
    .in_rotate(pe1_job == JOB_MAIN), .in_data(act1_data),
    .out_valid(r_valid), .out_ready(r_ready), .out_data(r_data)
  );

  // ---------------- FMU and global buffer
  logic          w1_en, w2_en, q1_act, q2_act;
  logic [AW-1:0] w1_addr, w2_addr;
  logic [WA-1:0] w1_data;
  logic [WB-1:0] w2_data;

  fmu #(.G(G), .LANES1(LANES1), .LANES2(LANES2), .AW(AW)) u_fmu (
    .clk, .rst_n,
    .job1_start(pe1_start), .job1(job1), .job1_busy(job1_busy), .job1_done(job1_done),
    .act1_valid(r_valid), .act1_ready(r_ready), .act1_data(r_data),
    .w1_rd_en(w1_en), .w1_rd_addr(w1_addr), .w1_rd_data(w1_data),
    .res1_valid, .res1_data, .res1_tile,
    .job2_start(pe2_start), .job2(fc2_job), .job2_busy(job2_busy), .job2_done(job2_done),
    .act2_valid, .act2_ready, .act2_data,
    .w2_rd_en(w2_en), .w2_rd_addr(w2_addr), .w2_rd_data(w2_data),
    .res2_valid, .res2_data, .res2_tile,
    .q1_active(q1_act), .q2_active(q2_act)
  );

  global_buffer #(.WA(WA), .WB(WB), .DEPTH(DEPTH)) u_gbuf (
    .clk,
    .wa_en, .wa_addr, .wa_data, .ra_en(w1_en), .ra_addr(w1_addr), .ra_data(w1_data),
    .wb_en, .wb_addr, .wb_data, .rb_en(w2_en), .rb_addr(w2_addr), .rb_data(w2_data)
  );

  assign l1_overlap = !act1_ready && q1_act;
endmodule
