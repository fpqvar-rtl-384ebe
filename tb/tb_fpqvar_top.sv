// tb_fpqvar_top: end-to-end test of the accelerator at its default size
// (128-element groups, 36 + 24 GeMM lanes, 64-word weight banks).
//
// The testbench plays the parts around the programmable logic: it writes FP4 weight
// words through the AXI-side ports and acts as the activation source, answering each
// phase announcement (pe1_start / pe2_start) with that phase's FP16 activation groups,
// repeated once per output tile.  Two transformer blocks are run twice, first with the
// second-level overlap enabled and then disabled.
//
// Reference (all real arithmetic, from the format definitions):
//   main phase: groups are small integers, so the 128-point Hadamard transform is exact;
//               each output is then rounded to FP16 after the 1/sqrt(128) multiply, as the
//               unit's output is FP16;
//   quantization: s = max|x|/6 (E2M1) or s- = max|x-|/3.5, s+ = max(x+)/6 (DFQ), 2x/s
//               rounded to an integer, then the nearest grid value;
//   GeMM:       sum over groups of s * s_w * sum(a_i * w_i) per lane and tile.
// Results must match within 1e-3 of the sum of absolute terms (the hardware scale is max
// times a rounded FP16 reciprocal).  Mechanisms counted, each must occur: rotation and
// bypass in the GHTU, input stalls of the GHTU, cycles where the GHTU rotates one group while
// the GeMM takes an earlier one (first-level pipeline), MLP/FC2 overlap (second-level pipeline), negative
// and positive DFQ parts, multi-tile jobs, and the mode switch (overlap must be faster).
module tb_fpqvar_top;
  import fpq_pkg::*;
  import tb_pkg::*;
  localparam int G = 128, L1 = 36, L2 = 24, DEPTH = 64, AW = 6;
  localparam int WL = 16 + 4 * G;
  localparam int WA = L1 * WL, WB = L2 * WL;
  localparam int NB = 2;

  logic          clk = 0, rst_n = 0, go = 0, overlap_en = 1;
  logic [7:0]    n_blocks = NB;
  gemm_job_t     mlp_job, main_job, fc2_job;
  logic          busy, all_done;
  logic [31:0]   overlap_cycles;
  logic          pe1_start, pe2_start;
  job_e          pe1_job;
  logic [7:0]    pe1_blk, pe2_blk;
  logic          wa_en = 0, wb_en = 0;
  logic [AW-1:0] wa_addr = 0, wb_addr = 0;
  logic [WA-1:0] wa_data = 0;
  logic [WB-1:0] wb_data = 0;
  logic          act1_valid = 0, act1_ready, act2_valid = 0, act2_ready;
  logic [15:0]   act1_data [G], act2_data [G];
  logic          res1_valid, res2_valid, l1_overlap;
  logic [31:0]   res1_data [L1];
  logic [31:0]   res2_data [L2];
  logic [15:0]   res1_tile, res2_tile;

  fpqvar_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  // mechanism counters
  int n_rot = 0, n_bypass = 0, n_stall = 0, n_l1 = 0, n_neg = 0, n_pos = 0, n_multitile = 0;

  logic [WA-1:0] wmem_a [DEPTH];
  logic [WB-1:0] wmem_b [DEPTH];

  // activation rows per phase kind and block: [kind][blk][group][elem]
  logic [15:0] row [3][NB][8][G];

  function automatic real wa_val(input int word, input int l, input int i);
    return e2m1_val(wmem_a[word][l*WL + 4*i +: 4]);
  endfunction
  function automatic real wa_scale(input int word, input int l);
    return fp16_to_real(wmem_a[word][l*WL + 4*G +: 16]);
  endfunction
  function automatic real wb_val(input int word, input int l, input int i);
    return e2m1_val(wmem_b[word][l*WL + 4*i +: 4]);
  endfunction
  function automatic real wb_scale(input int word, input int l);
    return fp16_to_real(wmem_b[word][l*WL + 4*G +: 16]);
  endfunction

  // Expected results of the running PE1 / PE2 job: [tile][lane]
  real e1 [4][L1], m1 [4][L1], e2 [4][L2], m2 [4][L2];
  int  r1 = 0, r2 = 0;

  task automatic expect_pe1(input job_e kind, input int blk);
    gemm_job_t j;
    real z [G];
    real tmp [G];
    real mx, s, p;
    int  h;
    logic [3:0] c [G];
    j = (kind == JOB_MAIN) ? main_job : mlp_job;
    for (int t = 0; t < 4; t++) for (int l = 0; l < L1; l++) begin e1[t][l] = 0; m1[t][l] = 0; end
    for (int g = 0; g < int'(j.n_groups); g++) begin
      for (int i = 0; i < G; i++) z[i] = fp16_to_real(row[kind][blk][g][i]);
      if (kind == JOB_MAIN) begin
        h = 1;
        while (h < G) begin
          for (int i = 0; i < G; i++) tmp[i] = ((i / h) % 2 == 0) ? z[i] + z[i + h] : z[i - h] - z[i];
          z = tmp;
          h = h * 2;
        end
        for (int i = 0; i < G; i++) z[i] = fp16_to_real(real_to_fp16(z[i] * fp16_to_real(16'h2DA8)));
      end
      mx = 0;
      for (int i = 0; i < G; i++) if (rabs(z[i]) > mx) mx = rabs(z[i]);
      s = mx / 6.0;
      for (int i = 0; i < G; i++) c[i] = (mx == 0.0) ? 4'b0000 : lut_quant(z[i] / s, 0);
      for (int t = 0; t < int'(j.n_tiles); t++)
        for (int l = 0; l < L1; l++)
          for (int i = 0; i < G; i++) begin
            p = e2m1_val(c[i]) * wa_val(int'(j.w_base) + t * int'(j.n_groups) + g, l, i) * s
                * wa_scale(int'(j.w_base) + t * int'(j.n_groups) + g, l);
            e1[t][l] += p; m1[t][l] += rabs(p);
          end
    end
    r1 = 0;
  endtask

  task automatic expect_pe2(input int blk);
    real x, mn, mp, sn, sp, p;
    logic [3:0] c [G];
    for (int t = 0; t < 4; t++) for (int l = 0; l < L2; l++) begin e2[t][l] = 0; m2[t][l] = 0; end
    for (int g = 0; g < int'(fc2_job.n_groups); g++) begin
      mn = 0; mp = 0;
      for (int i = 0; i < G; i++) begin
        x = fp16_to_real(row[JOB_FC2][blk][g][i]);
        if (x <= 0 && -x > mn) mn = -x;
        if (x > 0 && x > mp) mp = x;
      end
      sn = mn / 3.5; sp = mp / 6.0;
      for (int i = 0; i < G; i++) begin
        x = fp16_to_real(row[JOB_FC2][blk][g][i]);
        if (x <= 0) c[i] = (mn == 0.0) ? 4'b0000 : lut_quant(x / sn, 1);
        else        c[i] = lut_quant(x / sp, 2);
        if (c[i][3] && c[i][2:0] != 0) n_neg++;
        if (!c[i][3] && c[i][2:0] != 0) n_pos++;
      end
      for (int t = 0; t < int'(fc2_job.n_tiles); t++)
        for (int l = 0; l < L2; l++)
          for (int i = 0; i < G; i++) begin
            p = dfq_val(c[i]) * (c[i][3] ? sn : sp) * wb_val(int'(fc2_job.w_base) + t * int'(fc2_job.n_groups) + g, l, i)
                * wb_scale(int'(fc2_job.w_base) + t * int'(fc2_job.n_groups) + g, l);
            e2[t][l] += p; m2[t][l] += rabs(p);
          end
    end
    r2 = 0;
  endtask

  // ---------------- monitors
  job_e cur1_kind; int cur1_blk, cur2_blk;
  bit   pe1_go = 0, pe2_go = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (act1_valid && !act1_ready) n_stall++;
      if (l1_overlap) n_l1++;
      if (pe1_start) begin
        cur1_kind = pe1_job; cur1_blk = pe1_blk;
        expect_pe1(pe1_job, pe1_blk);
        pe1_go = 1;
        if (pe1_job == JOB_MAIN) n_rot++; else n_bypass++;
      end
      if (pe2_start) begin
        cur2_blk = pe2_blk;
        expect_pe2(pe2_blk);
        pe2_go = 1;
      end
      if (res1_valid) begin
        if (res1_tile > 0) n_multitile++;
        for (int l = 0; l < L1; l++) begin
          checks++;
          if (rabs(fp32_to_real(res1_data[l]) - e1[r1][l]) > 1e-3 * m1[r1][l] + 1e-20) begin
            failures++;
            if (failures < 10) $display("PE1 job %0d blk %0d tile %0d lane %0d: %g expected %g",
                                        cur1_kind, cur1_blk, r1, l, fp32_to_real(res1_data[l]), e1[r1][l]);
          end
        end
        r1++;
      end
      if (res2_valid) begin
        for (int l = 0; l < L2; l++) begin
          checks++;
          if (rabs(fp32_to_real(res2_data[l]) - e2[r2][l]) > 1e-3 * m2[r2][l] + 1e-20) begin
            failures++;
            if (failures < 10) $display("PE2 blk %0d tile %0d lane %0d: %g expected %g",
                                        cur2_blk, r2, l, fp32_to_real(res2_data[l]), e2[r2][l]);
          end
        end
        r2++;
      end
    end
  end

  // ---------------- activation sources
  initial forever begin
    gemm_job_t j;
    @(negedge clk);
    if (pe1_go) begin
      pe1_go = 0;
      j = (cur1_kind == JOB_MAIN) ? main_job : mlp_job;
      for (int t = 0; t < int'(j.n_tiles); t++)
        for (int g = 0; g < int'(j.n_groups); g++) begin
          act1_valid = 1; act1_data = row[cur1_kind][cur1_blk][g];
          while (!act1_ready) @(negedge clk);
          @(negedge clk);
          act1_valid = 0;
        end
    end
  end

  initial forever begin
    @(negedge clk);
    if (pe2_go) begin
      pe2_go = 0;
      for (int t = 0; t < int'(fc2_job.n_tiles); t++)
        for (int g = 0; g < int'(fc2_job.n_groups); g++) begin
          act2_valid = 1; act2_data = row[JOB_FC2][cur2_blk][g];
          while (!act2_ready) @(negedge clk);
          @(negedge clk);
          act2_valid = 0;
        end
    end
  end

  // ---------------- main sequence
  initial begin
    int t0, t_ov, t_seq;
    mlp_job  = '{n_groups: 16'd2, n_tiles: 16'd1, w_base: 16'd0};
    main_job = '{n_groups: 16'd3, n_tiles: 16'd2, w_base: 16'd2};
    fc2_job  = '{n_groups: 16'd4, n_tiles: 16'd2, w_base: 16'd0};
    for (int i = 0; i < G; i++) begin act1_data[i] = '0; act2_data[i] = '0; end
    for (int b = 0; b < NB; b++)
      for (int g = 0; g < 8; g++)
        for (int i = 0; i < G; i++) begin
          row[JOB_COND_MLP][b][g][i] = rand_fp16(8, 16, 1'b1);
          row[JOB_MAIN][b][g][i]     = real_to_fp16(real'(int'($urandom % 17) - 8));
          row[JOB_FC2][b][g][i]      = ($urandom % 10 < 8) ? {1'b1, 15'(rand_fp16(6, 12, 1'b0))}
                                                          : rand_fp16(10, 17, 1'b0);
        end
    for (int w = 0; w < DEPTH; w++) begin
      for (int b = 0; b < WA; b += 32) wmem_a[w][b +: 32] = $urandom;
      for (int b = 0; b < WB; b += 32) wmem_b[w][b +: 32] = $urandom;
      for (int l = 0; l < L1; l++) wmem_a[w][l*WL + 4*G +: 16] = rand_fp16(8, 16, 1'b0);
      for (int l = 0; l < L2; l++) wmem_b[w][l*WL + 4*G +: 16] = rand_fp16(8, 16, 1'b0);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // weight load through the AXI-side ports
    for (int w = 0; w < 16; w++) begin
      @(negedge clk);
      wa_en = 1; wa_addr = AW'(w); wa_data = wmem_a[w];
      wb_en = 1; wb_addr = AW'(w); wb_data = wmem_b[w];
    end
    @(negedge clk);
    wa_en = 0; wb_en = 0;
    // run with the second-level overlap, then without
    for (int run = 0; run < 2; run++) begin
      @(negedge clk);
      overlap_en = (run == 0); go = 1; t0 = cyc;
      @(negedge clk);
      go = 0;
      while (!all_done) @(negedge clk);
      if (run == 0) t_ov = cyc - t0; else t_seq = cyc - t0;
      if (run == 0) begin
        checks++;
        if (overlap_cycles == 0) begin failures++; $display("no second-level overlap"); end
      end else begin
        checks++;
        if (overlap_cycles != 0) begin failures++; $display("overlap in sequential mode"); end
      end
      repeat (5) @(negedge clk);
    end
    checks += 9;
    if (t_ov >= t_seq)    begin failures++; $display("overlap not faster %0d vs %0d", t_ov, t_seq); end
    if (n_rot == 0)       begin failures++; $display("no rotated phase"); end
    if (n_bypass == 0)    begin failures++; $display("no bypassed phase"); end
    if (n_stall == 0)     begin failures++; $display("no GHTU input stall"); end
    if (n_l1 == 0)        begin failures++; $display("no first-level overlap"); end
    if (n_neg == 0)       begin failures++; $display("no negative DFQ part"); end
    if (n_pos == 0)       begin failures++; $display("no positive DFQ part"); end
    if (n_multitile == 0) begin failures++; $display("no multi-tile job"); end
    if (r1 == 0 || r2 == 0) begin failures++; $display("no results"); end
    $display("cycles: overlapped %0d, sequential %0d; rotated %0d, bypassed %0d, stalls %0d, L1 overlap %0d, neg %0d pos %0d, multitile %0d",
             t_ov, t_seq, n_rot, n_bypass, n_stall, n_l1, n_neg, n_pos, n_multitile);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
