// tb_fmu: self-checking test of the FP Matrix Multiplication Unit with both pipelines
// running at the same time (reduced to 2 lanes per GeMM unit).
//
// PE1 gets random FP16 groups for a 2-tile x 2-group FP4-E2M1 job, PE2 gets FC2-like
// groups for a 1-tile x 3-group DFQ job; weights come from testbench memories with one
// cycle of read latency.  The reference quantizes in real arithmetic (s = max/6, or
// s- = max|x-|/3.5 and s+ = max(x+)/6; 2x/s rounded to an integer, then the nearest grid
// value) and forms the scaled dot products; results must agree within 1e-3 of the sum
// of absolute terms.  Both units must be busy in a common cycle.  The pairing of an E2M1
// and a DFQ pipeline follows the published unit; the lane count here is reduced for speed.
module tb_fmu;
  import fpq_pkg::*;
  import tb_pkg::*;
  localparam int G = 128, L = 2, AW = 4, WL = 16 + 4 * G;

  logic clk = 0, rst_n = 0;
  logic j1s = 0, j2s = 0, j1b, j1d, j2b, j2d;
  gemm_job_t job1, job2;
  logic a1v = 0, a1r, a2v = 0, a2r;
  logic [15:0] a1d [G], a2d [G];
  logic w1e, w2e;
  logic [AW-1:0] w1a, w2a;
  logic [L*WL-1:0] w1d, w2d, m1 [16], m2 [16];
  logic r1v, r2v, q1a, q2a;
  logic [31:0] r1d [L], r2d [L];
  logic [15:0] r1t, r2t;
  int checks = 0, failures = 0, both = 0;

  fmu #(.G(G), .LANES1(L), .LANES2(L), .AW(AW)) dut (
    .clk, .rst_n,
    .job1_start(j1s), .job1, .job1_busy(j1b), .job1_done(j1d),
    .act1_valid(a1v), .act1_ready(a1r), .act1_data(a1d),
    .w1_rd_en(w1e), .w1_rd_addr(w1a), .w1_rd_data(w1d),
    .res1_valid(r1v), .res1_data(r1d), .res1_tile(r1t),
    .job2_start(j2s), .job2, .job2_busy(j2b), .job2_done(j2d),
    .act2_valid(a2v), .act2_ready(a2r), .act2_data(a2d),
    .w2_rd_en(w2e), .w2_rd_addr(w2a), .w2_rd_data(w2d),
    .res2_valid(r2v), .res2_data(r2d), .res2_tile(r2t),
    .q1_active(q1a), .q2_active(q2a));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (w1e) w1d <= m1[w1a];
    if (w2e) w2d <= m2[w2a];
    if (j1b && j2b) both++;
  end

  logic [15:0] row1 [2][G], row2 [3][G];
  real e1 [2][L], g1 [2][L], e2 [L], g2 [L];
  int  n1 = 0, n2 = 0;

  always @(posedge clk) if (rst_n) begin
    if (r1v) begin
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rabs(fp32_to_real(r1d[l]) - e1[n1][l]) > 1e-3 * g1[n1][l] + 1e-20) begin
          failures++; $display("PE1 tile %0d lane %0d: %g expected %g", n1, l, fp32_to_real(r1d[l]), e1[n1][l]);
        end
      end
      n1++;
    end
    if (r2v) begin
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rabs(fp32_to_real(r2d[l]) - e2[l]) > 1e-3 * g2[l] + 1e-20) begin
          failures++; $display("PE2 lane %0d: %g expected %g", l, fp32_to_real(r2d[l]), e2[l]);
        end
      end
      n2++;
    end
  end

  initial begin
    real x, mx, mn, mp, s, sn, sp, p;
    logic [3:0] c;
    for (int w = 0; w < 16; w++) begin
      for (int b = 0; b < L*WL; b += 32) begin m1[w][b +: 32] = $urandom; m2[w][b +: 32] = $urandom; end
      for (int l = 0; l < L; l++) begin
        m1[w][l*WL + 4*G +: 16] = rand_fp16(8, 16, 1'b0);
        m2[w][l*WL + 4*G +: 16] = rand_fp16(8, 16, 1'b0);
      end
    end
    for (int g = 0; g < 2; g++) for (int i = 0; i < G; i++) row1[g][i] = rand_fp16(8, 18, 1'b1);
    for (int g = 0; g < 3; g++) for (int i = 0; i < G; i++)
      row2[g][i] = ($urandom % 10 < 8) ? {1'b1, 15'(rand_fp16(6, 12, 1'b0))} : rand_fp16(10, 17, 1'b0);
    job1 = '{n_groups: 16'd2, n_tiles: 16'd2, w_base: 16'd4};
    job2 = '{n_groups: 16'd3, n_tiles: 16'd1, w_base: 16'd9};
    // references
    for (int t = 0; t < 2; t++) for (int l = 0; l < L; l++) begin e1[t][l] = 0; g1[t][l] = 0; end
    for (int l = 0; l < L; l++) begin e2[l] = 0; g2[l] = 0; end
    for (int g = 0; g < 2; g++) begin
      mx = 0;
      for (int i = 0; i < G; i++) if (rabs(fp16_to_real(row1[g][i])) > mx) mx = rabs(fp16_to_real(row1[g][i]));
      s = mx / 6.0;
      for (int i = 0; i < G; i++) begin
        c = lut_quant(fp16_to_real(row1[g][i]) / s, 0);
        for (int t = 0; t < 2; t++) for (int l = 0; l < L; l++) begin
          p = e2m1_val(c) * s * e2m1_val(m1[4 + 2*t + g][l*WL + 4*i +: 4]) * fp16_to_real(m1[4 + 2*t + g][l*WL + 4*G +: 16]);
          e1[t][l] += p; g1[t][l] += rabs(p);
        end
      end
    end
    for (int g = 0; g < 3; g++) begin
      mn = 0; mp = 0;
      for (int i = 0; i < G; i++) begin
        x = fp16_to_real(row2[g][i]);
        if (x <= 0 && -x > mn) mn = -x;
        if (x > 0 && x > mp) mp = x;
      end
      sn = mn / 3.5; sp = mp / 6.0;
      for (int i = 0; i < G; i++) begin
        x = fp16_to_real(row2[g][i]);
        c = (x <= 0) ? lut_quant(x / sn, 1) : lut_quant(x / sp, 2);
        for (int l = 0; l < L; l++) begin
          p = dfq_val(c) * (c[3] ? sn : sp) * e2m1_val(m2[9 + g][l*WL + 4*i +: 4]) * fp16_to_real(m2[9 + g][l*WL + 4*G +: 16]);
          e2[l] += p; g2[l] += rabs(p);
        end
      end
    end
    for (int i = 0; i < G; i++) begin a1d[i] = '0; a2d[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    j1s = 1; j2s = 1;
    @(negedge clk);
    j1s = 0; j2s = 0;
    fork
      for (int t = 0; t < 2; t++) for (int g = 0; g < 2; g++) begin
        a1v = 1; a1d = row1[g];
        while (!a1r) @(negedge clk);
        @(negedge clk);
        a1v = 0;
      end
      for (int g = 0; g < 3; g++) begin
        a2v = 1; a2d = row2[g];
        while (!a2r) @(negedge clk);
        @(negedge clk);
        a2v = 0;
        @(negedge clk);
      end
    join
    repeat (12) @(negedge clk);
    checks += 2;
    if (n1 != 2 || n2 != 1) begin failures++; $display("result counts %0d %0d", n1, n2); end
    if (both == 0) begin failures++; $display("units never busy together"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
