// tb_gemm_unit: self-checking test of the GeMM unit in both configurations.
//
// Two instances (FP4-E2M1, LANES = 3, and DFQ, LANES = 2) share one activation stream
// and read weights from testbench memories with one cycle of read latency.  Two jobs
// run back to back (2 tiles x 3 groups from word 5, then 1 tile x 1 group from word 0),
// with random gaps in the activation stream.  For every lane and tile the result is
// compared with a real-arithmetic reference built from the code values; the 4-cycle
// latency from the tile's last accepted group to res_valid, and done/busy, are checked.
module tb_gemm_unit;
  import tb_pkg::*;
  localparam int G = 128, L1 = 3, L2 = 2, AW = 4;
  localparam int WL = 16 + 4 * G;

  logic          clk = 0, rst_n = 0;
  logic          start = 0;
  logic [15:0]   n_groups = 0, n_tiles = 0;
  logic [AW-1:0] w_base = 0;
  logic          busy1, done1, busy2, done2;
  logic          a_valid = 0, a_ready1, a_ready2;
  logic [3:0]    a_code [G];
  logic [15:0]   a_scale = 0, a_scale_neg = 0;
  logic          r1_en, r2_en;
  logic [AW-1:0] r1_addr, r2_addr;
  logic [L1*WL-1:0] r1_data, mem1 [16];
  logic [L2*WL-1:0] r2_data, mem2 [16];
  logic          v1, v2;
  logic [31:0]   d1 [L1];
  logic [31:0]   d2 [L2];
  logic [15:0]   t1, t2;
  int checks = 0, failures = 0, cyc = 0;

  gemm_unit #(.G(G), .LANES(L1), .DFQ(1'b0), .AW(AW)) dut1 (
    .clk, .rst_n, .start, .n_groups, .n_tiles, .w_base, .busy(busy1), .done(done1),
    .a_valid, .a_ready(a_ready1), .a_code, .a_scale, .a_scale_neg,
    .w_rd_en(r1_en), .w_rd_addr(r1_addr), .w_rd_data(r1_data),
    .res_valid(v1), .res_data(d1), .res_tile(t1));
  gemm_unit #(.G(G), .LANES(L2), .DFQ(1'b1), .AW(AW)) dut2 (
    .clk, .rst_n, .start, .n_groups, .n_tiles, .w_base, .busy(busy2), .done(done2),
    .a_valid, .a_ready(a_ready2), .a_code, .a_scale, .a_scale_neg,
    .w_rd_en(r2_en), .w_rd_addr(r2_addr), .w_rd_data(r2_data),
    .res_valid(v2), .res_data(d2), .res_tile(t2));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (r1_en) r1_data <= mem1[r1_addr];
    if (r2_en) r2_data <= mem2[r2_addr];
  end

  function automatic real wval(input logic [L1*WL-1:0] word, input int l, input int i);
    return e2m1_val(word[l*WL + 4*i +: 4]);
  endfunction
  function automatic real wscale(input logic [L1*WL-1:0] word, input int l);
    return fp16_to_real(word[l*WL + 4*G +: 16]);
  endfunction

  real exp1 [8][L1], mag1 [8][L1], exp2 [8][L2], mag2 [8][L2];
  int  t_last [8];
  int  nres1 = 0, nres2 = 0, ndone = 0, ntile_hs = 0, gcount = 0, cur_ng = 1;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && a_valid && a_ready1) begin
      gcount++;
      if (gcount % cur_ng == 0) begin t_last[ntile_hs] = cyc; ntile_hs++; end
    end
    if (rst_n && v1) begin
      checks++;
      if (cyc - t_last[nres1] != 4) begin failures++; $display("latency %0d", cyc - t_last[nres1]); end
      for (int l = 0; l < L1; l++) begin
        checks++;
        if (rabs(fp32_to_real(d1[l]) - exp1[nres1][l]) > 1e-5 * mag1[nres1][l] + 1e-30) begin
          failures++; $display("E2M1 tile %0d lane %0d: %g expected %g", nres1, l, fp32_to_real(d1[l]), exp1[nres1][l]);
        end
      end
      nres1++;
    end
    if (rst_n && v2) begin
      for (int l = 0; l < L2; l++) begin
        checks++;
        if (rabs(fp32_to_real(d2[l]) - exp2[nres2][l]) > 1e-5 * mag2[nres2][l] + 1e-30) begin
          failures++; $display("DFQ tile %0d lane %0d: %g expected %g", nres2, l, fp32_to_real(d2[l]), exp2[nres2][l]);
        end
      end
      nres2++;
    end
    if (rst_n && done1) ndone++;
  end

  task automatic job(input int ng, input int nt, input int base, input int first_tile);
    real p, sxv, sxn;
    logic [L1*WL-1:0] w2x;
    @(negedge clk);
    start = 1; n_groups = 16'(ng); n_tiles = 16'(nt); w_base = AW'(base); cur_ng = ng;
    @(negedge clk);
    start = 0;
    for (int t = 0; t < nt; t++) begin
      for (int l = 0; l < L1; l++) begin exp1[first_tile+t][l] = 0; mag1[first_tile+t][l] = 0; end
      for (int l = 0; l < L2; l++) begin exp2[first_tile+t][l] = 0; mag2[first_tile+t][l] = 0; end
      for (int g = 0; g < ng; g++) begin
        while ($urandom % 3 == 0) @(negedge clk);
        a_valid = 1;
        for (int i = 0; i < G; i++) a_code[i] = 4'($urandom);
        a_scale = rand_fp16(10, 18, 1'b0); a_scale_neg = rand_fp16(6, 14, 1'b0);
        sxv = fp16_to_real(a_scale); sxn = fp16_to_real(a_scale_neg);
        for (int l = 0; l < L1; l++)
          for (int i = 0; i < G; i++) begin
            p = e2m1_val(a_code[i]) * wval(mem1[base + t*ng + g], l, i) * sxv * wscale(mem1[base + t*ng + g], l);
            exp1[first_tile+t][l] += p; mag1[first_tile+t][l] += rabs(p);
          end
        w2x = '0;
        w2x[L2*WL-1:0] = mem2[base + t*ng + g];
        for (int l = 0; l < L2; l++)
          for (int i = 0; i < G; i++) begin
            p = dfq_val(a_code[i]) * wval(w2x, l, i) * (a_code[i][3] ? sxn : sxv) * wscale(w2x, l);
            exp2[first_tile+t][l] += p; mag2[first_tile+t][l] += rabs(p);
          end
        while (!a_ready1) @(negedge clk);
        @(negedge clk);
        a_valid = 0;
      end
    end
  endtask

  initial begin
    for (int i = 0; i < G; i++) a_code[i] = '0;
    for (int w = 0; w < 16; w++) begin
      for (int b = 0; b < L1*WL; b += 32) mem1[w][b +: 32] = $urandom;
      for (int b = 0; b < L2*WL; b += 32) mem2[w][b +: 32] = $urandom;
      for (int l = 0; l < L1; l++) mem1[w][l*WL + 4*G +: 16] = rand_fp16(8, 16, 1'b0);
      for (int l = 0; l < L2; l++) mem2[w][l*WL + 4*G +: 16] = rand_fp16(8, 16, 1'b0);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    job(3, 2, 5, 0);
    while (ndone < 1) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (busy1 || busy2) begin failures++; $display("busy after done"); end
    job(1, 1, 0, 2);
    while (ndone < 2) @(negedge clk);
    repeat (3) @(negedge clk);
    checks += 2;
    if (nres1 != 3 || nres2 != 3) begin failures++; $display("results %0d %0d", nres1, nres2); end
    if (ntile_hs != 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
