// tb_dot_pe: self-checking test of a GeMM lane, in both the FP4-E2M1 (DFQ=0) and the
// DFQ (DFQ=1) configuration.
//
// Random codes and FP16 scales are streamed one group per cycle without gaps, for
// outputs of 1..5 groups each.  The reference sums, in real arithmetic,
//   Sx * Sw * sum(a_i * w_i)                       (E2M1 lane)
//   Sw * (s- * sum_neg(a_i * w_i) + s+ * sum_pos(a_i * w_i))  (DFQ lane)
// with code values taken from the encoding table, and allows an FP32 rounding error of
// 1e-5 of the sum of absolute terms.  The 3-cycle latency from the last group to
// out_valid is checked for every output.
module tb_dot_pe;
  import tb_pkg::*;
  localparam int G = 128;
  localparam int NOUT = 12;

  logic        clk = 0, rst_n = 0;
  logic        in_valid, first, last;
  logic [3:0]  a_code [G], w_code [G];
  logic [15:0] sx, sx_neg, sw;
  logic        ov0, ov1;
  logic [31:0] acc0, acc1;
  int checks = 0, failures = 0, cyc = 0;

  dot_pe #(.G(G), .DFQ(1'b0)) dut0 (.clk, .rst_n, .in_valid, .first, .last, .a_code, .w_code,
                                    .sx, .sx_neg, .sw, .out_valid(ov0), .out_acc(acc0));
  dot_pe #(.G(G), .DFQ(1'b1)) dut1 (.clk, .rst_n, .in_valid, .first, .last, .a_code, .w_code,
                                    .sx, .sx_neg, .sw, .out_valid(ov1), .out_acc(acc1));

  always #5 clk = ~clk;

  real exp0 [NOUT], exp1 [NOUT], mag0 [NOUT], mag1 [NOUT];
  int  t_last [NOUT];
  int  got0 = 0, got1 = 0, nlast = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && in_valid && last) begin t_last[nlast] = cyc; nlast++; end
    if (rst_n && ov0) begin
      checks += 2;
      if (rabs(fp32_to_real(acc0) - exp0[got0]) > 1e-5 * mag0[got0] + 1e-30) begin
        failures++;
        $display("E2M1 out %0d: %g expected %g", got0, fp32_to_real(acc0), exp0[got0]);
      end
      if (cyc - t_last[got0] != 3) begin
        failures++;
        $display("E2M1 out %0d latency %0d", got0, cyc - t_last[got0]);
      end
      got0++;
    end
    if (rst_n && ov1) begin
      checks++;
      if (rabs(fp32_to_real(acc1) - exp1[got1]) > 1e-5 * mag1[got1] + 1e-30) begin
        failures++;
        $display("DFQ out %0d: %g expected %g", got1, fp32_to_real(acc1), exp1[got1]);
      end
      got1++;
    end
  end

  initial begin
    int ng;
    real d0, d1n, d1p, m0, m1n, m1p, p;
    in_valid = 0; first = 0; last = 0;
    sx = '0; sx_neg = '0; sw = '0;
    for (int i = 0; i < G; i++) begin a_code[i] = '0; w_code[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int o = 0; o < NOUT; o++) begin
      ng = 1 + o % 5;
      exp0[o] = 0.0; exp1[o] = 0.0; mag0[o] = 0.0; mag1[o] = 0.0;
      for (int g = 0; g < ng; g++) begin
        in_valid <= 1;
        first    <= (g == 0);
        last     <= (g == ng - 1);
        sx       <= rand_fp16(8, 20, 1'b0);
        sx_neg   <= rand_fp16(4, 14, 1'b0);
        sw       <= rand_fp16(8, 18, 1'b0);
        for (int i = 0; i < G; i++) begin
          a_code[i] <= 4'($urandom);
          w_code[i] <= (o == 0) ? 4'b0111 : 4'($urandom);
        end
        #1;
        d0 = 0; d1n = 0; d1p = 0; m0 = 0; m1n = 0; m1p = 0;
        for (int i = 0; i < G; i++) begin
          p = e2m1_val(a_code[i]) * e2m1_val(w_code[i]);
          d0 += p; m0 += rabs(p);
          p = dfq_val(a_code[i]) * e2m1_val(w_code[i]);
          if (a_code[i][3]) begin d1n += p; m1n += rabs(p); end
          else              begin d1p += p; m1p += rabs(p); end
        end
        exp0[o] += fp16_to_real(sx) * fp16_to_real(sw) * d0;
        mag0[o] += fp16_to_real(sx) * fp16_to_real(sw) * m0;
        exp1[o] += fp16_to_real(sw) * (fp16_to_real(sx_neg) * d1n + fp16_to_real(sx) * d1p);
        mag1[o] += fp16_to_real(sw) * (fp16_to_real(sx_neg) * m1n + fp16_to_real(sx) * m1p);
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (6) @(posedge clk);
    checks++;
    if (got0 != NOUT || got1 != NOUT) begin
      failures++;
      $display("outputs %0d/%0d of %0d", got0, got1, NOUT);
    end
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
