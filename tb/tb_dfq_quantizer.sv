// tb_dfq_quantizer: self-checking test of the per-group dual-format (DFQ) quantizer.
//
// Groups: a hand-made group whose scaled values sit on rounding ties, a group with no
// positive values and FC2-like groups (many small negatives, few large positives).  The
// reference splits each group by sign, computes s- = max|x-|/3.5 and s+ = max(x+)/6,
// rounds 2x/s to an integer and takes the nearest E1M2 (negative) or E2M1 (positive)
// value by exhaustive search.  Also checked: the two-cycle latency, one group per cycle throughput, and
// correct results under random output back-pressure.  The grids, scales and tables follow
// the published algorithm; the two-cycle latency is this design's own choice.
module tb_dfq_quantizer;
  import tb_pkg::*;
  localparam int G = 128;
  localparam int NG = 40;

  logic        clk = 0, rst_n = 0;
  logic        in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data [G];
  logic [3:0]  out_code [G];
  logic [15:0] out_scale_neg, out_scale_pos;
  int checks = 0, failures = 0, cyc = 0;

  dfq_quantizer #(.G(G)) dut (.*);

  always #5 clk = ~clk;

  logic [15:0] grp [NG][G];
  int          sent = 0, got = 0;
  int          t_in [NG];
  int          bp_mode = 0;

  task automatic check_group(input int n);
    real mn, mp, sn, sp, x;
    logic [3:0] e;
    mn = 0.0; mp = 0.0;
    for (int i = 0; i < G; i++) begin
      x = fp16_to_real(grp[n][i]);
      if (x <= 0.0 && -x > mn) mn = -x;
      if (x > 0.0 && x > mp) mp = x;
    end
    sn = mn / 3.5;
    sp = mp / 6.0;
    checks += 2;
    if (rabs(fp16_to_real(out_scale_neg) - sn) > sn * 0.001) begin
      failures++;
      $display("group %0d s- %f expected %f", n, fp16_to_real(out_scale_neg), sn);
    end
    if (rabs(fp16_to_real(out_scale_pos) - sp) > sp * 0.001) begin
      failures++;
      $display("group %0d s+ %f expected %f", n, fp16_to_real(out_scale_pos), sp);
    end
    for (int i = 0; i < G; i++) begin
      x = fp16_to_real(grp[n][i]);
      if (x <= 0.0) e = (mn == 0.0) ? 4'b0000 : lut_quant(x / sn, 1);
      else          e = lut_quant(x / sp, 2);
      if (e == 4'b1000) e = 4'b0000;
      checks++;
      if (out_code[i] != e) begin
        failures++;
        if (failures < 10) $display("group %0d elem %0d x=%f code %b expected %b", n, i, x, out_code[i], e);
      end
    end
  endtask

  initial begin
    // group 0: neg max 3.5 (s- = 1), pos max 6 (s+ = 1); values on rounding ties
    for (int i = 0; i < G; i++) grp[0][i] = 16'h0000;
    grp[0][0] = 16'hC300;  // -3.5
    grp[0][1] = 16'h4600;  // 6
    grp[0][2] = 16'hBD00;  // -1.25 -> -1.5
    grp[0][3] = 16'h4100;  // 2.5 -> 3
    grp[0][4] = 16'hB400;  // -0.25 -> -0.5 (code 1001)
    grp[0][5] = 16'h3400;  // 0.25 -> 0.5
    grp[0][6] = 16'h4480;  // 4.5 -> 4
    grp[0][7] = 16'hC100;  // -2.5
    // group 1: only non-positive values (positive part empty)
    for (int i = 0; i < G; i++) grp[1][i] = {1'b1, 15'(rand_fp16(8, 13, 1'b0))};
    // FC2-like groups: mostly small negatives (GeLU output), a few large positives
    for (int n = 2; n < NG; n++)
      for (int i = 0; i < G; i++)
        grp[n][i] = ($urandom % 10 < 8) ? {1'b1, 15'(rand_fp16(6, 12, 1'b0))}
                                       : rand_fp16(10, 17 + n % 5, 1'b0);
  end

  // driver
  initial begin
    in_valid = 0;
    for (int i = 0; i < G; i++) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // latency: single group with the output always ready
    in_valid <= 1; in_data <= grp[0];
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    sent = 1;
    in_valid <= 0;
    while (got < 1) @(posedge clk);
    // throughput: next 4 groups back to back
    for (int n = 1; n < 5; n++) begin
      in_valid <= 1; in_data <= grp[n];
      @(posedge clk);
      checks++;
      if (!in_ready) begin failures++; $display("not ready during back-to-back"); end
      sent++;
    end
    in_valid <= 0;
    while (got < 5) @(posedge clk);
    // back-pressure phase with random valid gaps
    bp_mode = 1;
    for (int n = 5; n < NG; n++) begin
      while ($urandom % 3 == 0) begin in_valid <= 0; @(posedge clk); end
      in_valid <= 1; in_data <= grp[n];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      sent++;
    end
    in_valid <= 0;
    while (got < NG) @(posedge clk);
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  int n_hs = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && in_valid && in_ready) begin t_in[n_hs] = cyc; n_hs++; end
    out_ready <= bp_mode ? ($urandom % 2 == 0) : 1'b1;
    if (rst_n && out_valid && out_ready) begin
      check_group(got);
      if (!bp_mode) begin
        checks++;
        if (cyc - t_in[got] != 2) begin
          failures++;
          $display("group %0d latency %0d, expected 2", got, cyc - t_in[got]);
        end
      end
      got++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
