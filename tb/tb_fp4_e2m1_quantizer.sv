// tb_fp4_e2m1_quantizer: self-checking test of the per-group FP4-E2M1 quantizer.
//
// Groups: hand-made groups whose scaled values sit exactly on rounding ties, an all-zero
// group and random FP16 groups of several dynamic ranges.  The reference computes
// s = max|x|/6 and the nearest E2M1 value of x/s by exhaustive search (ties to the larger
// magnitude).  Also checked: the two-cycle latency, one group per cycle throughput, and
// correct results under random output back-pressure.
module tb_fp4_e2m1_quantizer;
  import tb_pkg::*;
  localparam int G = 128;
  localparam int NG = 40;

  logic        clk = 0, rst_n = 0;
  logic        in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data [G];
  logic [3:0]  out_code [G];
  logic [15:0] out_scale;
  int checks = 0, failures = 0, cyc = 0;

  fp4_e2m1_quantizer #(.G(G)) dut (.*);

  always #5 clk = ~clk;

  logic [15:0] grp [NG][G];
  int          sent = 0, got = 0;
  int          t_in [NG];
  int          bp_mode = 0;

  task automatic check_group(input int n);
    real mx, s, x;
    logic [3:0] e;
    mx = 0.0;
    for (int i = 0; i < G; i++) if (rabs(fp16_to_real(grp[n][i])) > mx) mx = rabs(fp16_to_real(grp[n][i]));
    s = mx / 6.0;
    checks++;
    if (rabs(fp16_to_real(out_scale) - s) > s * 0.001) begin
      failures++;
      $display("group %0d scale %f expected %f", n, fp16_to_real(out_scale), s);
    end
    for (int i = 0; i < G; i++) begin
      x = fp16_to_real(grp[n][i]);
      e = (mx == 0.0) ? 4'b0000 : lut_quant(x / s, 0);
      if (e == 4'b1000) e = 4'b0000;
      checks++;
      if (out_code[i] != e) begin
        failures++;
        if (failures < 10) $display("group %0d elem %0d x=%f code %b expected %b", n, i, x, out_code[i], e);
      end
    end
  endtask

  initial begin
    // group 0: ties with max 6: 2.5->3 (0101), -3.5->-4 (1110), 4.5->4 (0110), .25->.5, -5->-6
    for (int i = 0; i < G; i++) grp[0][i] = 16'h0000;
    grp[0][0] = 16'h4600;  // 6
    grp[0][1] = 16'h4100;  // 2.5
    grp[0][2] = 16'hC300;  // -3.5
    grp[0][3] = 16'h4480;  // 4.5
    grp[0][4] = 16'h3400;  // 0.25
    grp[0][5] = 16'hC500;  // -5
    grp[0][6] = 16'hB400;  // -0.25
    grp[0][7] = 16'h3E00;  // 1.5
    grp[0][8] = 16'hBC00;  // -1
    grp[0][9] = 16'hB800;  // -0.5 -> code 1001
    // group 1: all zero
    for (int i = 0; i < G; i++) grp[1][i] = (i % 2) ? 16'h8000 : 16'h0000;
    // random groups
    for (int n = 2; n < NG; n++)
      for (int i = 0; i < G; i++) grp[n][i] = rand_fp16(5 + n % 10, 12 + n % 15, 1'b1);
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
