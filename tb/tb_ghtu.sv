// tb_ghtu: self-checking test of the Group-wise Hadamard Transformation Unit.
//
// Rotated groups are compared with a real-arithmetic fast Hadamard transform divided by
// sqrt(128); the allowed error is 2^-8 of the group's largest output (FP16 rounding
// over 7 butterfly stages).  A group with a single non-zero element must spread into
// 128 equal magnitudes, a group of integers must transform exactly up to the final
// rounding, bypassed groups must pass bit-exactly, and the latencies (9 cycles rotated,
// 2 bypassed) are checked.  Output back-pressure is applied in the last phase.
module tb_ghtu;
  import tb_pkg::*;
  localparam int G = 128;
  localparam int NG = 24;

  logic        clk = 0, rst_n = 0;
  logic        in_valid, in_ready, in_rotate, out_valid, out_ready;
  logic [15:0] in_data [G], out_data [G];
  int checks = 0, failures = 0, cyc = 0;

  ghtu #(.G(G)) dut (.*);

  always #5 clk = ~clk;

  logic [15:0] grp [NG][G];
  bit          rot [NG];
  int          t_in [NG];
  int          n_hs = 0, got = 0, bp = 0;

  task automatic check(input int n);
    real ref_v [G];
    real tmp [G];
    real mx;
    int  h;
    for (int i = 0; i < G; i++) ref_v[i] = fp16_to_real(grp[n][i]);
    if (rot[n]) begin
      h = 1;
      while (h < G) begin
        for (int i = 0; i < G; i++)
          tmp[i] = ((i / h) % 2 == 0) ? ref_v[i] + ref_v[i + h] : ref_v[i - h] - ref_v[i];
        ref_v = tmp;
        h = h * 2;
      end
      for (int i = 0; i < G; i++) ref_v[i] = ref_v[i] / $sqrt(128.0);
    end
    mx = 0.0;
    for (int i = 0; i < G; i++) if (rabs(ref_v[i]) > mx) mx = rabs(ref_v[i]);
    for (int i = 0; i < G; i++) begin
      checks++;
      if (rot[n] ? (rabs(fp16_to_real(out_data[i]) - ref_v[i]) > mx / 256.0)
                 : (out_data[i] != grp[n][i])) begin
        failures++;
        if (failures < 10) $display("group %0d elem %0d: %f expected %f", n, i, fp16_to_real(out_data[i]), ref_v[i]);
      end
    end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n && in_valid && in_ready) begin t_in[n_hs] = cyc; n_hs++; end
    out_ready <= bp ? ($urandom % 2 == 0) : 1'b1;
    if (rst_n && out_valid && out_ready) begin
      check(got);
      if (!bp) begin
        checks++;
        if (cyc - t_in[got] != (rot[got] ? 9 : 2)) begin
          failures++;
          $display("group %0d latency %0d", got, cyc - t_in[got]);
        end
      end
      got++;
    end
  end

  initial begin
    for (int n = 0; n < NG; n++) begin
      rot[n] = (n % 3 != 2);
      for (int i = 0; i < G; i++) grp[n][i] = rand_fp16(10, 18, 1'b1);
    end
    for (int i = 0; i < G; i++) grp[0][i] = (i == 5) ? 16'h4800 : 16'h0000;   // impulse of 8
    for (int i = 0; i < G; i++) grp[1][i] = real_to_fp16(real'(int'($urandom % 17) - 8));
    in_valid = 0; in_rotate = 0;
    for (int i = 0; i < G; i++) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < NG; n++) begin
      if (n == NG / 2) bp = 1;
      @(negedge clk);
      in_valid = 1; in_rotate = rot[n]; in_data = grp[n];
      while (!in_ready) @(negedge clk);   // in_ready is stable at the falling edge
      @(negedge clk);
      in_valid = 0;
      if (!bp) while (got <= n) @(posedge clk);
    end
    while (got < NG) @(posedge clk);
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
