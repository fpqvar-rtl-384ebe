// tb_fp4_e2m1_mul: exhaustive check of the FP4-E2M1 LUT multiplier.  All 256 operand
// pairs; the FP8 output is decoded in the testbench and compared with the product of
// the two code values taken from the encoding table.
module tb_fp4_e2m1_mul;
  import tb_pkg::*;
  logic [3:0] a, w;
  logic [7:0] p;
  int checks = 0, failures = 0;

  fp4_e2m1_mul dut (.a(a), .w(w), .p(p));

  initial begin
    for (int i = 0; i < 256; i++) begin
      {a, w} = 8'(i);
      #1;
      checks++;
      if (fp8_val(p) != e2m1_val(a) * e2m1_val(w)) begin
        failures++;
        $display("mismatch a=%b w=%b p=%h got %f exp %f", a, w, p, fp8_val(p), e2m1_val(a) * e2m1_val(w));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
