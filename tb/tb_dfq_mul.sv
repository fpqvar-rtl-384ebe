// tb_dfq_mul: exhaustive check of the DFQ LUT multiplier.  For all 256 pairs the FP8
// product must equal (DFQ activation value) x (E2M1 weight value), where an activation
// code with its sign bit set is an E1M2 negative value, and neg_part must flag exactly
// those codes.
module tb_dfq_mul;
  import tb_pkg::*;
  logic [3:0] a, w;
  logic [7:0] p;
  logic       neg;
  int checks = 0, failures = 0;

  dfq_mul dut (.a(a), .w(w), .p(p), .neg_part(neg));

  initial begin
    for (int i = 0; i < 256; i++) begin
      {a, w} = 8'(i);
      #1;
      checks += 2;
      if (fp8_val(p) != dfq_val(a) * e2m1_val(w)) begin
        failures++;
        $display("mismatch a=%b w=%b got %f exp %f", a, w, fp8_val(p), dfq_val(a) * e2m1_val(w));
      end
      if (neg != a[3]) failures++;
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
