// tb_global_buffer: self-checking test of the two-bank weight buffer.  Random words
// are written to both banks, then read back in random order through both read ports in
// the same cycles; data must appear exactly one cycle after rd_en, a read must leave
// the output unchanged while rd_en is low, and a same-cycle write/read returns the old word.
module tb_global_buffer;
  localparam int WA = 72, WB = 40, DEPTH = 16, AW = 4;
  logic          clk = 0;
  logic          wa_en = 0, ra_en = 0, wb_en = 0, rb_en = 0;
  logic [AW-1:0] wa_addr = 0, ra_addr = 0, wb_addr = 0, rb_addr = 0;
  logic [WA-1:0] wa_data = 0, ra_data;
  logic [WB-1:0] wb_data = 0, rb_data;
  logic [WA-1:0] ma [DEPTH];
  logic [WB-1:0] mb [DEPTH];
  int checks = 0, failures = 0;

  global_buffer #(.WA(WA), .WB(WB), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    logic [WA-1:0] hold;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      wa_en = 1; wa_addr = AW'(i); wa_data = {$urandom, $urandom, $urandom};
      wb_en = 1; wb_addr = AW'(DEPTH - 1 - i); wb_data = {$urandom, $urandom};
      ma[i] = wa_data; mb[DEPTH - 1 - i] = wb_data;
      @(negedge clk);
    end
    wa_en = 0; wb_en = 0;
    for (int n = 0; n < 60; n++) begin
      ra_en = 1; ra_addr = AW'($urandom); rb_en = 1; rb_addr = AW'($urandom);
      @(negedge clk);
      checks += 2;
      if (ra_data != ma[ra_addr]) begin failures++; $display("bank A addr %0d", ra_addr); end
      if (rb_data != mb[rb_addr]) begin failures++; $display("bank B addr %0d", rb_addr); end
    end
    // output holds while rd_en is low
    ra_en = 0; hold = ra_data; ra_addr = ra_addr + 1'b1;
    @(negedge clk);
    checks++;
    if (ra_data != hold) failures++;
    // read-during-write returns the old word
    ra_en = 1; ra_addr = 3; wa_en = 1; wa_addr = 3; wa_data = ~ma[3];
    @(negedge clk);
    checks++;
    if (ra_data != ma[3]) begin failures++; $display("read-during-write"); end
    ma[3] = ~ma[3]; wa_en = 0;
    @(negedge clk);
    checks++;
    if (ra_data != ma[3]) begin failures++; $display("write not stored"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
