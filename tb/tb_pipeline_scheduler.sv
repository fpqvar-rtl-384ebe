// tb_pipeline_scheduler: self-checking test of the block-level pipeline controller.
//
// Two model GeMM units answer each start with done after a random number of cycles.
// The testbench records every phase's start and end and checks the dependency rules
// independently: PE1 order MLP(b), MAIN(b); FC2(b) after MAIN(b); MAIN(b) after MLP(b)
// and FC2(b-1); with overlap_en = 0 also MLP(b+1) after FC2(b).  It runs the same
// schedule with and without overlap: the overlapped run must overlap MLP and FC2 at least
// once, count overlap cycles, and finish sooner; the sequential run must never overlap.
module tb_pipeline_scheduler;
  import fpq_pkg::*;
  localparam int NB = 6;
  logic       clk = 0, rst_n = 0, go = 0, overlap_en = 0;
  logic [7:0] n_blocks = NB;
  logic       pe1_start, pe2_start, pe1_done = 0, pe2_done = 0, busy, all_done;
  job_e       pe1_job;
  logic [7:0] pe1_blk, pe2_blk;
  logic [31:0] overlap_cycles;
  int checks = 0, failures = 0, cyc = 0;

  pipeline_scheduler #(.BW(8)) dut (.*);

  always #5 clk = ~clk;

  int mlp_s [NB], mlp_e [NB], main_s [NB], main_e [NB], fc2_s [NB], fc2_e [NB];
  int cnt1 = 0, cnt2 = 0, dur1 [NB*2], dur2 [NB];
  int pe1_left = -1, pe2_left = -1, n1 = 0, n2 = 0;
  job_e cur_job; int cur_blk, cur2_blk;

  always @(posedge clk) begin
    cyc++;
    pe1_done <= 0; pe2_done <= 0;
    if (pe1_left == 0) begin
      pe1_done <= 1; pe1_left = -1;
      if (cur_job == JOB_MAIN) main_e[cur_blk] = cyc; else mlp_e[cur_blk] = cyc;
    end else if (pe1_left > 0) pe1_left--;
    if (pe2_left == 0) begin pe2_done <= 1; pe2_left = -1; fc2_e[cur2_blk] = cyc; end
    else if (pe2_left > 0) pe2_left--;
    if (pe1_start) begin
      cur_job = pe1_job; cur_blk = pe1_blk;
      pe1_left = dur1[n1 % (NB*2)]; n1++;
      if (pe1_job == JOB_MAIN) main_s[pe1_blk] = cyc; else mlp_s[pe1_blk] = cyc;
    end
    if (pe2_start) begin
      cur2_blk = pe2_blk; pe2_left = dur2[n2 % NB]; n2++; fc2_s[pe2_blk] = cyc;
    end
  end

  task automatic run(input bit ov, output int total, output int ovc);
    int t0;
    n1 = 0; n2 = 0;
    @(negedge clk);
    overlap_en = ov; go = 1; t0 = cyc;
    @(negedge clk);
    go = 0;
    while (!all_done) @(negedge clk);
    total = cyc - t0;
    ovc = overlap_cycles;
    for (int b = 0; b < NB; b++) begin
      checks += 4;
      if (!(mlp_e[b] <= main_s[b])) begin failures++; $display("MAIN(%0d) before MLP", b); end
      if (!(main_e[b] <= fc2_s[b])) begin failures++; $display("FC2(%0d) before MAIN", b); end
      if (b > 0 && !(fc2_e[b-1] <= main_s[b])) begin failures++; $display("MAIN(%0d) before FC2(%0d)", b, b-1); end
      if (b > 0 && !(main_e[b-1] <= mlp_s[b])) begin failures++; $display("MLP(%0d) before MAIN(%0d)", b, b-1); end
      if (!ov && b > 0) begin
        checks++;
        if (!(fc2_e[b-1] <= mlp_s[b])) begin failures++; $display("MLP(%0d) overlaps FC2 in sequential mode", b); end
      end
    end
  endtask

  initial begin
    int t_ov, t_seq, c_ov, c_seq, n_overlap;
    for (int i = 0; i < NB*2; i++) dur1[i] = 3 + $urandom % 12;
    for (int i = 0; i < NB; i++)   dur2[i] = 5 + $urandom % 12;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run(1'b1, t_ov, c_ov);
    n_overlap = 0;
    for (int b = 1; b < NB; b++) if (mlp_s[b] < fc2_e[b-1]) n_overlap++;
    run(1'b0, t_seq, c_seq);
    checks += 4;
    if (n_overlap == 0) begin failures++; $display("no MLP/FC2 overlap"); end
    if (c_ov == 0)      begin failures++; $display("overlap counter zero"); end
    if (c_seq != 0)     begin failures++; $display("overlap in sequential mode"); end
    if (!(t_ov < t_seq)) begin failures++; $display("overlap not faster: %0d vs %0d", t_ov, t_seq); end
    $display("overlapped %0d cycles (%0d overlapped phases), sequential %0d cycles", t_ov, n_overlap, t_seq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
