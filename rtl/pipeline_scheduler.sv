// pipeline_scheduler: block-level (second-level) pipeline controller.
//
// A VAR transformer block runs three phases: the Condition MLP and the "main" phase
// (QKV projection, Out projection, FC1) on PE1, the FP4-E2M1 GeMM unit, and FC2 on PE2,
// the DFQ GeMM unit.  The Condition MLP depends only on the class condition, so the
// MLP of block b+1 can run on PE1 while PE2 still runs FC2 of block b.  The scheduler
// issues phases under these rules:
//   * PE1 order is MLP(0), MAIN(0), MLP(1), MAIN(1), ...;
//   * FC2(b) starts when MAIN(b) is done;
//   * MAIN(b) starts when MLP(b) and FC2(b-1) are done (block b needs block b-1's output);
//   * MLP(b+1) starts when MAIN(b) is done and, with overlap_en = 0, only when FC2(b) is
//     also done (the schedule without the second-level pipeline).
// The phase order and dependencies follow the published pipeline timing diagrams; the
// start/done handshake is this design's choice.
//
// Interface: go starts n_blocks blocks; pe*_start pulses for one cycle with the phase
// (pe1_job) and block index; pe*_done is pulsed by the GeMM unit when the phase ends.
// all_done pulses when FC2 of the last block is done.  overlap_cycles counts cycles in
// which both units were busy.
module pipeline_scheduler
  import fpq_pkg::*;
#(
  parameter int unsigned BW = 8   // block-index width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          go,
  input  logic [BW-1:0] n_blocks,
  input  logic          overlap_en,
  output logic          pe1_start,
  output job_e          pe1_job,
  output logic [BW-1:0] pe1_blk,
  input  logic          pe1_done,
  output logic          pe2_start,
  output logic [BW-1:0] pe2_blk,
  input  logic          pe2_done,
  output logic          busy,
  output logic          all_done,
  output logic [31:0]   overlap_cycles
);
  logic [BW-1:0] nb_q;
  logic [BW:0]   mlp_next, main_next, fc2_next;       // next block to issue
  logic [BW:0]   mlp_done_n, main_done_n, fc2_done_n; // phases completed
  logic          pe1_busy, pe2_busy;
  logic          can_main, can_mlp, can_fc2;

  always_comb begin
    can_main = (main_next < mlp_done_n) && (fc2_done_n >= main_next);
    can_mlp  = (mlp_next < (BW+1)'(nb_q)) && (mlp_next == main_done_n) &&
               (overlap_en || fc2_done_n >= mlp_next);
    can_fc2  = (fc2_next < main_done_n);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy           <= 1'b0;
      nb_q           <= '0;
      mlp_next       <= '0;  main_next   <= '0;  fc2_next   <= '0;
      mlp_done_n     <= '0;  main_done_n <= '0;  fc2_done_n <= '0;
      pe1_busy       <= 1'b0;
      pe2_busy       <= 1'b0;
      pe1_start      <= 1'b0;
      pe2_start      <= 1'b0;
      pe1_job        <= JOB_COND_MLP;
      pe1_blk        <= '0;
      pe2_blk        <= '0;
      all_done       <= 1'b0;
      overlap_cycles <= '0;
    end else begin
      pe1_start <= 1'b0;
      pe2_start <= 1'b0;
      all_done  <= 1'b0;
      if (!busy) begin
        if (go && n_blocks != 0) begin
          busy       <= 1'b1;
          nb_q       <= n_blocks;
          mlp_next   <= '0;  main_next   <= '0;  fc2_next   <= '0;
          mlp_done_n <= '0;  main_done_n <= '0;  fc2_done_n <= '0;
          overlap_cycles <= '0;
        end
      end else begin
        if (pe1_busy && pe2_busy) overlap_cycles <= overlap_cycles + 1;
        // completions
        if (pe1_busy && pe1_done) begin
          pe1_busy <= 1'b0;
          if (pe1_job == JOB_COND_MLP) mlp_done_n  <= mlp_done_n + 1'b1;
          else                         main_done_n <= main_done_n + 1'b1;
        end
        if (pe2_busy && pe2_done) begin
          pe2_busy   <= 1'b0;
          fc2_done_n <= fc2_done_n + 1'b1;
          if (fc2_done_n + 1'b1 == (BW+1)'(nb_q)) begin
            busy     <= 1'b0;
            all_done <= 1'b1;
          end
        end
        // issue (a unit is free from the cycle after its done)
        if (!pe1_busy && !pe1_start) begin
          if (can_main) begin
            pe1_start <= 1'b1;  pe1_busy <= 1'b1;
            pe1_job   <= JOB_MAIN;
            pe1_blk   <= main_next[BW-1:0];
            main_next <= main_next + 1'b1;
          end else if (can_mlp) begin
            pe1_start <= 1'b1;  pe1_busy <= 1'b1;
            pe1_job   <= JOB_COND_MLP;
            pe1_blk   <= mlp_next[BW-1:0];
            mlp_next  <= mlp_next + 1'b1;
          end
        end
        if (!pe2_busy && !pe2_start && can_fc2) begin
          pe2_start <= 1'b1;  pe2_busy <= 1'b1;
          pe2_blk   <= fc2_next[BW-1:0];
          fc2_next  <= fc2_next + 1'b1;
        end
      end
    end
  end

  a_no_double_issue: assert property (@(posedge clk) disable iff (!rst_n)
                                      pe1_start |-> !$past(pe1_busy && !pe1_done));
endmodule
