// ghtu: Group-wise Hadamard Transformation Unit.
//
// Rotates each group of G = 128 FP16 activations by the same normalised 128x128
// Hadamard matrix, i.e. applies the block-diagonal Hadamard transform group by group,
// so the rotation never needs the whole activation row.  It uses a radix-2 fast
// Hadamard transform: log2(G) butterfly stages (a+b, a-b on pairs at distance
// 1, 2, 4, ... 64), one stage per clock on G/2 parallel FP16 butterflies, followed by
// one multiply by the FP16 constant 1/sqrt(128) that makes the transform orthonormal.
// The stage-per-cycle folding, the FP16 arithmetic and the final normalising multiply
// are this design's choices; the accelerator description says only that the unit is a
// 128-point fast Hadamard transform.
//
// With in_rotate = 0 the group passes through unchanged (layers whose input is not
// rotated).  Interface: valid/ready on both sides.  Timing: a rotated group is ready
// log2(G)+2 = 9 cycles after its input handshake, a bypassed one after 2 cycles; a new
// group is accepted as soon as the previous one has moved to the output register.
module ghtu
  import fpq_pkg::*;
#(
  parameter int unsigned G = GROUP
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  logic  in_rotate,
  input  fp16_t in_data [G],
  output logic  out_valid,
  input  logic  out_ready,
  output fp16_t out_data [G]
);
  localparam int unsigned STAGES = $clog2(G);

  typedef enum logic [1:0] {S_IDLE, S_BUTTERFLY, S_NORM} state_e;
  state_e state_q;

  fp16_t work_q [G];
  fp16_t bfly   [G];
  fp16_t normd  [G];
  logic  rot_q;
  logic [$clog2(STAGES+1)-1:0] stage_q;

  // One butterfly stage at distance h = 2^stage_q.
  for (genvar i = 0; i < G; i++) begin : g_bfly
    fp16_t lo, hi, y;
    logic  upper;
    int    h;
    always_comb begin
      h     = 1 << stage_q;
      upper = ((i / h) % 2) == 1;
      // lower element i: a + b with b = x[i+h]; upper element i: a - b with a = x[i-h]
      lo = upper ? work_q[(i - h) % G] : work_q[i];
      hi = upper ? {~work_q[i][15], work_q[i][14:0]} : work_q[(i + h) % G];
    end
    fp_add #(.EW(5), .MW(10)) u_add (.a(lo), .b(hi), .y(y));
    assign bfly[i] = y;
    fp_mul #(.EW(5), .MW(10)) u_norm (.a(work_q[i]), .b(FP16_INV_SQRT128), .y(normd[i]));
  end

  logic out_free;
  assign out_free = !out_valid || out_ready;
  assign in_ready = (state_q == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      stage_q   <= '0;
      out_valid <= 1'b0;
      rot_q     <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state_q)
        S_IDLE: if (in_valid) begin
          work_q  <= in_data;
          rot_q   <= in_rotate;
          stage_q <= '0;
          state_q <= in_rotate ? S_BUTTERFLY : S_NORM;
        end
        S_BUTTERFLY: begin
          work_q  <= bfly;
          stage_q <= stage_q + 1'b1;
          if (32'(stage_q) == STAGES - 1) state_q <= S_NORM;
        end
        S_NORM: if (out_free) begin
          out_data  <= rot_q ? normd : work_q;
          out_valid <= 1'b1;
          state_q   <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid);
endmodule
