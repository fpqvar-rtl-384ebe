// gemm_unit: one GeMM unit of the FP Matrix Multiplication Unit (FMU).
//
// LANES dot_pe lanes share one quantized activation group per cycle; each lane owns one
// output channel and reads its own G weight codes and weight scale for that group from
// the global buffer.  A job computes n_tiles output tiles of LANES channels; each tile
// runs over n_groups input groups (K = 128 * n_groups), so the activation row is
// streamed n_tiles times.  Weights of tile t, group g are at buffer word
//   w_base + t * n_groups + g.
// With DFQ=0 this is the FP4-E2M1 GeMM unit (QKV, Out proj, FC1, Condition MLP);
// with DFQ=1 it is the DFQ GeMM unit (FC2), whose lanes accumulate the negative and
// positive DFQ parts under their own scales.  The tiling, the buffer word layout and
// the job interface are this design's choices; the paper gives the two units' roles.
//
// Weight word layout (one buffer word): for lane l, bits [l*WL +: WL] hold
//   {scale(16), code[G-1](4), ..., code[0](4)}  with WL = 16 + 4*G.
//
// Interface: start (with n_groups, n_tiles, w_base) launches a job when idle; activation
// groups arrive on a_valid/a_ready; the buffer read has one cycle latency.  res_valid
// pulses with res_data (one FP32 per lane) when a tile is finished, 4 cycles after its
// last group was accepted; done pulses with the last tile's result.
module gemm_unit
  import fpq_pkg::*;
#(
  parameter int unsigned G     = GROUP,
  parameter int unsigned LANES = 36,
  parameter bit          DFQ   = 1'b0,
  parameter int unsigned AW    = 6,
  localparam int unsigned WL   = 16 + 4 * G,
  localparam int unsigned WW   = LANES * WL
) (
  input  logic          clk,
  input  logic          rst_n,
  // job
  input  logic          start,
  input  logic [15:0]   n_groups,
  input  logic [15:0]   n_tiles,
  input  logic [AW-1:0] w_base,
  output logic          busy,
  output logic          done,
  // quantized activation groups
  input  logic          a_valid,
  output logic          a_ready,
  input  fp4_t          a_code [G],
  input  fp16_t         a_scale,       // E2M1 scale, or DFQ s+
  input  fp16_t         a_scale_neg,   // DFQ s- (unused when DFQ=0)
  // weight read port of the global buffer
  output logic          w_rd_en,
  output logic [AW-1:0] w_rd_addr,
  input  logic [WW-1:0] w_rd_data,
  // results
  output logic          res_valid,
  output fp32_t         res_data [LANES],
  output logic [15:0]   res_tile
);
  logic [15:0]   g_q, t_q, ng_q, nt_q, rt_q;
  logic [AW-1:0] addr_q;
  logic          run_q;
  logic          take;

  assign busy    = run_q;
  assign a_ready = run_q && (t_q < nt_q);
  assign take    = a_valid && a_ready;

  assign w_rd_en   = take;
  assign w_rd_addr = addr_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q  <= 1'b0;
      g_q    <= '0;
      t_q    <= '0;
      ng_q   <= '0;
      nt_q   <= '0;
      addr_q <= '0;
    end else if (!run_q) begin
      if (start && n_groups != 0 && n_tiles != 0) begin
        run_q  <= 1'b1;
        g_q    <= '0;
        t_q    <= '0;
        ng_q   <= n_groups;
        nt_q   <= n_tiles;
        addr_q <= w_base;
      end
    end else begin
      if (take) begin
        addr_q <= addr_q + 1'b1;
        if (g_q == ng_q - 1) begin
          g_q <= '0;
          t_q <= t_q + 1'b1;
        end else begin
          g_q <= g_q + 1'b1;
        end
      end
      if (done) run_q <= 1'b0;
    end
  end

  // Register the activation group while the weight word is read.
  logic  v1, first1, last1;
  fp4_t  a1 [G];
  fp16_t sx1, sxn1;

  always_ff @(posedge clk) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= take;
    if (take) begin
      a1     <= a_code;
      sx1    <= a_scale;
      sxn1   <= a_scale_neg;
      first1 <= (g_q == 0);
      last1  <= (g_q == ng_q - 1);
    end
  end

  logic lane_v [LANES];
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fp4_t  wc [G];
    fp16_t ws;
    for (genvar i = 0; i < G; i++) begin : g_w
      assign wc[i] = w_rd_data[l*WL + 4*i +: 4];
    end
    assign ws = w_rd_data[l*WL + 4*G +: 16];
    dot_pe #(.G(G), .DFQ(DFQ)) u_pe (
      .clk, .rst_n,
      .in_valid (v1),
      .first    (first1),
      .last     (last1),
      .a_code   (a1),
      .w_code   (wc),
      .sx       (sx1),
      .sx_neg   (sxn1),
      .sw       (ws),
      .out_valid(lane_v[l]),
      .out_acc  (res_data[l])
    );
  end

  assign res_valid = lane_v[0];
  assign res_tile  = rt_q;
  assign done      = res_valid && (rt_q == nt_q - 1);

  always_ff @(posedge clk) begin
    if (!rst_n || (!run_q && start)) rt_q <= '0;
    else if (res_valid)              rt_q <= rt_q + 1'b1;
  end

  a_lanes_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                    lane_v[0] == lane_v[LANES-1]);
endmodule
