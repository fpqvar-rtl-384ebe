// global_buffer: on-chip weight buffer between the AXI side and the two GeMM units.
//
// Two banks of DEPTH words: bank A holds FP4-E2M1 GeMM weight words (WA bits), bank B
// holds DFQ GeMM weight words (WB bits); see gemm_unit for the word layout.  Each bank
// has one write port, driven from the AXI side, and one synchronous read port, driven
// by its GeMM unit, so both GeMM units can stream weights in the same cycle (needed for
// the overlapped Condition-MLP / FC2 phases).  The paper only names the Global Buffer;
// its size, banking and ports are this design's choices.  DEPTH = 64 holds the 60 groups
// of one FC2 output tile (K = 4 x 1920).
//
// Timing: a read returns its word on the cycle after rd_en; a write and a read of the
// same address in one cycle return the old word.
module global_buffer #(
  parameter int unsigned WA    = 36 * (16 + 4 * 128),
  parameter int unsigned WB    = 24 * (16 + 4 * 128),
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  // bank A (FP4-E2M1 GeMM weights)
  input  logic          wa_en,
  input  logic [AW-1:0] wa_addr,
  input  logic [WA-1:0] wa_data,
  input  logic          ra_en,
  input  logic [AW-1:0] ra_addr,
  output logic [WA-1:0] ra_data,
  // bank B (DFQ GeMM weights)
  input  logic          wb_en,
  input  logic [AW-1:0] wb_addr,
  input  logic [WB-1:0] wb_data,
  input  logic          rb_en,
  input  logic [AW-1:0] rb_addr,
  output logic [WB-1:0] rb_data
);
  logic [WA-1:0] mem_a [DEPTH];
  logic [WB-1:0] mem_b [DEPTH];

  always_ff @(posedge clk) begin
    if (wa_en) mem_a[wa_addr] <= wa_data;
    if (ra_en) ra_data <= mem_a[ra_addr];
  end

  always_ff @(posedge clk) begin
    if (wb_en) mem_b[wb_addr] <= wb_data;
    if (rb_en) rb_data <= mem_b[rb_addr];
  end
endmodule
