// fpq_pkg: shared types, constants and lookup-table contents of the FP4 accelerator.
//
// Number formats used across the design:
//   * FP16  : IEEE binary16 activations and scaling factors.
//   * FP4   : 4-bit codes, sign-magnitude.  E2M1 magnitudes are {0,.5,1,1.5,2,3,4,6};
//             E1M2 magnitudes are {0,.5,...,3.5} (code m means m/2).  Both follow the
//             FP4 encoding table of the algorithm description.
//   * FP8   : product of two FP4 values.  The format is this design's choice:
//             S1 E3M4, exponent bias 2, E=0 subnormal (value M/32), no Inf/NaN.
//             Every E2M1xE2M1 and E1M2xE2M1 product is exactly representable.
//   * INT32 : FP8 products converted to integers in units of 1/4 for the adder tree.
//   * FP32  : IEEE binary32 accumulators of the GeMM lanes.
//
// Quantizer lookup tables (scaled value -> 4-bit code) are copied from the printed
// tables: 25-entry FP4-E2M1 table, 8-entry DFQ negative and 13-entry DFQ positive
// tables.  Entry 11 of the E2M1 table and entry 6 of the DFQ negative table are printed
// as 1101, which is the code of -3 (E2M1) / -2.5 (E1M2) and breaks the otherwise
// symmetric tables; both are taken here as 1001, the code of -0.5, which is the value
// that entry must produce.
package fpq_pkg;

  localparam int unsigned GROUP = 128;   // quantization / Hadamard group size

  typedef logic [3:0]  fp4_t;
  typedef logic [7:0]  fp8_t;
  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;

  // Job kinds executed by the two GeMM units (second-level pipeline).
  typedef enum logic [1:0] {
    JOB_COND_MLP = 2'd0,   // Condition MLP of a block, FP4-E2M1 GeMM
    JOB_MAIN     = 2'd1,   // QKV proj + Out proj + FC1 of a block, FP4-E2M1 GeMM
    JOB_FC2      = 2'd2    // FC2 of a block, DFQ GeMM
  } job_e;

  // Descriptor of one GeMM job: n_tiles output tiles of LANES channels, each over
  // n_groups input groups of 128, weights from global-buffer word w_base on.
  typedef struct packed {
    logic [15:0] n_groups;
    logic [15:0] n_tiles;
    logic [15:0] w_base;
  } gemm_job_t;

  // FP16 constants: reciprocals of the largest grid magnitudes and 1/sqrt(128).
  localparam fp16_t FP16_INV_6      = 16'h3155;  // 1/6   (E2M1 max)
  localparam fp16_t FP16_INV_3P5    = 16'h3492;  // 1/3.5 (E1M2 max)
  localparam fp16_t FP16_INV_SQRT128 = 16'h2DA8; // 1/sqrt(128)

  // ------------------------------------------------------------------ quantizer LUTs
  // FP4-E2M1 LUT: address = round(2*x/s) + 12, x/s in [-6,6].
  function automatic fp4_t e2m1_qlut(input logic [4:0] addr);
    case (addr)
      5'd0, 5'd1, 5'd2:  return 4'b1111;
      5'd3, 5'd4, 5'd5:  return 4'b1110;
      5'd6, 5'd7:        return 4'b1101;
      5'd8:              return 4'b1100;
      5'd9:              return 4'b1011;
      5'd10:             return 4'b1010;
      5'd11:             return 4'b1001;
      5'd12:             return 4'b0000;
      5'd13:             return 4'b0001;
      5'd14:             return 4'b0010;
      5'd15:             return 4'b0011;
      5'd16:             return 4'b0100;
      5'd17, 5'd18:      return 4'b0101;
      5'd19, 5'd20, 5'd21: return 4'b0110;
      default:           return 4'b0111;   // 22..24
    endcase
  endfunction

  // DFQ negative LUT (E1M2 grid): address = round(2*x/s-) + 7, x/s- in [-3.5,0].
  function automatic fp4_t dfq_neg_qlut(input logic [2:0] addr);
    case (addr)
      3'd0: return 4'b1111;
      3'd1: return 4'b1110;
      3'd2: return 4'b1101;
      3'd3: return 4'b1100;
      3'd4: return 4'b1011;
      3'd5: return 4'b1010;
      3'd6: return 4'b1001;
      default: return 4'b0000;
    endcase
  endfunction

  // DFQ positive LUT (E2M1 grid): address = round(2*x/s+), x/s+ in [0,6].
  function automatic fp4_t dfq_pos_qlut(input logic [3:0] addr);
    case (addr)
      4'd0:  return 4'b0000;
      4'd1:  return 4'b0001;
      4'd2:  return 4'b0010;
      4'd3:  return 4'b0011;
      4'd4:  return 4'b0100;
      4'd5, 4'd6: return 4'b0101;
      4'd7, 4'd8, 4'd9: return 4'b0110;
      default: return 4'b0111;   // 10..12
    endcase
  endfunction

  // ------------------------------------------------------------------ FP4 decoding
  // Twice the magnitude of an E2M1 code (integer 0..12).
  function automatic logic [3:0] e2m1_mag2(input logic [2:0] m);
    case (m)
      3'd0: return 4'd0;  3'd1: return 4'd1;  3'd2: return 4'd2;  3'd3: return 4'd3;
      3'd4: return 4'd4;  3'd5: return 4'd6;  3'd6: return 4'd8;  default: return 4'd12;
    endcase
  endfunction

  // Twice the magnitude of an E1M2 code (integer 0..7).
  function automatic logic [3:0] e1m2_mag2(input logic [2:0] m);
    return {1'b0, m};
  endfunction

  // ------------------------------------------------------------------ FP8 products
  // Encode sign and n (product in units of 1/4, 0..144) as S1 E3M4 bias 2.
  function automatic fp8_t fp8_encode(input logic s, input logic [7:0] n);
    logic [2:0] e;
    logic [3:0] m;
    if (n == 8'd0) return 8'h00;
    if (n == 8'd1) return {s, 3'd0, 4'd8};           // 0.25 is subnormal
    e = 3'd1;
    for (int i = 1; i < 8; i++) if (n[i]) e = 3'(i); // e = index of leading one
    if (e <= 3'd4) m = 4'((n << (3'd4 - e)) & 8'h0F);
    else           m = 4'((n >> (e - 3'd4)) & 8'h0F);
    return {s, e, m};
  endfunction

  // Decode an FP8 product back to a signed integer in units of 1/4.
  function automatic logic signed [31:0] fp8_to_int(input fp8_t f);
    logic [31:0] mag;
    if (f[6:4] == 3'd0) mag = 32'(f[3:0]) >> 3;                  // M/32 * 4
    else                mag = (32'(5'd16 + f[3:0]) << f[6:4]) >> 4;
    return f[7] ? -$signed(mag) : $signed(mag);
  endfunction

  // Product LUT entry of the FP4-E2M1 multiplier: address {a, w}.
  function automatic fp8_t e2m1_mul_entry(input logic [7:0] addr);
    logic [7:0] n;
    n = 8'(e2m1_mag2(addr[6:4])) * 8'(e2m1_mag2(addr[2:0]));
    return fp8_encode(addr[7] ^ addr[3], n);
  endfunction

  // Product LUT entry of the DFQ multiplier.  neg_fmt selects how the activation
  // code is read: E1M2 (negative part) or E2M1 (positive part).  Weight is E2M1.
  function automatic fp8_t dfq_mul_entry(input logic neg_fmt, input logic [7:0] addr);
    logic [7:0] n;
    logic [3:0] am;
    am = neg_fmt ? e1m2_mag2(addr[6:4]) : e2m1_mag2(addr[6:4]);
    n  = 8'(am) * 8'(e2m1_mag2(addr[2:0]));
    return fp8_encode(addr[7] ^ addr[3], n);
  endfunction

  // Whole 256-entry product tables, computed at elaboration time.
  typedef fp8_t lut256_t [256];

  function automatic lut256_t build_e2m1_mul_lut();
    lut256_t t;
    for (int i = 0; i < 256; i++) t[i] = e2m1_mul_entry(8'(i));
    return t;
  endfunction

  function automatic lut256_t build_dfq_mul_lut(input logic neg_fmt);
    lut256_t t;
    for (int i = 0; i < 256; i++) t[i] = dfq_mul_entry(neg_fmt, 8'(i));
    return t;
  endfunction

  // ------------------------------------------------------------------ FP16 helpers
  // FP16 magnitude as an unsigned fixed-point integer in units of 2^-24 (exact).
  function automatic logic [39:0] fp16_mag_fixed(input logic [14:0] h);
    if (h[14:10] == 5'd0) return 40'(h[9:0]);
    return 40'({1'b1, h[9:0]}) << (h[14:10] - 5'd1);
  endfunction

  // FP16 to FP32, exact; FP16 subnormals flush to zero like the rest of the datapath.
  function automatic fp32_t fp16_to_fp32(input fp16_t h);
    if (h[14:10] == 5'd0)  return {h[15], 31'd0};
    if (h[14:10] == 5'd31) return {h[15], 8'hFF, h[9:0], 13'd0};
    return {h[15], 8'(h[14:10]) + 8'd112, h[9:0], 13'd0};
  endfunction

  // Round |x|/max * lv to the nearest integer (ties away from zero) without a divider:
  // count the thresholds k+0.5, k = 0..lv-1, that |x|*lv reaches.  Inputs are
  // fp16_mag_fixed() magnitudes with |x| <= max; a zero max gives 0.
  function automatic logic [3:0] ratio_round(input logic [39:0] x, input logic [39:0] mx,
                                             input int unsigned lv);
    logic [3:0]  q;
    logic [47:0] lhs;
    q   = '0;
    lhs = 48'(x) * 48'(2 * lv);
    if (mx != '0)
      for (int unsigned k = 0; k < 12; k++)
        if (k < lv && lhs >= 48'(mx) * 48'(2 * k + 1)) q = q + 4'd1;
    return q;
  endfunction

  // Signed integer times 2^eoff as FP32, rounded to nearest even (exact below 2^24,
  // which covers every adder-tree sum of this design).
  function automatic fp32_t int_to_fp32(input logic signed [31:0] v, input int eoff);
    logic [31:0] mag;
    logic [31:0] sh;  // only [23:0] is read
    logic [23:0] m;
    logic        g, st;
    int          p;
    if (v == 0) return '0;
    mag = v[31] ? 32'(-v) : 32'(v);
    p = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) p = i;
    if (p <= 23) begin
      sh = mag << (23 - p);
      return {v[31], 8'(127 + p + eoff), sh[22:0]};
    end
    sh = mag >> (p - 23);
    m  = sh[23:0];
    g  = mag[p - 24];
    st = 1'b0;
    for (int i = 0; i < 31; i++) if (i < p - 24 && mag[i]) st = 1'b1;
    if (g && (st || m[0])) begin
      m = m + 24'd1;
      if (m == 24'd0) p = p + 1;     // carried out: mantissa becomes 1.000
    end
    return {v[31], 8'(127 + p + eoff), m[22:0]};
  endfunction

endpackage
