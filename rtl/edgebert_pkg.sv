// edgebert_pkg: types, constants and arithmetic helpers shared by the
// EdgeBERT accelerator modules.
//
// Number formats
//  * FP8: {sign, exp[3:0], mant[2:0]}. Value = (-1)^s * (1.mmm) * 2^(exp - bias)
//    where bias is a per-layer exponent bias held in a register. exp == 0 is
//    zero (no denormals). The 4-bit exponent inside an 8-bit word and the
//    per-layer exponent scaling follow the paper; the zero encoding and the
//    bias register are this design's choice.
//  * PU accumulation: 32-bit signed fixed point, 16 fractional bits.
//  * SFU arithmetic: 16-bit signed fixed point, 8 fractional bits (Q8.8).
//
// exp() and ln() are built from pow2() and log2(), each a 16-entry table with
// linear interpolation:
//   POW2_LUT[k] = round(65536 * 2^(k/16)),        k = 0..16
//   LOG2_LUT[k] = round(256 * log2(1 + k/16)),    k = 0..16
package edgebert_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int N_DEF      = 16;     // PU MAC vector size n
  localparam int DEC_AW     = 13;     // 128 KB / 16 B = 8192 entries
  localparam int AUX_AW     = 10;     // 32 KB / (16 x 2 B) = 1024 words
  localparam int ACC_FRAC   = 16;
  localparam int SFU_FRAC   = 8;

  typedef logic [7:0]         fp8_t;
  typedef logic signed [15:0] q88_t;
  typedef logic signed [5:0]  ebias_t;

  typedef enum logic [1:0] {ACT_NONE = 2'd0, ACT_RELU = 2'd1, ACT_GELU = 2'd2} act_mode_e;

  typedef enum logic [2:0] {
    SFU_OP_NONE    = 3'd0,
    SFU_OP_ADD     = 3'd1,
    SFU_OP_LNORM   = 3'd2,
    SFU_OP_SOFTMAX = 3'd3,
    SFU_OP_EE      = 3'd4
  } sfu_op_e;

  // Matrix-multiply command of the processing unit
  typedef struct packed {
    logic [7:0]         mt;        // output row tiles
    logic [7:0]         nt;        // output column tiles
    logic [7:0]         kt;        // reduction tiles
    logic [DEC_AW-1:0]  base_a;    // A in decoder 0
    logic [DEC_AW-1:0]  base_b;    // B^T in decoder 1
    logic [DEC_AW-1:0]  base_c;    // C in dest decoder
    logic               dest_dec;
    ebias_t             bias_a;
    ebias_t             bias_b;
    ebias_t             bias_c;
    act_mode_e          act;
  } pu_cfg_t;

  // Operation of the special function unit
  typedef struct packed {
    sfu_op_e            op;
    logic [DEC_AW-1:0]  src0;      // first source (decoder src_dec / decoder 0 for add)
    logic [DEC_AW-1:0]  src1;      // second source (decoder 1 for add)
    logic               src_dec;
    logic [DEC_AW-1:0]  dst;
    logic               dst_dec;
    logic [7:0]         rows;      // rows to process
    logic [7:0]         row_vecs;  // vectors per row
    ebias_t             bias_in;
    ebias_t             bias_out;
    logic [15:0]        inv_len;   // 1/D, Q0.16 (layer norm)
    logic [AUX_AW-1:0]  aux_base;  // gamma/beta, span mask or EE LUT
    logic [3:0]         head;      // softmax: attention head
    logic [7:0]         row0;      // softmax: token index of first row
    logic [DEC_AW-1:0]  zero_len;  // softmax: context vectors to clear if head is null
    logic [DEC_AW-1:0]  zero_dst;
    logic               zero_dec;
    logic [4:0]         classes;   // EE: number of logits
    q88_t               threshold; // EE: E_T
    logic [3:0]         layer;     // EE: current encoder layer
    logic               lai;       // EE: latency-aware inference
    logic [3:0]         lut_shift; // EE: entropy -> LUT index shift
    logic [7:0]         lut_len;   // EE: LUT entries
  } sfu_cfg_t;

  localparam logic [17:0] POW2_LUT [17] = '{
    18'd65536, 18'd68438, 18'd71468, 18'd74632, 18'd77936, 18'd81386,
    18'd84990, 18'd88752, 18'd92682, 18'd96785, 18'd101070, 18'd105545,
    18'd110218, 18'd115098, 18'd120194, 18'd125515, 18'd131072};

  localparam logic [8:0] LOG2_LUT [17] = '{
    9'd0, 9'd22, 9'd44, 9'd63, 9'd82, 9'd100, 9'd118, 9'd134, 9'd150,
    9'd165, 9'd179, 9'd193, 9'd207, 9'd220, 9'd232, 9'd244, 9'd256};

  localparam int LOG2E_Q14 = 23637;   // log2(e) * 2^14
  localparam int LN2_Q16   = 45426;   // ln(2) * 2^16

  // FP8 -> signed fixed point with `frac` fractional bits (saturated to 32 bits).
  function automatic logic signed [31:0] fp8_to_fix(fp8_t v, int frac, ebias_t bias);
    logic [3:0] e;
    int sh;
    logic [47:0] mag;
    e  = v[6:3];
    sh = int'(e) - int'(bias) - 3 + frac;
    if (e == 4'd0) return 32'sd0;
    if (sh >= 27) mag = 48'h7fff_ffff;
    else if (sh >= 0) mag = 48'({1'b1, v[2:0]}) << sh;
    else if (sh > -5) mag = 48'({1'b1, v[2:0]}) >> (-sh);
    else mag = '0;
    if (mag > 48'h7fff_ffff) mag = 48'h7fff_ffff;
    return v[7] ? -$signed(mag[31:0]) : $signed(mag[31:0]);
  endfunction

  // Signed fixed point with `frac` fractional bits -> FP8 (truncating,
  // saturating at the largest magnitude, flushing to zero below the smallest).
  function automatic fp8_t fix_to_fp8(logic signed [31:0] x, int frac, ebias_t bias);
    logic [31:0] mag;
    int p, e;
    logic [2:0] m;
    mag = x[31] ? 32'(-x) : 32'(x);
    if (mag == 0) return 8'h00;
    p = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) p = i;
    e = p - frac + int'(bias);
    if (e < 1) return 8'h00;
    if (e > 15) return {x[31], 4'hf, 3'h7};
    if (p >= 3) m = 3'(mag >> (p - 3));
    else m = 3'(mag << (3 - p));
    return {x[31], 4'(e), m};
  endfunction

  function automatic q88_t sat16(logic signed [31:0] x);
    if (x > 32'sd32767)  return 16'sh7fff;
    if (x < -32'sd32768) return 16'sh8000;
    return x[15:0];
  endfunction

  // 2^e for e in Q8.8 (signed) -> unsigned Q16.16, saturated to 32 bits.
  function automatic logic [31:0] pow2(q88_t e);
    logic signed [7:0] ip;
    logic [7:0] fr;
    logic [17:0] a, b, m;
    logic [47:0] r;
    ip = e[15:8];
    fr = e[7:0];
    a  = POW2_LUT[5'(fr[7:4])];
    b  = POW2_LUT[fr[7:4] + 5'd1];
    m  = a + 18'(((b - a) * fr[3:0]) >> 4);
    if (ip >= 8'sd15) return 32'hffff_ffff;
    if (ip >= 0) r = 48'(m) << ip;
    else if (ip > -8'sd18) r = 48'(m) >> (-ip);
    else r = '0;
    return r[31:0];
  endfunction

  // log2(x) for unsigned x in Q16.16 (x > 0) -> signed Q8.8.
  function automatic q88_t log2q(logic [31:0] x);
    int p;
    logic [7:0] f;
    logic [31:0] nrm;
    logic [8:0] a, b, l;
    if (x == 0) return 16'sh8000;
    p = 0;
    for (int i = 0; i < 32; i++) if (x[i]) p = i;
    nrm = (p >= 8) ? (x >> (p - 8)) : (x << (8 - p));   // 1.ffffffff in 9 bits
    f = nrm[7:0];
    a = LOG2_LUT[5'(f[7:4])];
    b = LOG2_LUT[f[7:4] + 5'd1];
    l = a + 9'(((b - a) * f[3:0]) >> 4);
    return 16'((p - 16) * 256 + int'(l));
  endfunction

  // e^x for x in Q8.8 -> unsigned Q16.16.
  function automatic logic [31:0] expq(q88_t x);
    logic signed [31:0] y;
    y = (32'(x) * LOG2E_Q14) >>> 14;
    return pow2(sat16(y));
  endfunction

  // ln(x) for unsigned Q16.16 -> Q8.8.
  function automatic q88_t lnq(logic [31:0] x);
    logic signed [31:0] y;
    y = (32'(log2q(x)) * LN2_Q16) >>> 16;
    return sat16(y);
  endfunction

endpackage
