// lpu_pkg: types, constants and arithmetic shared by all LPU modules.
//
// Holds three things:
//  * FP16 arithmetic helpers (pack with round-to-nearest-even, add, multiply, divide, exponential,
//    compare) used by the vector engine and the sampler, and a small "wide float" (sign, exponent,
//    32-bit mantissa) used by the MAC-tree accumulators. Subnormal inputs and results are flushed
//    to zero and overflow saturates to infinity; NaN is not produced. These are this design's
//    choices: the LPU is described as an FP16 machine without further numeric detail.
//  * The 64-bit instruction word. The four instruction groups (MEM, COMP, NET, CTRL) and the
//    instruction types inside them follow the LPU instruction-set table; the bit layout, the
//    opcode values and the function codes are this design's own.
//  * The ESL packet carried between devices on the synchronization ring.
package lpu_pkg;

  // --------------------------------------------------------------------------------------------
  // Sizes shared across modules
  // --------------------------------------------------------------------------------------------
  localparam int unsigned LMU_AW  = 12;   // LMU vector word address (4096 words)
  localparam int unsigned NSREG_V = 4;    // scalar registers in the LMU (FP16 / integer)
  localparam int unsigned NSREG_I = 16;   // scalar registers in the ICP (32-bit)
  localparam int unsigned HBM_AW  = 25;   // 64-byte word address inside one HBM channel (2 GiB)
  localparam int unsigned CH_W    = 512;  // data bits of one HBM channel port per cycle
  localparam int unsigned REGION_SHIFT = 6;                       // scoreboard region = 64 words
  localparam int unsigned NREGION = (1 << LMU_AW) >> REGION_SHIFT; // 64 regions

  // --------------------------------------------------------------------------------------------
  // Instruction set
  // --------------------------------------------------------------------------------------------
  typedef enum logic [5:0] {
    OP_NOP        = 6'h00,
    // MEM
    OP_RD_EMB     = 6'h01,  // HBM  -> LMU   (embedding, norm parameters)
    OP_RD_KV      = 6'h02,  // HBM  -> SMA stream (Key/Value)
    OP_RD_PARAM   = 6'h03,  // HBM  -> SMA stream (weights, bias)
    OP_RD_HOST    = 6'h04,  // host -> LMU
    OP_WR_KV      = 6'h05,  // LMU  -> HBM through SMA (strobed, optionally transposed)
    OP_WR_HOST    = 6'h06,  // LMU  -> host
    // COMP
    OP_MATMUL     = 6'h10,  // vector-matrix on SXE: LMU vector x SMA stream
    OP_VEC        = 6'h11,  // vector / vector-scalar on VXE
    OP_VFUSE      = 6'h12,  // fused vector op on VXE (funct selects the fusion)
    OP_SAMPLE     = 6'h13,  // sort logits and sample a token
    // NET
    OP_TX         = 6'h20,  // LMU -> P2P
    OP_RX         = 6'h21,  // wait for P2P -> LMU packets
    // CTRL
    OP_ALU        = 6'h30,
    OP_BR         = 6'h31,
    OP_JMP        = 6'h32,
    OP_HLT        = 6'h3F
  } opcode_e;

  // Instruction word (64 bits):
  //   [63:58] op  [57:46] dst  [45:34] src  [33:22] len  [21:18] sreg  [17:0] imm
  typedef struct packed {
    opcode_e     op;
    logic [11:0] dst;
    logic [11:0] src;
    logic [11:0] len;
    logic [3:0]  sreg;
    logic [17:0] imm;
  } instr_t;

  // CTRL ALU functions (len[3:0])
  typedef enum logic [3:0] {
    ALU_ADD  = 4'd0,  // rd = rs1 + rs2
    ALU_SUB  = 4'd1,  // rd = rs1 - rs2
    ALU_ADDI = 4'd2,  // rd = rs1 + sext(imm)
    ALU_SHRI = 4'd3,  // rd = rs1 >> imm
    ALU_ANDI = 4'd4,  // rd = rs1 & imm
    ALU_SHLI = 4'd5,  // rd = rs1 << imm
    ALU_MOVI = 4'd6,  // rd = sext(imm)
    ALU_MOVC = 4'd7,  // rd = control register[imm]
    ALU_MOVS = 4'd8,  // rd = LMU scalar register[imm]
    ALU_MUL  = 4'd9   // rd = rs1 * rs2
  } alu_e;

  // Branch conditions (len[1:0])
  typedef enum logic [1:0] {BR_EQ = 2'd0, BR_NE = 2'd1, BR_LT = 2'd2, BR_GE = 2'd3} brc_e;

  // VXE functions (imm[17:14])
  typedef enum logic [3:0] {
    VX_ADD  = 4'd0,   // d = a + b            (residual)
    VX_SUB  = 4'd1,   // d = a - b
    VX_MUL  = 4'd2,   // d = a * b            (gamma scaling)
    VX_ADDS = 4'd3,   // d = a + s
    VX_SUBS = 4'd4,   // d = a - s            (softmax: subtract the maximum)
    VX_MULS = 4'd5,   // d = a * s
    VX_DIVS = 4'd6,   // d = a / s            (softmax: normalise)
    VX_EXP  = 4'd7,   // d = exp(a)
    VX_SUM  = 4'd8,   // s = sum(a)
    VX_MAX  = 4'd9,   // s = max(a)
    VX_RELU = 4'd10,  // d = max(a, 0)
    VX_COPY = 4'd11,  // d = a                (token embedding move)
    VX_SUBEXP = 4'd12 // d = exp(a - s)       (fused softmax numerator)
  } vxf_e;

  // --------------------------------------------------------------------------------------------
  // ESL packet
  // --------------------------------------------------------------------------------------------
  localparam int unsigned OFF_W = 6;  // element offset inside an LMU word (V = 64)

  // --------------------------------------------------------------------------------------------
  // FP16 helpers
  // --------------------------------------------------------------------------------------------
  localparam logic [15:0] FP16_INF  = 16'h7C00;
  localparam logic [15:0] FP16_ONE  = 16'h3C00;

  // Wide float used inside the MAC-tree accumulator: value = (-1)^s * m * 2^e.
  // When non-zero, m is normalised so that bit 31 is set.
  typedef struct packed {
    logic               s;
    logic signed [11:0] e;
    logic [31:0]        m;
  } wf_t;

  // Position of the leading one of a 48-bit magnitude (0 when mag is zero).
  function automatic int lead48(input logic [47:0] mag);
    int p;
    p = 0;
    for (int i = 0; i < 48; i++) if (mag[i]) p = i;
    return p;
  endfunction

  // Round value (-1)^s * mag * 2^elsb to FP16, round to nearest even.
  function automatic logic [15:0] fp_pack(input logic s, input int elsb, input logic [47:0] mag);
    int p, be;
    logic [47:0] n;
    logic [10:0] mt;
    logic g, st;
    if (mag == '0) return {s, 15'd0};
    p  = lead48(mag);
    n  = mag << (47 - p);
    mt = {1'b0, n[46:37]};
    g  = n[36];
    st = |n[35:0];
    be = p + elsb + 15;
    if (g && (st || mt[0])) mt = mt + 11'd1;
    if (mt[10]) begin
      mt = '0;
      be = be + 1;
    end
    if (be <= 0)  return {s, 15'd0};
    if (be >= 31) return {s, FP16_INF[14:0]};
    return {s, be[4:0], mt[9:0]};
  endfunction

  // Significand with hidden bit (0 for zero / subnormal).
  function automatic logic [10:0] fp_sig(input logic [15:0] a);
    return (a[14:10] == 5'd0) ? 11'd0 : {1'b1, a[9:0]};
  endfunction

  function automatic logic [15:0] fp_mul(input logic [15:0] a, input logic [15:0] b);
    logic [21:0] p;
    p = fp_sig(a) * fp_sig(b);
    return fp_pack(a[15] ^ b[15], int'(a[14:10]) + int'(b[14:10]) - 50, {26'd0, p});
  endfunction

  function automatic wf_t wf_norm(input logic s, input int elsb, input logic [47:0] mag);
    wf_t r;
    int p;
    logic [47:0] n;
    if (mag == '0) return '{s: 1'b0, e: -12'sd1024, m: 32'd0};
    p   = lead48(mag);
    n   = mag << (47 - p);
    r.s = s;
    r.m = n[47:16];
    r.e = 12'(elsb + p - 31);
    return r;
  endfunction

  // Add two wide floats; the smaller is aligned to the larger, bits shifted out fold into a sticky.
  function automatic wf_t wf_add(input wf_t a, input wf_t b);
    wf_t x, y;
    int d;
    logic [47:0] mx, my, r;
    logic st;
    if (a.m == '0) return b;
    if (b.m == '0) return a;
    if ((a.e > b.e) || ((a.e == b.e) && (a.m >= b.m))) begin x = a; y = b; end
    else begin x = b; y = a; end
    d  = int'(x.e) - int'(y.e);
    mx = {1'b0, x.m, 15'd0};
    if (d > 46) begin
      my = 48'd1;
    end else begin
      my = {1'b0, y.m, 15'd0} >> d;
      st = (d > 15) ? (|(y.m << (47 - d))) : 1'b0;
      my[0] = my[0] | st;
    end
    r = (x.s == y.s) ? (mx + my) : (mx - my);
    return wf_norm(x.s, int'(x.e) - 15, r);
  endfunction

  function automatic logic [15:0] wf_to_fp16(input wf_t a);
    if (a.m == '0) return 16'd0;
    return fp_pack(a.s, int'(a.e), {16'd0, a.m});
  endfunction

  function automatic wf_t fp16_to_wf(input logic [15:0] a);
    return wf_norm(a[15], int'(a[14:10]) - 25, {37'd0, fp_sig(a)});
  endfunction

  function automatic logic [15:0] fp_add(input logic [15:0] a, input logic [15:0] b);
    return wf_to_fp16(wf_add(fp16_to_wf(a), fp16_to_wf(b)));
  endfunction

  function automatic logic [15:0] fp_sub(input logic [15:0] a, input logic [15:0] b);
    return fp_add(a, {~b[15], b[14:0]});
  endfunction

  function automatic logic [15:0] fp_div(input logic [15:0] a, input logic [15:0] b);
    logic [34:0] num, q;
    logic [10:0] sb;
    sb = fp_sig(b);
    if (sb == '0) return {a[15] ^ b[15], FP16_INF[14:0]};
    num = {fp_sig(a), 24'd0};
    q   = num / {24'd0, sb};
    q[0] = q[0] | ((num % {24'd0, sb}) != 0);
    return fp_pack(a[15] ^ b[15], int'(a[14:10]) - int'(b[14:10]) - 24, {13'd0, q});
  endfunction

  // a > b for FP16 (zeros of either sign compare equal).
  function automatic logic fp_gt(input logic [15:0] a, input logic [15:0] b);
    logic [15:0] ka, kb;
    ka = (a[14:10] == 0) ? 16'h8000 : (a[15] ? ~a : {1'b1, a[14:0]});
    kb = (b[14:10] == 0) ? 16'h8000 : (b[15] ? ~b : {1'b1, b[14:0]});
    return ka > kb;
  endfunction

  function automatic logic [15:0] fp_max(input logic [15:0] a, input logic [15:0] b);
    return fp_gt(b, a) ? b : a;
  endfunction

  // exp(x) = 2^(x*log2 e): the product is formed in fixed point (16 fraction bits); the integer
  // part becomes the exponent and 2^f on the fraction is a cubic least-squares polynomial
  // (coefficients 0.69543, 0.22693, 0.07739; relative error below 1.3e-4).
  function automatic logic [15:0] fp_exp(input logic [15:0] x);
    logic signed [31:0] xf, t, f, p;
    int sh, n;
    logic [10:0] sg;
    sg = fp_sig(x);
    if (sg == '0) return FP16_ONE;
    if (!x[15] && x[14:10] >= 5'd19) return FP16_INF;   // x >= 16
    if (x[15] && x[14:10] >= 5'd19) return 16'd0;       // x <= -16
    sh = int'(x[14:10]) - 25 + 16;                        // to 16 fraction bits
    xf = (sh >= 0) ? (32'(sg) <<< sh) : (32'(sg) >>> (-sh));
    if (x[15]) xf = -xf;
    t  = 32'((64'(signed'(xf)) * 64'sd94548) >>> 16);     // x * log2(e), 16 fraction bits
    n  = int'(t >>> 16);
    f  = t & 32'h0000_FFFF;
    p  = 32'sd5072;
    p  = 32'sd14872 + ((p * f) >>> 16);
    p  = 32'sd45576 + ((p * f) >>> 16);
    p  = 32'sd65536 + ((p * f) >>> 16);
    return fp_pack(1'b0, n - 16, {16'd0, p});
  endfunction

endpackage
