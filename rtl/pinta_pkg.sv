// pinta_pkg: shared types, constants and floating-point helpers of the
// PINTA physics-informed neural training accelerator.
//
// Number formats
//   * Operands are Square-block MX integers (SMX): a 4x4 block of integers
//     that share one power-of-two scale, value = m * 2^exp. Elements are INT4,
//     INT8 or INT12 (INT8 for weights/activations, INT12 for gradients, as the
//     paper prescribes); each is kept in a 12-bit two's-complement container.
//   * Partial sums and everything the vector unit handles are IEEE-754 single
//     precision bit patterns (fp32_t). The arithmetic below truncates (rounds
//     toward zero), flushes results below the normal range to zero and
//     saturates at the largest finite value; NaN and infinity are not produced.
//     The paper only says partial sums are "floating point"; FP32 and this
//     rounding are choices of this design.
//   * A memory word is one SMX block padded to 256 bits.
//
// The bit-serial scheme: a 12-bit container is split into 4-bit slices. The
// most significant slice in use is signed, the lower ones are unsigned, so
// x = sum_s slice_s * 16^s. One "beat" carries one slice plane of a block.
package pinta_pkg;

  localparam int BLK       = 4;          // SMX block edge (paper: 4x4 blocks)
  localparam int BLK_ELEMS = BLK * BLK;  // 16 elements per block
  localparam int ELEM_W    = 12;         // element container width (INT12 max)
  localparam int NIB_W     = 4;          // DPE multiplier operand width (INT4)
  localparam int EXP_W     = 8;          // shared exponent, two's complement
  localparam int WORD_W    = 256;        // on-chip memory word
  localparam int MEM_AW    = 10;         // on-chip memory bank address width
  localparam int PSB_AW    = 8;          // partial sum buffer address width

  typedef logic [31:0] fp32_t;

  typedef enum logic [1:0] {
    PREC_INT4  = 2'd0,
    PREC_INT8  = 2'd1,
    PREC_INT12 = 2'd2
  } prec_e;

  // One SMX block as stored in memory. m[4*i+j] is row i, column j.
  typedef struct packed {
    logic [WORD_W-EXP_W-BLK_ELEMS*ELEM_W-1:0] rsvd;
    logic signed [EXP_W-1:0]                  exp;
    logic [BLK_ELEMS-1:0][ELEM_W-1:0]         m;
  } smx_block_t;

  // One bit-serial beat of an operand block travelling through the array.
  typedef struct packed {
    logic                         valid;
    logic                         trans;  // use the block transposed
    logic                         top;    // slice is the signed (top) one
    logic [1:0]                   slice;  // slice index s, weight 16^s
    logic signed [EXP_W-1:0]      exp;    // block shared exponent
    logic [BLK_ELEMS-1:0][NIB_W-1:0] nib; // slice s of every element
  } beat_t;

  // Tensor contraction command: one 32x32 output tile,
  // C += sum_k A'(k) * W'(k)^T over kblocks SMX block steps.
  typedef struct packed {
    logic [MEM_AW-1:0] a_addr;    // first A block in each row bank
    logic [MEM_AW-1:0] w_addr;    // first W block in each column bank
    logic [MEM_AW-1:0] kblocks;   // number of reduction block steps (>=1)
    prec_e             a_prec;
    prec_e             w_prec;
    logic              trans_a;
    logic              trans_w;
    logic              acc_load;  // start from a tile in the psum buffer
    logic [PSB_AW-1:0] psb_ld;    // tile base to load (if acc_load)
    logic [PSB_AW-1:0] psb_st;    // tile base to store the result
  } tcu_cmd_t;

  typedef enum logic [2:0] {
    VOP_ADD   = 3'd0,
    VOP_SUB   = 3'd1,
    VOP_MUL   = 3'd2,
    VOP_TANH  = 3'd3,
    VOP_QUANT = 3'd4
  } vop_e;

  typedef struct packed {
    vop_e              op;
    logic [PSB_AW-1:0] src1;
    logic [PSB_AW-1:0] src2;
    logic [PSB_AW-1:0] dst;
    logic [PSB_AW-1:0] len;      // entries (ADD..TANH) or 4-column groups (QUANT)
    prec_e             q_prec;   // QUANT: element precision
    logic              q_grp;    // QUANT: 0 = row (A) banks, 1 = column (W) banks
    logic [MEM_AW-1:0] q_addr;   // QUANT: first memory address written
  } vpu_cmd_t;

  typedef enum logic [0:0] {
    OP_GEMM = 1'b0,
    OP_VPU  = 1'b1
  } op_e;

  typedef struct packed {
    op_e      op;
    tcu_cmd_t tcu;
    vpu_cmd_t vpu;
  } pinta_cmd_t;

  // Number of 4-bit slices of a precision.
  function automatic logic [1:0] nslices(prec_e p);
    return 2'(p) + 2'd1;
  endfunction

  // Slice s of a 12-bit container.
  function automatic logic [NIB_W-1:0] get_slice(logic [ELEM_W-1:0] x, logic [1:0] s);
    return x[4*s +: 4];
  endfunction

  // Largest exponent value emax of an INT-b element: 2^emax <= 2^(b-1)-1.
  function automatic int emax_of(prec_e p);
    return 4 * (int'(p) + 1) - 2;
  endfunction

  // v * 2^e as fp32 (truncating when |v| needs more than 24 bits).
  function automatic fp32_t fp_from_int(logic signed [31:0] v, int e);
    logic [31:0] mag;
    int          p;
    int          ef;
    logic [31:0] mant;
    if (v == 0) return 32'h0;
    mag = v[31] ? 32'(-v) : 32'(v);
    p = 0;
    for (int k = 0; k < 32; k++) if (mag[k]) p = k;
    ef = 127 + e + p;
    if (ef <= 0) return 32'h0;
    if (ef >= 255) return {v[31], 31'h7f7fffff};
    if (p > 23) mant = mag >> (p - 23);
    else        mant = mag << (23 - p);
    return {v[31], 8'(ef), mant[22:0]};
  endfunction

  function automatic fp32_t fp_add(fp32_t a, fp32_t b);
    fp32_t       x, y;
    logic [26:0] mx, my;
    logic [27:0] s;
    int          ex, d, p, ef;
    logic [27:0] n;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'h0 : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    ex = int'(x[30:23]);
    d  = ex - int'(y[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = (d > 26) ? 27'd0 : ({1'b1, y[22:0], 3'b000} >> d);
    if (x[31] == y[31]) s = {1'b0, mx} + {1'b0, my};
    else                s = {1'b0, mx} - {1'b0, my};
    if (s == 28'd0) return 32'h0;
    p = 0;
    for (int k = 0; k < 28; k++) if (s[k]) p = k;
    ef = ex + p - 26;
    if (ef <= 0) return 32'h0;
    if (ef >= 255) return {x[31], 31'h7f7fffff};
    n = (p >= 26) ? (s >> (p - 26)) : (s << (26 - p));
    return {x[31], 8'(ef), n[25:3]};
  endfunction

  function automatic fp32_t fp_neg(fp32_t a);
    return (a[30:23] == 8'd0) ? 32'h0 : {~a[31], a[30:0]};
  endfunction

  function automatic fp32_t fp_mul(fp32_t a, fp32_t b);
    logic [47:0] pr;
    int          ef;
    logic [22:0] m;
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return 32'h0;
    pr = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    ef = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (pr[47]) begin m = pr[46:24]; ef = ef + 1; end
    else        m = pr[45:23];
    if (ef <= 0) return 32'h0;
    if (ef >= 255) return {a[31] ^ b[31], 31'h7f7fffff};
    return {a[31] ^ b[31], 8'(ef), m};
  endfunction

endpackage
