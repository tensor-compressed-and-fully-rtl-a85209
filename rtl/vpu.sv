// vpu: PINTA 32-way vector processing unit.
//
// After a tensor contraction the VPU processes the FP32 results held in the
// partial sum buffer. Each cycle it reads one buffer entry (ROWS x LANES = 32
// floats) and works on all 32 lanes at once. Operations:
//   ADD, SUB, MUL  dst[n] = src1[n] op src2[n], n < len. These combine the
//                  separately quantized contractions of DiffQuant, e.g.
//                  Y+ = Xq W^T + dq+ W^T, and form the next layer's
//                  perturbation, d+ = tanh(Y+) - tanh(Y).
//   TANH           dst[n] = tanh(src1[n]), the PINN activation.
//   QUANT          SMX quantization of len groups of 4 entries: group g reads
//                  entries src1+4g .. src1+4g+3, i.e. ROWS 4x4 blocks, and
//                  writes block r to memory bank r (q_grp=0, A banks) or
//                  ROWS+r (q_grp=1, W banks) at address q_addr+g.
// SMX quantization follows the paper: shared_exp = floor(log2(max|x|)) - emax
// and q = round(x / 2^shared_exp), with emax = b-2 for INT-b elements so the
// largest magnitude lands in [2^(b-2), 2^(b-1)); rounding is half away from
// zero and results clamp to +-(2^(b-1)-1). An all-zero block gets exponent
// -128.
//
// tanh is approximated piecewise linearly on |x| < 4 with 32 segments of
// width 1/8, T[k] = round(65536 * tanh(k/8)); |x| < 2^-8 returns x and
// |x| >= 4 returns T[32]/65536. Maximum error is about 1.5e-3.
//
// Timing: one read per cycle, each result written the cycle after its read;
// QUANT takes 6 cycles per group (4 reads, capture, block write). done is a
// one-cycle pulse, len+2 cycles after start for element-wise commands and
// 6*len+1 cycles after start for QUANT.
//
// From the paper: a 32-way VPU that runs activations and quantization after
// each contraction; the SMX quantization formula; the DiffQuant additions.
// Own choices: the operation set, the FP32 format, the tanh approximation,
// rounding, and the buffer/memory access pattern.
module vpu
  import pinta_pkg::*;
#(
  parameter int ROWS  = 8,
  parameter int COLS  = 8,
  parameter int LANES = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  vpu_cmd_t                      cmd,
  output logic                          busy,
  output logic                          done,
  output logic                          rda_en,
  output logic [PSB_AW-1:0]             rda_addr,
  input  fp32_t [ROWS-1:0][LANES-1:0]   rda_data,
  output logic                          rdb_en,
  output logic [PSB_AW-1:0]             rdb_addr,
  input  fp32_t [ROWS-1:0][LANES-1:0]   rdb_data,
  output logic                          wr_en,
  output logic [PSB_AW-1:0]             wr_addr,
  output fp32_t [ROWS-1:0][LANES-1:0]   wr_data,
  output logic [ROWS+COLS-1:0]          mem_wr_en,
  output logic [MEM_AW-1:0]             mem_wr_addr,
  output smx_block_t [ROWS+COLS-1:0]    mem_wr_data
);

  // round(65536 * tanh(k/8)), k = 0..32
  localparam int unsigned TANH_T [33] = '{
    0, 8150, 16051, 23485, 30285, 36346, 41625, 46131, 49912, 53038, 55593,
    57660, 59320, 60643, 61694, 62524, 63179, 63693, 64096, 64412, 64659,
    64852, 65003, 65120, 65212, 65283, 65339, 65383, 65417, 65443, 65464,
    65480, 65492};

  function automatic fp32_t fp_tanh(fp32_t x);
    int          ex;
    logic [23:0] m24;
    logic [31:0] u;       // |x| in units of 2^-16
    int          k;
    int          fr;
    int          t;
    ex  = int'(x[30:23]);
    m24 = {1'b1, x[22:0]};
    if (ex == 0) return 32'h0;
    if (ex < 127 - 8) return x;                         // |x| < 2^-8
    if (ex >= 129) return fp_from_int(x[31] ? -32'(TANH_T[32]) : 32'(TANH_T[32]), -16);
    u  = 32'(m24) >> (134 - ex);                         // |x| * 2^16, |x| < 4
    k  = int'(u >> 13);
    fr = int'(u & 32'h1fff);
    t  = int'(TANH_T[k]) + (((int'(TANH_T[k+1]) - int'(TANH_T[k])) * fr) >>> 13);
    return fp_from_int(x[31] ? -32'(t) : 32'(t), -16);
  endfunction

  function automatic smx_block_t smx_quant(fp32_t [BLK_ELEMS-1:0] x, prec_e p);
    smx_block_t  b;
    int          emax_f, se, sh, em, qmax, q;
    logic [23:0] m24;
    b      = '0;
    em     = emax_of(p);
    qmax   = (1 << (4 * (int'(p) + 1) - 1)) - 1;
    emax_f = 0;
    for (int e = 0; e < BLK_ELEMS; e++)
      if (int'(x[e][30:23]) > emax_f) emax_f = int'(x[e][30:23]);
    if (emax_f == 0) se = -128;
    else begin
      se = emax_f - 127 - em;
      if (se < -128) se = -128;
      if (se > 127) se = 127;
    end
    b.exp = 8'(se);
    for (int e = 0; e < BLK_ELEMS; e++) begin
      q = 0;
      if (x[e][30:23] != 8'd0) begin
        sh  = int'(x[e][30:23]) - 127 - se;     // |x|/2^se = 1.m * 2^sh
        m24 = {1'b1, x[e][22:0]};
        if (sh > em) q = qmax;
        else if (23 - sh <= 25) q = int'((33'(m24) + (33'd1 << (22 - sh))) >> (23 - sh));
        if (q > qmax) q = qmax;
        if (x[e][31]) q = -q;
      end
      b.m[e] = ELEM_W'(q);
    end
    return b;
  endfunction

  typedef enum logic [1:0] {S_IDLE, S_EW, S_QNT, S_DONE} state_e;
  state_e            state;
  vpu_cmd_t          c;
  logic [PSB_AW:0]   cnt;     // element-wise position / quant group
  logic [2:0]        j;       // quant step in a group
  fp32_t [BLK_ELEMS-1:0] qbuf [ROWS];

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      cnt   <= '0;
      j     <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          c     <= cmd;
          cnt   <= '0;
          j     <= '0;
          if (cmd.len == '0) state <= S_DONE;
          else state <= (cmd.op == VOP_QUANT) ? S_QNT : S_EW;
        end
        S_EW: begin
          cnt <= cnt + 1'b1;
          if (cnt == {1'b0, c.len}) state <= S_DONE;
        end
        S_QNT: begin
          if (j == 3'd5) begin
            j   <= '0;
            cnt <= cnt + 1'b1;
            if (cnt == {1'b0, c.len} - 1'b1) state <= S_DONE;
          end else j <= j + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // quant capture: entry read at step j arrives at step j+1
  always_ff @(posedge clk) begin
    if (state == S_QNT && j >= 3'd1 && j <= 3'd4)
      for (int r = 0; r < ROWS; r++)
        for (int i = 0; i < LANES; i++)
          qbuf[r][BLK*i + int'(j) - 1] <= rda_data[r][i];
  end

  always_comb begin
    rda_en      = 1'b0;
    rda_addr    = '0;
    rdb_en      = 1'b0;
    rdb_addr    = '0;
    wr_en       = 1'b0;
    wr_addr     = c.dst + PSB_AW'(cnt) - 1'b1;
    wr_data     = '0;
    mem_wr_en   = '0;
    mem_wr_addr = c.q_addr + MEM_AW'(cnt);
    mem_wr_data = '0;
    if (state == S_EW) begin
      rda_en   = (cnt < {1'b0, c.len});
      rdb_en   = rda_en && (c.op != VOP_TANH);
      rda_addr = c.src1 + PSB_AW'(cnt);
      rdb_addr = c.src2 + PSB_AW'(cnt);
      wr_en    = (cnt != '0);
      for (int r = 0; r < ROWS; r++)
        for (int i = 0; i < LANES; i++)
          case (c.op)
            VOP_ADD:  wr_data[r][i] = fp_add(rda_data[r][i], rdb_data[r][i]);
            VOP_SUB:  wr_data[r][i] = fp_add(rda_data[r][i], fp_neg(rdb_data[r][i]));
            VOP_MUL:  wr_data[r][i] = fp_mul(rda_data[r][i], rdb_data[r][i]);
            default:  wr_data[r][i] = fp_tanh(rda_data[r][i]);
          endcase
    end
    if (state == S_QNT) begin
      rda_en   = (j <= 3'd3);
      rda_addr = c.src1 + PSB_AW'({cnt, 2'b00}) + PSB_AW'(j);
      if (j == 3'd5)
        for (int r = 0; r < ROWS; r++) begin
          mem_wr_en[c.q_grp ? ROWS + r : r]   = 1'b1;
          mem_wr_data[c.q_grp ? ROWS + r : r] = smx_quant(qbuf[r], c.q_prec);
        end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   start && !busy && cmd.op == VOP_QUANT |-> ROWS <= COLS)
    else $error("vpu: QUANT to W banks needs COLS >= ROWS");

endmodule
