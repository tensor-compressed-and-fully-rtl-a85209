// tb_pinta_top: end-to-end test of the PINTA accelerator at its default size
// (8x8 BMEs, 384 KB memory, 256-entry partial sum buffer). It runs the
// command sequence of one DiffQuant layer step and a gradient-style
// contraction:
//   1 GEMM  Y  = Xq W^T          (INT8 x INT8, 4 block steps)   -> tile 0
//   2 GEMM  D+ = dq+ W^T         (perturbation quantized alone) -> tile 1
//   3 ADD   Y+ = Y + D+                                         -> tile 2
//   4 TANH  Z = tanh(Y), Z+ = tanh(Y+)                          -> tiles 3, 4
//   5 SUB   d' = Z+ - Z          (next layer's perturbation)    -> tile 5
//   6 QUANT Z -> A banks, d' -> W banks (INT8 SMX)
//   7 GEMM  Zq d'q^T             (8 block steps)                -> tile 2
//   8 GEMM  tile0 + E'^T W'      (INT12 x INT8, transposed, reloaded) -> tile 6
//   9 MUL   tile 5 * tile 0                                     -> tile 7
// After every command the buffer is read through the host port and each
// result is compared with a real-number model built from the testbench's
// copies of memory and buffer. Latencies of the GEMMs are checked against
// the bit-serial schedule. Each mechanism (multi-beat bit-serial products,
// transposed operands, partial-sum reload, drain, every VPU operation, and a
// perturbation that survives quantization) is counted and must occur.
module tb_pinta_top;
  import pinta_pkg::*;
  import tb_util_pkg::*;

  localparam int R = 8, C = 8, CHAIN = 32, NB = 16;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, cmd_done;
  pinta_cmd_t cmd;
  logic host_mem_wr_en, host_psb_wr_en, host_psb_rd_en;
  logic [3:0] host_mem_wr_bank;
  logic [MEM_AW-1:0] host_mem_wr_addr;
  smx_block_t host_mem_wr_data;
  logic [PSB_AW-1:0] host_psb_wr_addr, host_psb_rd_addr;
  fp32_t [R-1:0][3:0] host_psb_wr_data, host_psb_rd_data;
  int checks = 0, failures = 0;

  pinta_top dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // testbench copies
  smx_block_t shadow [NB][64];
  fp32_t [R-1:0][3:0] img [256];
  always @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (dut.mem_wr_en[b] && int'(dut.mem_wr_addr) < 64) shadow[b][dut.mem_wr_addr] = dut.mem_wr_data[b];

  // mechanism counters
  int n_multibeat = 0, n_trans = 0, n_reload = 0, n_drain = 0, n_survive = 0;
  int n_vop [5];
  always @(posedge clk) begin
    if (dut.u_tcu.beat_issued && (dut.u_tcu.sa != 0 || dut.u_tcu.sw != 0)) n_multibeat++;
    if (dut.u_tcu.beat_issued && (dut.u_tcu.c.trans_a || dut.u_tcu.c.trans_w)) n_trans++;
    if (dut.u_tcu.init_shift) n_reload++;
    if (dut.u_tcu.drain_shift) n_drain++;
    if (dut.u_vpu.done) n_vop[dut.u_vpu.c.op]++;
  end

  task automatic wblk(int bank, int addr, int p, int ex);
    smx_block_t b;
    int nb;
    nb = 4 * (p + 1);
    b = '0; b.exp = 8'(ex);
    for (int e = 0; e < 16; e++) b.m[e] = 12'(int'($urandom_range((1 << nb) - 2)) - (1 << (nb - 1)) + 1);
    host_mem_wr_en = 1; host_mem_wr_bank = 4'(bank); host_mem_wr_addr = MEM_AW'(addr); host_mem_wr_data = b;
    @(negedge clk);
    host_mem_wr_en = 0;
  endtask

  task automatic read_tile(int base);
    for (int col = 0; col < CHAIN; col++) begin
      host_psb_rd_en = 1; host_psb_rd_addr = PSB_AW'(base + col);
      @(negedge clk);
      host_psb_rd_en = 0;
      img[base + col] = host_psb_rd_data;
    end
  endtask

  task automatic issue(pinta_cmd_t c2, output int cyc);
    while (!cmd_ready) @(negedge clk);
    cmd = c2; cmd_valid = 1;       // accepted at the next rising edge
    @(negedge clk);
    cmd_valid = 0; cyc = 1;
    while (!cmd_done) begin @(negedge clk); cyc++; end
    @(negedge clk);
  endtask

  task automatic gemm(tcu_cmd_t t);
    pinta_cmd_t c2;
    real ref_t [32][32];
    real scl_t [32][32];
    int cyc, na, nw, expc;
    c2 = '0; c2.op = OP_GEMM; c2.tcu = t;
    for (int i = 0; i < 32; i++) for (int j = 0; j < 32; j++) begin
      ref_t[i][j] = t.acc_load ? fp2r(img[int'(t.psb_ld) + j][i / 4][i % 4]) : 0.0;
      scl_t[i][j] = rabs(ref_t[i][j]);
    end
    for (int r = 0; r < R; r++)
      for (int cc = 0; cc < C; cc++)
        for (int kb = 0; kb < int'(t.kblocks); kb++) begin
          smx_block_t ab, wb;
          ab = shadow[r][int'(t.a_addr) + kb];
          wb = shadow[R + cc][int'(t.w_addr) + kb];
          for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) for (int k = 0; k < 4; k++) begin
            int x, y; real v;
            x = elem_val(t.trans_a ? ab.m[4*k+i] : ab.m[4*i+k], int'(t.a_prec));
            y = elem_val(t.trans_w ? wb.m[4*k+j] : wb.m[4*j+k], int'(t.w_prec));
            v = real'(x * y) * pow2(int'(ab.exp) + int'(wb.exp));
            ref_t[4*r+i][4*cc+j] += v;
            scl_t[4*r+i][4*cc+j] += rabs(v);
          end
        end
    issue(c2, cyc);
    na = int'(t.a_prec) + 1; nw = int'(t.w_prec) + 1;
    expc = (t.acc_load ? CHAIN + 1 : 0) + int'(t.kblocks) * na * nw + 1 + R + C + CHAIN + 1;
    checks++;
    if (cyc != expc) begin failures++; $display("FAIL GEMM latency %0d != %0d", cyc, expc); end
    read_tile(int'(t.psb_st));
    for (int i = 0; i < 32; i++) for (int j = 0; j < 32; j++) begin
      checks++;
      if (!close(fp2r(img[int'(t.psb_st) + j][i / 4][i % 4]), ref_t[i][j], scl_t[i][j], 2.0e-6, 1.0e-30)) begin
        failures++;
        if (failures < 10) $display("FAIL GEMM C[%0d][%0d] %g vs %g", i, j,
                                    fp2r(img[int'(t.psb_st) + j][i / 4][i % 4]), ref_t[i][j]);
      end
    end
  endtask

  task automatic vop(vop_e op, int s1, int s2, int d);
    pinta_cmd_t c2;
    fp32_t [R-1:0][3:0] in1 [32];
    fp32_t [R-1:0][3:0] in2 [32];
    int cyc;
    for (int n = 0; n < 32; n++) begin in1[n] = img[s1 + n]; in2[n] = img[s2 + n]; end
    c2 = '0; c2.op = OP_VPU; c2.vpu.op = op; c2.vpu.src1 = PSB_AW'(s1); c2.vpu.src2 = PSB_AW'(s2);
    c2.vpu.dst = PSB_AW'(d); c2.vpu.len = 32;
    issue(c2, cyc);
    checks++;
    if (cyc != 34) begin failures++; $display("FAIL VPU latency %0d", cyc); end
    read_tile(d);
    for (int n = 0; n < 32; n++) for (int r = 0; r < R; r++) for (int i = 0; i < 4; i++) begin
      real x, y, g, e, sc, tol;
      x = fp2r(in1[n][r][i]); y = fp2r(in2[n][r][i]); g = fp2r(img[d + n][r][i]);
      tol = 0.0;
      case (op)
        VOP_ADD: begin e = x + y; sc = rabs(x) + rabs(y); end
        VOP_SUB: begin e = x - y; sc = rabs(x) + rabs(y); end
        VOP_MUL: begin e = x * y; sc = rabs(e); end
        default: begin e = $tanh(x); sc = 0.0; tol = 1.6e-3; end
      endcase
      checks++;
      if (!close(g, e, sc, 3.0e-7, tol + 1.0e-30)) begin
        failures++;
        if (failures < 10) $display("FAIL VPU op %0d: %g vs %g", op, g, e);
      end
    end
  endtask

  function automatic int ref_q(real x, int se, int p);
    real v; int q, qmax;
    qmax = (1 << (4 * (p + 1) - 1)) - 1;
    v = rabs(x) / pow2(se);
    q = int'($floor(v + 0.5));
    if (q > qmax) q = qmax;
    return (x < 0.0) ? -q : q;
  endfunction

  task automatic quant(int src, logic grp, int addr, int p, bit is_delta);
    pinta_cmd_t c2;
    int cyc;
    c2 = '0; c2.op = OP_VPU; c2.vpu.op = VOP_QUANT; c2.vpu.src1 = PSB_AW'(src); c2.vpu.len = 8;
    c2.vpu.q_prec = prec_e'(p); c2.vpu.q_grp = grp; c2.vpu.q_addr = MEM_AW'(addr);
    issue(c2, cyc);
    checks++;
    if (cyc != 8 * 6 + 1) begin failures++; $display("FAIL QUANT latency %0d", cyc); end
    for (int g = 0; g < 8; g++)
      for (int r = 0; r < R; r++) begin
        smx_block_t b;
        real mx; int se;
        b = shadow[grp ? R + r : r][addr + g];
        mx = 0.0;
        for (int e = 0; e < 16; e++) if (rabs(fp2r(img[src + 4*g + e % 4][r][e / 4])) > mx)
          mx = rabs(fp2r(img[src + 4*g + e % 4][r][e / 4]));
        se = (mx == 0.0) ? -128 : int'($floor($ln(mx) / $ln(2.0))) - (4 * (p + 1) - 2);
        checks++;
        if (int'(b.exp) != se) begin failures++; $display("FAIL QUANT exp %0d vs %0d", b.exp, se); end
        for (int e = 0; e < 16; e++) begin
          checks++;
          if (elem_val(b.m[e], p) != ref_q(fp2r(img[src + 4*g + e % 4][r][e / 4]), se, p)) begin
            failures++;
            if (failures < 10) $display("FAIL QUANT elem");
          end
          if (is_delta && elem_val(b.m[e], p) != 0) n_survive++;
        end
      end
  endtask

  initial begin
    tcu_cmd_t t;
    cmd_valid = 0; cmd = '0; host_mem_wr_en = 0; host_mem_wr_bank = '0; host_mem_wr_addr = '0;
    host_mem_wr_data = '0; host_psb_wr_en = 0; host_psb_wr_addr = '0; host_psb_wr_data = '0;
    host_psb_rd_en = 0; host_psb_rd_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // operands: X (INT8, ~[-1,1]), perturbation d+ (INT8, ~1e-2), W (INT8), E (INT12)
    for (int kb = 0; kb < 4; kb++) for (int r = 0; r < R; r++) begin
      wblk(r, kb, 1, -7);
      wblk(r, 4 + kb, 1, -13);
    end
    for (int kb = 0; kb < 4; kb++) for (int cc = 0; cc < C; cc++) wblk(R + cc, kb, 1, -9);
    for (int kb = 0; kb < 2; kb++) for (int r = 0; r < R; r++) wblk(r, 8 + kb, 2, -14);

    t = '0; t.a_addr = 0; t.w_addr = 0; t.kblocks = 4; t.a_prec = PREC_INT8; t.w_prec = PREC_INT8;
    t.psb_st = 0;
    gemm(t);                                                 // Y
    t.a_addr = 4; t.psb_st = 32;
    gemm(t);                                                 // D+
    vop(VOP_ADD, 0, 32, 64);                                 // Y+
    vop(VOP_TANH, 0, 0, 96);                                 // Z
    vop(VOP_TANH, 64, 64, 128);                              // Z+
    vop(VOP_SUB, 128, 96, 160);                              // d'
    quant(96, 1'b0, 20, 1, 1'b0);                            // Zq  -> A banks
    quant(160, 1'b1, 20, 1, 1'b1);                           // d'q -> W banks
    t = '0; t.a_addr = 20; t.w_addr = 20; t.kblocks = 8; t.a_prec = PREC_INT8; t.w_prec = PREC_INT8;
    t.psb_st = 64;
    gemm(t);                                                 // Zq d'q^T
    t = '0; t.a_addr = 8; t.w_addr = 0; t.kblocks = 2; t.a_prec = PREC_INT12; t.w_prec = PREC_INT8;
    t.trans_a = 1; t.trans_w = 1; t.acc_load = 1; t.psb_ld = 0; t.psb_st = 192;
    gemm(t);                                                 // reload + transposed INT12
    vop(VOP_MUL, 160, 0, 224);

    $display("mechanisms: multibeat=%0d transposed=%0d reload=%0d drain=%0d add=%0d sub=%0d mul=%0d tanh=%0d quant=%0d surviving_delta=%0d",
             n_multibeat, n_trans, n_reload, n_drain, n_vop[0], n_vop[1], n_vop[2], n_vop[3], n_vop[4], n_survive);
    checks++; if (n_multibeat == 0) begin failures++; $display("FAIL no multi-beat product"); end
    checks++; if (n_trans == 0) begin failures++; $display("FAIL no transposed operand"); end
    checks++; if (n_reload == 0) begin failures++; $display("FAIL no partial-sum reload"); end
    checks++; if (n_drain == 0) begin failures++; $display("FAIL no drain"); end
    for (int o = 0; o < 5; o++) begin
      checks++; if (n_vop[o] == 0) begin failures++; $display("FAIL VPU op %0d never ran", o); end
    end
    checks++; if (n_survive == 0) begin failures++; $display("FAIL perturbation masked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
