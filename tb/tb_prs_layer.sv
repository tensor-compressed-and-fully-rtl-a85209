// tb_prs_layer: workload test on the default-size accelerator. It runs the
// input contraction of a partial-reconstruction TT layer with the shape of
// the example layer in the publication: batch 128, 256 inputs, 256 outputs,
// mode sizes [16,16] and TT ranks [1,8,8,8,1], so the partial factors are
// B (256 x 8) and A (8 x 256). The factors and the INT8 input X are given as
// SMX blocks (as the host would provide them); the accelerator computes
//   T  = X B          4 tiles of 32 rows, 64 block steps each (B used
//                     transposed from its natural storage)
//   Tq = QUANT(T)     INT8, into the A banks
//   Y  = Tq A         4 x 8 tiles, 2 block steps each
// Every tile is read back and compared with a real-number model built from
// the testbench's copy of the memory. Cycles are counted and printed.
module tb_prs_layer;
  import pinta_pkg::*;
  import tb_util_pkg::*;

  localparam int R = 8, C = 8, CHAIN = 32, NB = 16;
  localparam int BATCH = 128, NIN = 256, NOUT = 256, RANK = 8;
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
  longint busy_cycles = 0;

  pinta_top dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  smx_block_t shadow [NB][768];
  fp32_t [R-1:0][3:0] img [256];
  always @(posedge clk) begin
    for (int b = 0; b < NB; b++)
      if (dut.mem_wr_en[b]) shadow[b][dut.mem_wr_addr] = dut.mem_wr_data[b];
    if (!cmd_ready) busy_cycles++;
  end

  task automatic wblk(int bank, int addr, int ex);
    smx_block_t b;
    b = '0; b.exp = 8'(ex);
    for (int e = 0; e < 16; e++) b.m[e] = 12'(int'($urandom_range(254)) - 127);
    host_mem_wr_en = 1; host_mem_wr_bank = 4'(bank); host_mem_wr_addr = MEM_AW'(addr); host_mem_wr_data = b;
    @(negedge clk);
    host_mem_wr_en = 0;
  endtask

  task automatic issue(pinta_cmd_t c2);
    while (!cmd_ready) @(negedge clk);
    cmd = c2; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
    @(negedge clk);
  endtask

  // run one GEMM, read the tile back, compare columns [0, ncols)
  task automatic gemm(tcu_cmd_t t, int ncols);
    pinta_cmd_t c2;
    real ref_t [32][32];
    real scl_t [32][32];
    c2 = '0; c2.op = OP_GEMM; c2.tcu = t;
    for (int i = 0; i < 32; i++) for (int j = 0; j < 32; j++) begin ref_t[i][j] = 0.0; scl_t[i][j] = 0.0; end
    for (int r = 0; r < R; r++)
      for (int cc = 0; cc < ncols / 4; cc++)
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
    issue(c2);
    for (int col = 0; col < ncols; col++) begin
      host_psb_rd_en = 1; host_psb_rd_addr = t.psb_st + PSB_AW'(col);
      @(negedge clk);
      host_psb_rd_en = 0;
      img[int'(t.psb_st) + col] = host_psb_rd_data;
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (!close(fp2r(host_psb_rd_data[i / 4][i % 4]), ref_t[i][col], scl_t[i][col], 2.0e-6, 1.0e-30)) begin
          failures++;
          if (failures < 10) $display("FAIL C[%0d][%0d] %g vs %g", i, col,
                                      fp2r(host_psb_rd_data[i / 4][i % 4]), ref_t[i][col]);
        end
      end
    end
  endtask

  initial begin
    tcu_cmd_t t;
    pinta_cmd_t q;
    longint c_xb, c_ya;
    cmd_valid = 0; cmd = '0; host_mem_wr_en = 0; host_mem_wr_bank = '0; host_mem_wr_addr = '0;
    host_mem_wr_data = '0; host_psb_wr_en = 0; host_psb_wr_addr = '0; host_psb_wr_data = '0;
    host_psb_rd_en = 0; host_psb_rd_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // X: batch tile bt, row block r -> A bank r, address 64*bt + kb
    for (int bt = 0; bt < BATCH / 32; bt++)
      for (int kb = 0; kb < NIN / 4; kb++)
        for (int r = 0; r < R; r++) wblk(r, 64 * bt + kb, -7);
    // B (NIN x RANK), natural blocks B[4kb.., 4c..] -> W bank c, address kb
    for (int kb = 0; kb < NIN / 4; kb++)
      for (int cc = 0; cc < RANK / 4; cc++) wblk(R + cc, kb, -10);
    // A (RANK x NOUT), natural blocks A[4kb.., 4n..]; output tile ot, column
    // block c -> W bank c, address 100 + 2*ot + kb
    for (int ot = 0; ot < NOUT / 32; ot++)
      for (int kb = 0; kb < RANK / 4; kb++)
        for (int cc = 0; cc < C; cc++) wblk(R + cc, 100 + 2 * ot + kb, -8);

    c_xb = 0; c_ya = 0;
    for (int bt = 0; bt < BATCH / 32; bt++) begin
      longint c0;
      c0 = busy_cycles;
      t = '0; t.a_addr = MEM_AW'(64 * bt); t.w_addr = 0; t.kblocks = NIN / 4;
      t.a_prec = PREC_INT8; t.w_prec = PREC_INT8; t.trans_w = 1; t.psb_st = 0;
      gemm(t, RANK);
      q = '0; q.op = OP_VPU; q.vpu.op = VOP_QUANT; q.vpu.src1 = 0; q.vpu.len = RANK / 4;
      q.vpu.q_prec = PREC_INT8; q.vpu.q_grp = 1'b0; q.vpu.q_addr = MEM_AW'(300 + 2 * bt);
      issue(q);
      c_xb += busy_cycles - c0;
      c0 = busy_cycles;
      for (int ot = 0; ot < NOUT / 32; ot++) begin
        t = '0; t.a_addr = MEM_AW'(300 + 2 * bt); t.w_addr = MEM_AW'(100 + 2 * ot);
        t.kblocks = RANK / 4; t.a_prec = PREC_INT8; t.w_prec = PREC_INT8; t.trans_w = 1;
        t.psb_st = 32;
        gemm(t, 32);
      end
      c_ya += busy_cycles - c0;
    end
    $display("PRS input contraction, batch %0d: X*B + quant %0d cycles, Tq*A %0d cycles",
             BATCH, c_xb, c_ya);
    checks++;
    if (c_xb == 0 || c_ya == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
