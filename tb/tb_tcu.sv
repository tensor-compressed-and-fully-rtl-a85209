// tb_tcu: self-checking test of the Tensor Contraction Unit on a reduced
// 2x3 BME array (8x12 output tile) with the on-chip memory and partial sum
// buffer. Random SMX operand blocks are written to the banks; tiles are
// computed for INT8xINT8, INT12xINT4 with both operands transposed and a
// partial-sum reload, and INT4xINT4; the tiles read back from the buffer are
// compared with a real-number model, and the number of compute beats and the
// command latency are checked against the bit-serial schedule.
module tb_tcu;
  import pinta_pkg::*;
  import tb_util_pkg::*;

  localparam int R = 2, C = 3, CHAIN = 4 * C;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, beat_issued;
  tcu_cmd_t cmd;
  logic a_rd_en, w_rd_en;
  logic [MEM_AW-1:0] a_rd_addr, w_rd_addr;
  smx_block_t [R-1:0] a_rd_data;
  smx_block_t [C-1:0] w_rd_data;
  logic psb_rd_en, psb_wr_en, t_wr_en, h_rd_en;
  logic [PSB_AW-1:0] psb_rd_addr, psb_wr_addr, t_wr_addr, h_rd_addr;
  fp32_t [R-1:0][3:0] psb_rd_data, psb_wr_data, t_wr_data, rdb_data;
  logic [R+C-1:0] mwr_en;
  logic [MEM_AW-1:0] mwr_addr;
  smx_block_t [R+C-1:0] mwr_data;
  int checks = 0, failures = 0;

  tcu #(.ROWS(R), .COLS(C)) dut (.*);
  onchip_mem #(.ROWS(R), .COLS(C), .DEPTH(64)) u_mem (
    .clk(clk), .a_rd_en(a_rd_en), .a_rd_addr(a_rd_addr), .a_rd_data(a_rd_data),
    .w_rd_en(w_rd_en), .w_rd_addr(w_rd_addr), .w_rd_data(w_rd_data),
    .wr_en(mwr_en), .wr_addr(mwr_addr), .wr_data(mwr_data));
  psum_buffer #(.ROWS(R), .LANES(4), .DEPTH(64)) u_psb (
    .clk(clk),
    .rda_en(busy ? psb_rd_en : h_rd_en), .rda_addr(busy ? psb_rd_addr : h_rd_addr),
    .rda_data(psb_rd_data),
    .rdb_en(1'b0), .rdb_addr('0), .rdb_data(rdb_data),
    .wr_en(busy ? psb_wr_en : t_wr_en), .wr_addr(busy ? psb_wr_addr : t_wr_addr),
    .wr_data(busy ? psb_wr_data : t_wr_data));

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  smx_block_t shadow [R+C][64];
  real ref_t [4*R][CHAIN];
  real scl_t [4*R][CHAIN];
  int  beats;
  always @(posedge clk) if (beat_issued) beats++;

  task automatic fill(int bank, int addr, int p);
    smx_block_t b;
    int nb;
    nb = 4 * (p + 1);
    b = '0;
    b.exp = 8'($urandom_range(12) - 6);
    for (int e = 0; e < 16; e++) b.m[e] = 12'(int'($urandom_range((1 << nb) - 1)) - (1 << (nb - 1)));
    shadow[bank][addr] = b;
    mwr_en = '0; mwr_en[bank] = 1'b1; mwr_addr = MEM_AW'(addr); mwr_data = '0; mwr_data[bank] = b;
    @(negedge clk);
    mwr_en = '0;
  endtask

  task automatic ref_gemm(tcu_cmd_t c2);
    for (int r = 0; r < R; r++)
      for (int cc = 0; cc < C; cc++)
        for (int kb = 0; kb < int'(c2.kblocks); kb++) begin
          smx_block_t ab, wb;
          ab = shadow[r][int'(c2.a_addr) + kb];
          wb = shadow[R + cc][int'(c2.w_addr) + kb];
          for (int i = 0; i < 4; i++)
            for (int j = 0; j < 4; j++)
              for (int k = 0; k < 4; k++) begin
                int x, y; real t;
                x = elem_val(c2.trans_a ? ab.m[4*k+i] : ab.m[4*i+k], int'(c2.a_prec));
                y = elem_val(c2.trans_w ? wb.m[4*k+j] : wb.m[4*j+k], int'(c2.w_prec));
                t = real'(x * y) * pow2(int'(ab.exp) + int'(wb.exp));
                ref_t[4*r+i][4*cc+j] += t;
                scl_t[4*r+i][4*cc+j] += rabs(t);
              end
        end
  endtask

  task automatic run(tcu_cmd_t c2, int exp_beats);
    int cyc, exp_cyc;
    beats = 0;
    cmd = c2; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    exp_cyc = (c2.acc_load ? CHAIN + 1 : 0) + exp_beats + 1 + R + C + CHAIN + 1;
    checks++;
    if (beats != exp_beats) begin failures++; $display("FAIL beats %0d != %0d", beats, exp_beats); end
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL latency %0d != %0d", cyc, exp_cyc); end
    // read back the tile
    for (int col = 0; col < CHAIN; col++) begin
      h_rd_en = 1; h_rd_addr = c2.psb_st + PSB_AW'(col);
      @(negedge clk);
      h_rd_en = 0;
      for (int r = 0; r < R; r++)
        for (int i = 0; i < 4; i++) begin
          checks++;
          if (!close(fp2r(psb_rd_data[r][i]), ref_t[4*r+i][col], scl_t[4*r+i][col], 2.0e-6, 1.0e-30)) begin
            failures++;
            $display("FAIL C[%0d][%0d] got %g exp %g", 4*r+i, col, fp2r(psb_rd_data[r][i]),
                     ref_t[4*r+i][col]);
          end
        end
    end
  endtask

  initial begin
    tcu_cmd_t c2;
    start = 0; cmd = '0; mwr_en = '0; mwr_addr = '0; mwr_data = '0;
    t_wr_en = 0; t_wr_addr = '0; t_wr_data = '0; h_rd_en = 0; h_rd_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1: INT8 x INT8, 3 block steps
    for (int kb = 0; kb < 3; kb++) begin
      for (int r = 0; r < R; r++) fill(r, kb, 1);
      for (int cc = 0; cc < C; cc++) fill(R + cc, kb, 1);
    end
    foreach (ref_t[i, j]) begin ref_t[i][j] = 0.0; scl_t[i][j] = 0.0; end
    c2 = '0; c2.a_addr = 0; c2.w_addr = 0; c2.kblocks = 3;
    c2.a_prec = PREC_INT8; c2.w_prec = PREC_INT8; c2.psb_st = 0;
    ref_gemm(c2);
    run(c2, 12);
    // 2: INT12 x INT4, transposed, continue from tile 0 into tile at CHAIN
    for (int kb = 0; kb < 2; kb++) begin
      for (int r = 0; r < R; r++) fill(r, 10 + kb, 2);
      for (int cc = 0; cc < C; cc++) fill(R + cc, 20 + kb, 0);
    end
    c2 = '0; c2.a_addr = 10; c2.w_addr = 20; c2.kblocks = 2;
    c2.a_prec = PREC_INT12; c2.w_prec = PREC_INT4; c2.trans_a = 1; c2.trans_w = 1;
    c2.acc_load = 1; c2.psb_ld = 0; c2.psb_st = PSB_AW'(CHAIN);
    ref_gemm(c2);
    run(c2, 6);
    // 3: INT4 x INT4 from zero, one beat per block step
    for (int kb = 0; kb < 2; kb++) begin
      for (int r = 0; r < R; r++) fill(r, 30 + kb, 0);
      for (int cc = 0; cc < C; cc++) fill(R + cc, 30 + kb, 0);
    end
    foreach (ref_t[i, j]) begin ref_t[i][j] = 0.0; scl_t[i][j] = 0.0; end
    c2 = '0; c2.a_addr = 30; c2.w_addr = 30; c2.kblocks = 2; c2.trans_w = 1;
    c2.a_prec = PREC_INT4; c2.w_prec = PREC_INT4; c2.psb_st = PSB_AW'(2 * CHAIN);
    ref_gemm(c2);
    run(c2, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
