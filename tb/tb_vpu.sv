// tb_vpu: self-checking test of the 32-way vector processing unit with a
// partial sum buffer. Random FP32 entries are loaded; ADD, SUB, MUL and TANH
// results are compared with real-number references (tanh against the
// library tanh with the approximation's error bound), and QUANT output blocks
// are compared with an SMX quantizer written here from the formula
// shared_exp = floor(log2 max|x|) - emax, q = round(x / 2^shared_exp).
// Command latencies (done len+2 cycles after start, 6*len+1 for QUANT) are checked too.
module tb_vpu;
  import pinta_pkg::*;
  import tb_util_pkg::*;

  localparam int R = 8, C = 8;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  vpu_cmd_t cmd;
  logic rda_en, rdb_en, wr_en, v_rda_en, v_wr_en, h_rd_en, h_wr_en;
  logic [PSB_AW-1:0] rda_addr, rdb_addr, wr_addr, v_rda_addr, v_wr_addr, h_rd_addr, h_wr_addr;
  fp32_t [R-1:0][3:0] rda_data, rdb_data, wr_data, v_wr_data, h_wr_data;
  logic [R+C-1:0] mem_wr_en;
  logic [MEM_AW-1:0] mem_wr_addr;
  smx_block_t [R+C-1:0] mem_wr_data;
  int checks = 0, failures = 0;
  int counts [5];

  vpu dut (
    .clk, .rst_n, .start, .cmd, .busy, .done,
    .rda_en(v_rda_en), .rda_addr(v_rda_addr), .rda_data,
    .rdb_en, .rdb_addr, .rdb_data,
    .wr_en(v_wr_en), .wr_addr(v_wr_addr), .wr_data(v_wr_data),
    .mem_wr_en, .mem_wr_addr, .mem_wr_data);
  psum_buffer #(.ROWS(R), .LANES(4), .DEPTH(256)) u_psb (
    .clk, .rda_en, .rda_addr, .rda_data, .rdb_en, .rdb_addr, .rdb_data,
    .wr_en, .wr_addr, .wr_data);
  assign rda_en   = busy ? v_rda_en   : h_rd_en;
  assign rda_addr = busy ? v_rda_addr : h_rd_addr;
  assign wr_en    = busy ? v_wr_en    : h_wr_en;
  assign wr_addr  = busy ? v_wr_addr  : h_wr_addr;
  assign wr_data  = busy ? v_wr_data  : h_wr_data;

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp32_t [R-1:0][3:0] img [256];   // testbench copy of the buffer
  smx_block_t memw [R+C][64];
  always @(posedge clk)
    for (int b = 0; b < R + C; b++) if (mem_wr_en[b]) memw[b][mem_wr_addr] = mem_wr_data[b];

  task automatic put(int a, fp32_t [R-1:0][3:0] d);
    img[a] = d; h_wr_en = 1; h_wr_addr = PSB_AW'(a); h_wr_data = d;
    @(negedge clk);
    h_wr_en = 0;
  endtask

  task automatic get(int a, output fp32_t [R-1:0][3:0] d);
    h_rd_en = 1; h_rd_addr = PSB_AW'(a);
    @(negedge clk);
    h_rd_en = 0; d = rda_data;
  endtask

  task automatic go(vpu_cmd_t c2, int exp_cyc);
    int cyc;
    cmd = c2; start = 1;
    @(negedge clk);
    start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL latency op %0d: %0d != %0d", c2.op, cyc, exp_cyc); end
  endtask

  function automatic int ref_q(real x, int se, int p);
    real v; int q, qmax;
    qmax = (1 << (4 * (p + 1) - 1)) - 1;
    v = rabs(x) / pow2(se);
    q = int'($floor(v + 0.5));
    if (q > qmax) q = qmax;
    return (x < 0.0) ? -q : q;
  endfunction

  initial begin
    vpu_cmd_t c2;
    fp32_t [R-1:0][3:0] d, o1, o2;
    start = 0; cmd = '0; h_rd_en = 0; h_wr_en = 0; h_rd_addr = '0; h_wr_addr = '0; h_wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // sources: entries 0..15 (src1) and 16..31 (src2)
    for (int a = 0; a < 32; a++) begin
      for (int r = 0; r < R; r++) for (int i = 0; i < 4; i++)
        d[r][i] = (a == 3 && i == 0) ? 32'h0 :
                  (a == 4 && i == 1) ? rand_fp(-14, -10) :
                  (a == 5 && i == 2) ? rand_fp(2, 3) : rand_fp(-3, 1);
      put(a, d);
    end
    for (int op = 0; op < 4; op++) begin
      c2 = '0; c2.op = vop_e'(op); c2.src1 = 0; c2.src2 = 16; c2.dst = PSB_AW'(64 + 16 * op); c2.len = 16;
      go(c2, 18);
      for (int n = 0; n < 16; n++) begin
        get(64 + 16 * op + n, o1);
        for (int r = 0; r < R; r++) for (int i = 0; i < 4; i++) begin
          real x, y, g, e, sc, tol;
          x = fp2r(img[n][r][i]); y = fp2r(img[16 + n][r][i]); g = fp2r(o1[r][i]);
          case (op)
            0: begin e = x + y; sc = rabs(x) + rabs(y); tol = 0.0; end
            1: begin e = x - y; sc = rabs(x) + rabs(y); tol = 0.0; end
            2: begin e = x * y; sc = rabs(e); tol = 0.0; end
            default: begin e = $tanh(x); sc = 0.0; tol = 1.6e-3; end
          endcase
          checks++;
          if (!close(g, e, sc, 3.0e-7, tol + 1.0e-30)) begin
            failures++; $display("FAIL op %0d n %0d lane %0d/%0d: %g vs %g (x=%g)", op, n, r, i, g, e, x);
          end else counts[op]++;
        end
      end
    end
    // QUANT: 4 groups from entries 0..15, INT8 to A banks; then INT12 to W banks
    for (int p = 1; p <= 2; p++) begin
      c2 = '0; c2.op = VOP_QUANT; c2.src1 = 0; c2.len = 4; c2.q_prec = prec_e'(p);
      c2.q_grp = (p == 2); c2.q_addr = 8;
      go(c2, 4 * 6 + 1);
      for (int g = 0; g < 4; g++)
        for (int r = 0; r < R; r++) begin
          smx_block_t b;
          real mx; int se;
          b = memw[(p == 2) ? R + r : r][8 + g];
          mx = 0.0;
          for (int e = 0; e < 16; e++) if (rabs(fp2r(img[4*g + e % 4][r][e / 4])) > mx)
            mx = rabs(fp2r(img[4*g + e % 4][r][e / 4]));
          se = int'($floor($ln(mx) / $ln(2.0))) - (4 * (p + 1) - 2);
          checks++;
          if (int'(b.exp) != se) begin failures++; $display("FAIL qexp g%0d r%0d %0d vs %0d", g, r, b.exp, se); end
          for (int e = 0; e < 16; e++) begin
            int qe;
            qe = ref_q(fp2r(img[4*g + e % 4][r][e / 4]), se, p);
            checks++;
            if (elem_val(b.m[e], p) != qe) begin
              failures++; $display("FAIL q g%0d r%0d e%0d: %0d vs %0d", g, r, e, elem_val(b.m[e], p), qe);
            end else counts[4]++;
          end
        end
    end
    for (int op = 0; op < 5; op++) begin
      checks++;
      if (counts[op] == 0) begin failures++; $display("FAIL op %0d never passed", op); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
