// tb_onchip_mem: self-checking test of the banked on-chip operand memory at
// its full 384 KB size. Random blocks are written to random banks and
// addresses (single and multi-bank writes); the A and W read ports are
// compared with a testbench copy; the one-cycle read latency and
// read-before-write behaviour are checked.
module tb_onchip_mem;
  import pinta_pkg::*;

  localparam int R = 8, C = 8, D = 768;
  logic clk = 0;
  logic a_rd_en, w_rd_en;
  logic [MEM_AW-1:0] a_rd_addr, w_rd_addr, wr_addr;
  smx_block_t [R-1:0] a_rd_data;
  smx_block_t [C-1:0] w_rd_data;
  logic [R+C-1:0] wr_en;
  smx_block_t [R+C-1:0] wr_data;
  int checks = 0, failures = 0;

  onchip_mem dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  smx_block_t shadow [R+C][D];
  bit         valid  [R+C][D];

  function automatic smx_block_t rblk();
    smx_block_t b;
    for (int w = 0; w < 8; w++) b[32*w +: 32] = $urandom;
    return b;
  endfunction

  initial begin
    a_rd_en = 0; w_rd_en = 0; a_rd_addr = '0; w_rd_addr = '0; wr_en = '0; wr_addr = '0; wr_data = '0;
    @(negedge clk);
    // fill every word of every bank: the whole 384 KB
    for (int a = 0; a < D; a++) begin
      wr_en = '1; wr_addr = MEM_AW'(a);
      for (int b = 0; b < R + C; b++) begin
        wr_data[b] = rblk(); shadow[b][a] = wr_data[b]; valid[b][a] = 1;
      end
      @(negedge clk);
    end
    wr_en = '0;
    for (int t = 0; t < 3000; t++) begin
      int aa, wa, wb;
      logic [MEM_AW-1:0] pa, pw;
      aa = $urandom_range(D - 1); wa = $urandom_range(D - 1); wb = $urandom_range(R + C - 1);
      a_rd_en = 1; a_rd_addr = MEM_AW'(aa);
      w_rd_en = 1; w_rd_addr = MEM_AW'(wa);
      // single-bank write, sometimes to a word being read
      wr_en = '0; wr_en[wb] = 1'($urandom);
      wr_addr = ($urandom_range(3) == 0) ? ((wb < R) ? MEM_AW'(aa) : MEM_AW'(wa)) : MEM_AW'($urandom_range(D - 1));
      wr_data = '0; wr_data[wb] = rblk();
      pa = a_rd_addr; pw = w_rd_addr;
      begin
        smx_block_t exp_a [R];
        smx_block_t exp_w [C];
        for (int r = 0; r < R; r++) exp_a[r] = shadow[r][pa];
        for (int c = 0; c < C; c++) exp_w[c] = shadow[R + c][pw];
        if (wr_en[wb]) shadow[wb][wr_addr] = wr_data[wb];
        @(negedge clk);
        for (int r = 0; r < R; r++) begin
          checks++;
          if (a_rd_data[r] != exp_a[r]) begin failures++; $display("FAIL A bank %0d addr %0d", r, pa); end
        end
        for (int c = 0; c < C; c++) begin
          checks++;
          if (w_rd_data[c] != exp_w[c]) begin failures++; $display("FAIL W bank %0d addr %0d", c, pw); end
        end
      end
      // with reads disabled the outputs hold
      a_rd_en = 0; w_rd_en = 0; wr_en = '0;
      begin
        smx_block_t hold;
        hold = a_rd_data[0];
        @(negedge clk);
        checks++;
        if (a_rd_data[0] != hold) begin failures++; $display("FAIL hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
