// tb_psum_buffer: self-checking test of the partial sum buffer at its
// default size. Random 32-float entries are written; both read ports are
// compared with a testbench copy at random addresses, including a read and a
// write of the same entry in one cycle (the old value is returned).
module tb_psum_buffer;
  import pinta_pkg::*;

  localparam int R = 8, L = 4, D = 256;
  logic clk = 0;
  logic rda_en, rdb_en, wr_en;
  logic [PSB_AW-1:0] rda_addr, rdb_addr, wr_addr;
  fp32_t [R-1:0][L-1:0] rda_data, rdb_data, wr_data;
  int checks = 0, failures = 0;

  psum_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp32_t [R-1:0][L-1:0] shadow [D];

  initial begin
    rda_en = 0; rdb_en = 0; wr_en = 0; rda_addr = '0; rdb_addr = '0; wr_addr = '0; wr_data = '0;
    @(negedge clk);
    for (int a = 0; a < D; a++) begin
      wr_en = 1; wr_addr = PSB_AW'(a);
      for (int r = 0; r < R; r++) for (int i = 0; i < L; i++) wr_data[r][i] = $urandom;
      shadow[a] = wr_data;
      @(negedge clk);
    end
    for (int t = 0; t < 5000; t++) begin
      fp32_t [R-1:0][L-1:0] ea, eb;
      rda_en = 1; rdb_en = 1;
      rda_addr = PSB_AW'($urandom_range(D - 1));
      rdb_addr = PSB_AW'($urandom_range(D - 1));
      wr_en = 1'($urandom);
      wr_addr = ($urandom_range(2) == 0) ? rda_addr : PSB_AW'($urandom_range(D - 1));
      for (int r = 0; r < R; r++) for (int i = 0; i < L; i++) wr_data[r][i] = $urandom;
      ea = shadow[rda_addr]; eb = shadow[rdb_addr];
      if (wr_en) shadow[wr_addr] = wr_data;
      @(negedge clk);
      checks += 2;
      if (rda_data != ea) begin failures++; $display("FAIL port A"); end
      if (rdb_data != eb) begin failures++; $display("FAIL port B"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
