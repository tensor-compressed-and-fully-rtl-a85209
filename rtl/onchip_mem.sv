// onchip_mem: PINTA on-chip operand memory, 384 KB of SMX blocks.
//
// The memory is split into ROWS "A" banks, bank r feeding row r of the TCU
// array, and COLS "W" banks, bank c feeding column c. All A banks are read
// at the same address in a cycle, and likewise all W banks, so one TCU beat
// gets ROWS + COLS blocks at once. Each word is one SMX block (256 bits:
// 16 x 12-bit elements, 8-bit shared exponent, padding). With the default
// 16 banks x 768 words x 32 bytes the capacity is 393,216 bytes = 384 KB,
// the paper's figure.
//
// Writes: per-bank enables with one shared address, so the vector unit can
// store a row of ROWS blocks in one cycle and the host one block. Reads have
// one cycle latency (registered output, like an SRAM macro). A read and a
// write to the same word in one cycle return the old word.
//
// From the paper: the 384 KB capacity and that memory banks feed the array.
// Own choices: bank count and split, word format, port structure. The paper
// models its SRAM with a memory compiler; here it is a plain array.
module onchip_mem
  import pinta_pkg::*;
#(
  parameter int ROWS  = 8,
  parameter int COLS  = 8,
  parameter int DEPTH = 768
) (
  input  logic                          clk,
  input  logic                          a_rd_en,
  input  logic [MEM_AW-1:0]             a_rd_addr,
  output smx_block_t [ROWS-1:0]         a_rd_data,
  input  logic                          w_rd_en,
  input  logic [MEM_AW-1:0]             w_rd_addr,
  output smx_block_t [COLS-1:0]         w_rd_data,
  input  logic [ROWS+COLS-1:0]          wr_en,     // bank r: A bank r, ROWS+c: W bank c
  input  logic [MEM_AW-1:0]             wr_addr,
  input  smx_block_t [ROWS+COLS-1:0]    wr_data
);

  for (genvar b = 0; b < ROWS + COLS; b++) begin : g_bank
    smx_block_t mem [DEPTH];
    logic       rd_en;
    logic [MEM_AW-1:0] rd_addr;
    smx_block_t rd_q;
    if (b < ROWS) begin : g_a
      assign rd_en   = a_rd_en;
      assign rd_addr = a_rd_addr;
      assign a_rd_data[b] = rd_q;
    end else begin : g_w
      assign rd_en   = w_rd_en;
      assign rd_addr = w_rd_addr;
      assign w_rd_data[b-ROWS] = rd_q;
    end
    always_ff @(posedge clk) begin
      if (wr_en[b] && int'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data[b];
      if (rd_en) rd_q <= (int'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
    end
  end

  initial assert (DEPTH <= 2 ** MEM_AW) else $error("onchip_mem: DEPTH too large");

endmodule
