// psum_buffer: PINTA partial sum buffer, FP32 storage beside the TCU rows.
//
// ROWS banks, one per array row, each word LANES FP32 values (one value per
// DPE row of a BME). An address selects the same entry in all banks, so one
// access moves ROWS*LANES = 32 floats, the width of the vector unit and of
// one drain step of the TCU. Entry base+col of bank r holds output rows
// 4r..4r+3 of column col of a 32x32 tile.
//
// Two read ports (A: TCU initial sums, VPU first operand, host; B: VPU
// second operand) and one write port (TCU drain, VPU result, host). Reads
// have one cycle latency; a read of a word written in the same cycle returns
// the old value. Like an SRAM the storage is not reset; only written
// entries hold defined data.
//
// From the paper: a partial sum buffer connected to the array rows. Its size
// is not given; DEPTH = 256 (8 tiles of 32x32 FP32, 32 KB) is this design's
// choice, as are the ports.
module psum_buffer
  import pinta_pkg::*;
#(
  parameter int ROWS  = 8,
  parameter int LANES = 4,
  parameter int DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          rda_en,
  input  logic [PSB_AW-1:0]             rda_addr,
  output fp32_t [ROWS-1:0][LANES-1:0]   rda_data,
  input  logic                          rdb_en,
  input  logic [PSB_AW-1:0]             rdb_addr,
  output fp32_t [ROWS-1:0][LANES-1:0]   rdb_data,
  input  logic                          wr_en,
  input  logic [PSB_AW-1:0]             wr_addr,
  input  fp32_t [ROWS-1:0][LANES-1:0]   wr_data
);

  fp32_t [ROWS-1:0][LANES-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data;
    if (rda_en) rda_data <= (int'(rda_addr) < DEPTH) ? mem[rda_addr] : '0;
    if (rdb_en) rdb_data <= (int'(rdb_addr) < DEPTH) ? mem[rdb_addr] : '0;
  end

  initial assert (DEPTH <= 2 ** PSB_AW) else $error("psum_buffer: DEPTH too large");

endmodule
