// pinta_top: PINTA, a precision-scalable accelerator for fully quantized
// PINN training with Stein's estimator and tensor-train layers.
//
// Blocks: the Tensor Contraction Unit (tcu, 8x8 BMEs of 4x4 DPEs), the 32-way
// vector processing unit (vpu), the partial sum buffer (psum_buffer) and the
// 384 KB on-chip operand memory (onchip_mem). A small sequencer takes one
// command at a time:
//   OP_GEMM  one 32x32 output tile on the TCU, operands from on-chip memory,
//            result to the partial sum buffer (see tcu for the arithmetic);
//   OP_VPU   one vector command on the VPU, buffer to buffer, or buffer to
//            on-chip memory for QUANT (see vpu).
// A training step is a list of such commands issued by the host: the
// contractions of a TT layer in the partial-reconstruction order, the
// separately quantized X and perturbation contractions of DiffQuant, the
// activation, and the re-quantization of the next layer's inputs.
//
// Interface: cmd_valid/cmd_ready handshake (a command is taken when both are
// high); cmd_done pulses for one cycle when it completes. The host ports stand
// in for the off-chip HBM2 side, which the paper does not design: they write
// SMX blocks into memory banks and write or read partial-sum entries. Host
// accesses are meant for when the accelerator is idle; while a command runs,
// the running unit owns the buffer and memory write ports.
//
// From the paper: the four blocks and their sizes. Own choices: the command
// set, the sequencer and the host ports.
module pinta_top
  import pinta_pkg::*;
#(
  parameter int ROWS      = 8,
  parameter int COLS      = 8,
  parameter int MEM_DEPTH = 768,
  parameter int PSB_DEPTH = 256,
  localparam int NBANK    = ROWS + COLS,
  localparam int BANK_W   = $clog2(NBANK)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // command interface
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  pinta_cmd_t                    cmd,
  output logic                          cmd_done,
  // host / off-chip side: memory block writes
  input  logic                          host_mem_wr_en,
  input  logic [BANK_W-1:0]             host_mem_wr_bank,
  input  logic [MEM_AW-1:0]             host_mem_wr_addr,
  input  smx_block_t                    host_mem_wr_data,
  // host / off-chip side: partial sum buffer access
  input  logic                          host_psb_wr_en,
  input  logic [PSB_AW-1:0]             host_psb_wr_addr,
  input  fp32_t [ROWS-1:0][BLK-1:0]     host_psb_wr_data,
  input  logic                          host_psb_rd_en,
  input  logic [PSB_AW-1:0]             host_psb_rd_addr,
  output fp32_t [ROWS-1:0][BLK-1:0]     host_psb_rd_data
);

  typedef enum logic [1:0] {S_IDLE, S_TCU, S_VPU} state_e;
  state_e state;

  logic tcu_start, tcu_busy, tcu_done, vpu_start, vpu_busy, vpu_done;

  assign cmd_ready = (state == S_IDLE);
  assign tcu_start = cmd_valid && cmd_ready && (cmd.op == OP_GEMM);
  assign vpu_start = cmd_valid && cmd_ready && (cmd.op == OP_VPU);
  assign cmd_done  = tcu_done | vpu_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else case (state)
      S_IDLE:  if (tcu_start) state <= S_TCU;
               else if (vpu_start) state <= S_VPU;
      S_TCU:   if (tcu_done) state <= S_IDLE;
      S_VPU:   if (vpu_done) state <= S_IDLE;
      default: state <= S_IDLE;
    endcase
  end

  // --------------------------------------------------------------- memory
  logic                       a_rd_en, w_rd_en;
  logic [MEM_AW-1:0]          a_rd_addr, w_rd_addr;
  smx_block_t [ROWS-1:0]      a_rd_data;
  smx_block_t [COLS-1:0]      w_rd_data;
  logic [NBANK-1:0]           vpu_mem_wr_en, mem_wr_en;
  logic [MEM_AW-1:0]          vpu_mem_wr_addr, mem_wr_addr;
  smx_block_t [NBANK-1:0]     vpu_mem_wr_data, mem_wr_data;

  always_comb begin
    if (vpu_mem_wr_en != '0) begin
      mem_wr_en   = vpu_mem_wr_en;
      mem_wr_addr = vpu_mem_wr_addr;
      mem_wr_data = vpu_mem_wr_data;
    end else begin
      mem_wr_en   = '0;
      mem_wr_en[host_mem_wr_bank] = host_mem_wr_en;
      mem_wr_addr = host_mem_wr_addr;
      mem_wr_data = {NBANK{host_mem_wr_data}};
    end
  end

  onchip_mem #(.ROWS(ROWS), .COLS(COLS), .DEPTH(MEM_DEPTH)) u_mem (
    .clk       (clk),
    .a_rd_en   (a_rd_en),
    .a_rd_addr (a_rd_addr),
    .a_rd_data (a_rd_data),
    .w_rd_en   (w_rd_en),
    .w_rd_addr (w_rd_addr),
    .w_rd_data (w_rd_data),
    .wr_en     (mem_wr_en),
    .wr_addr   (mem_wr_addr),
    .wr_data   (mem_wr_data)
  );

  // ------------------------------------------------------ partial sum buffer
  logic                          tcu_rd_en, tcu_wr_en, vpu_rda_en, vpu_rdb_en, vpu_wr_en;
  logic [PSB_AW-1:0]             tcu_rd_addr, tcu_wr_addr, vpu_rda_addr, vpu_rdb_addr, vpu_wr_addr;
  fp32_t [ROWS-1:0][BLK-1:0]     tcu_wr_data, vpu_wr_data, rda_data, rdb_data;
  logic                          rda_en, wr_en;
  logic [PSB_AW-1:0]             rda_addr, wr_addr;
  fp32_t [ROWS-1:0][BLK-1:0]     wr_data;

  always_comb begin
    if (tcu_busy) begin
      rda_en = tcu_rd_en;  rda_addr = tcu_rd_addr;
      wr_en  = tcu_wr_en;  wr_addr  = tcu_wr_addr;  wr_data = tcu_wr_data;
    end else if (vpu_busy) begin
      rda_en = vpu_rda_en; rda_addr = vpu_rda_addr;
      wr_en  = vpu_wr_en;  wr_addr  = vpu_wr_addr;  wr_data = vpu_wr_data;
    end else begin
      rda_en = host_psb_rd_en; rda_addr = host_psb_rd_addr;
      wr_en  = host_psb_wr_en; wr_addr  = host_psb_wr_addr; wr_data = host_psb_wr_data;
    end
  end

  assign host_psb_rd_data = rda_data;

  psum_buffer #(.ROWS(ROWS), .LANES(BLK), .DEPTH(PSB_DEPTH)) u_psb (
    .clk      (clk),
    .rda_en   (rda_en),
    .rda_addr (rda_addr),
    .rda_data (rda_data),
    .rdb_en   (vpu_rdb_en),
    .rdb_addr (vpu_rdb_addr),
    .rdb_data (rdb_data),
    .wr_en    (wr_en),
    .wr_addr  (wr_addr),
    .wr_data  (wr_data)
  );

  // -------------------------------------------------------------------- TCU
  logic beat_issued;
  tcu #(.ROWS(ROWS), .COLS(COLS)) u_tcu (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (tcu_start),
    .cmd         (cmd.tcu),
    .busy        (tcu_busy),
    .done        (tcu_done),
    .a_rd_en     (a_rd_en),
    .a_rd_addr   (a_rd_addr),
    .a_rd_data   (a_rd_data),
    .w_rd_en     (w_rd_en),
    .w_rd_addr   (w_rd_addr),
    .w_rd_data   (w_rd_data),
    .psb_rd_en   (tcu_rd_en),
    .psb_rd_addr (tcu_rd_addr),
    .psb_rd_data (rda_data),
    .psb_wr_en   (tcu_wr_en),
    .psb_wr_addr (tcu_wr_addr),
    .psb_wr_data (tcu_wr_data),
    .beat_issued (beat_issued)
  );

  // -------------------------------------------------------------------- VPU
  vpu #(.ROWS(ROWS), .COLS(COLS), .LANES(BLK)) u_vpu (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (vpu_start),
    .cmd         (cmd.vpu),
    .busy        (vpu_busy),
    .done        (vpu_done),
    .rda_en      (vpu_rda_en),
    .rda_addr    (vpu_rda_addr),
    .rda_data    (rda_data),
    .rdb_en      (vpu_rdb_en),
    .rdb_addr    (vpu_rdb_addr),
    .rdb_data    (rdb_data),
    .wr_en       (vpu_wr_en),
    .wr_addr     (vpu_wr_addr),
    .wr_data     (vpu_wr_data),
    .mem_wr_en   (vpu_mem_wr_en),
    .mem_wr_addr (vpu_mem_wr_addr),
    .mem_wr_data (vpu_mem_wr_data)
  );

  assert property (@(posedge clk) disable iff (!rst_n)
                   host_mem_wr_en |-> vpu_mem_wr_en == '0)
    else $error("pinta_top: host memory write while the VPU writes");

endmodule
