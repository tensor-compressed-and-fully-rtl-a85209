// bme: Block Matrix computation Engine, one node of the TCU systolic array.
//
// A BME holds a 4x4 array of DPEs and computes, per beat, the product of one
// 4x4 activation slice plane and one 4x4 weight slice plane under a single
// shared exponent: DPE(i,j) accumulates sum_k A'[i][k] * W'[j][k], i.e. a
// 4x4x4 = 64 MAC block of C += A' * W'^T. A' is the activation block or, when
// the beat's trans flag is set, its transpose; likewise W'. Because SMX blocks
// are square with one exponent, transposing is only a change of wiring and no
// transposed copy of a tensor is needed.
//
// The shared exponents are added once per BME, Eo = Ea + Ew, and the slice
// weights 4*(sa+sw) are added to it; all 16 DPEs get the same e_o.
//
// Interface and timing: a_in arrives from the west and w_in from the north;
// both are registered and passed on to a_out (east) and w_out (south) one
// cycle later, giving the systolic flow. A beat is accumulated in the cycle
// both inputs are valid (the TCU skews its feeds so they meet). psum_in[i]
// enters the shift chain of DPE row i at column 0; psum_out[i] is the
// accumulator of DPE(i,3). shift_en shifts all chains one DPE eastward.
//
// From the paper: 4x4 DPEs, shared-exponent adder, 64 MACs per beat, the
// Activation[0:3][0:3] and Weight[0:3][0:3] block inputs. Own choices: the
// transposition flag, the operand forwarding registers and the shift chain.
module bme
  import pinta_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  beat_t                a_in,
  input  beat_t                w_in,
  output beat_t                a_out,
  output beat_t                w_out,
  input  logic                 shift_en,
  input  fp32_t [BLK-1:0]      psum_in,
  output fp32_t [BLK-1:0]      psum_out,
  output fp32_t [BLK-1:0][BLK-1:0] acc
);

  logic               fire;
  logic signed [11:0] e_o;
  logic [BLK-1:0][BLK-1:0][BLK-1:0][NIB_W-1:0] a_row; // [i][j][k]
  logic [BLK-1:0][BLK-1:0][BLK-1:0][NIB_W-1:0] w_row; // [i][j][k]

  assign fire = a_in.valid & w_in.valid;
  assign e_o  = 12'(a_in.exp) + 12'(w_in.exp)
              + 12'(4 * (int'(a_in.slice) + int'(w_in.slice)));

  always_comb begin
    for (int i = 0; i < BLK; i++)
      for (int j = 0; j < BLK; j++)
        for (int k = 0; k < BLK; k++) begin
          a_row[i][j][k] = a_in.trans ? a_in.nib[BLK*k+i] : a_in.nib[BLK*i+k];
          w_row[i][j][k] = w_in.trans ? w_in.nib[BLK*k+j] : w_in.nib[BLK*j+k];
        end
  end

  for (genvar i = 0; i < BLK; i++) begin : g_row
    for (genvar j = 0; j < BLK; j++) begin : g_col
      dpe u_dpe (
        .clk      (clk),
        .rst_n    (rst_n),
        .en       (fire),
        .a_nib    (a_row[i][j]),
        .w_nib    (w_row[i][j]),
        .a_signed (a_in.top),
        .w_signed (w_in.top),
        .e_o      (e_o),
        .shift_en (shift_en),
        .psum_in  ((j == 0) ? psum_in[i] : acc[i][(j == 0) ? 0 : j-1]),
        .acc      (acc[i][j])
      );
    end
    assign psum_out[i] = acc[i][BLK-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      w_out <= '0;
    end else begin
      a_out <= a_in;
      w_out <= w_in;
    end
  end

  // Operands of one beat must arrive together.
  assert property (@(posedge clk) disable iff (!rst_n) a_in.valid == w_in.valid)
    else $error("bme: activation and weight beats misaligned");

endmodule
