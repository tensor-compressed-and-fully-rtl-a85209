// dpe: Dot-Product Engine, the leaf of the PINTA tensor contraction unit.
//
// Per accumulate beat (en=1) the DPE multiplies four 4-bit slices of an
// activation row a[0:3] with four 4-bit slices of a weight row w[0:3], adds
// the four products in a two-level adder tree, turns the integer sum into a
// floating-point number with exponent e_o in the FP generator, and adds it to
// its accumulator. e_o = Ea + Ew + 4*(sa + sw) is prepared by the enclosing
// BME: the paper's shared exponent Eo = Ew + Ea plus the weight of the slices,
// which is how operands wider than 4 bits are accumulated bit-serially (an
// INT8 x INT8 dot product takes four beats, one per slice pair).
//
// The accumulator input mux (drawn in the paper's DPE diagram) chooses between
// the accumulator's own feedback and psum_in, the value of the neighbouring
// DPE to the west; with shift_en=1 the DPE takes psum_in. The DPEs of a row
// form a shift chain that loads initial partial sums and drains results.
// If en and shift_en are both high the DPE loads psum_in plus the product.
//
// Follows the paper: four INT4xINT4 multipliers, adder tree, FP generator fed
// by Eo, accumulator with an input mux. Own choices: a slice may be signed
// (top slice) or unsigned (lower slices), selected by a_signed/w_signed; the
// float format is FP32 with truncation; everything is one cycle, result
// registered. Reset clears the accumulator.
module dpe
  import pinta_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,        // accumulate one beat
  input  logic [BLK-1:0][NIB_W-1:0]   a_nib,     // activation slices, k = 0..3
  input  logic [BLK-1:0][NIB_W-1:0]   w_nib,     // weight slices, k = 0..3
  input  logic                        a_signed,  // a slices are two's complement
  input  logic                        w_signed,  // w slices are two's complement
  input  logic signed [11:0]          e_o,       // exponent of this beat's sum
  input  logic                        shift_en,  // take psum_in (chain shift)
  input  fp32_t                       psum_in,   // from the west neighbour
  output fp32_t                       acc        // accumulator
);

  logic signed [4:0]  a_ext [BLK];
  logic signed [4:0]  w_ext [BLK];
  logic signed [9:0]  prod  [BLK];
  logic signed [10:0] sum01, sum23;
  logic signed [11:0] dot;
  fp32_t              fp_gen, mux_out, addend;

  always_comb begin
    for (int k = 0; k < BLK; k++) begin
      a_ext[k] = {a_signed & a_nib[k][NIB_W-1], a_nib[k]};
      w_ext[k] = {w_signed & w_nib[k][NIB_W-1], w_nib[k]};
      prod[k]  = a_ext[k] * w_ext[k];
    end
    sum01   = 11'(prod[0]) + 11'(prod[1]);
    sum23   = 11'(prod[2]) + 11'(prod[3]);
    dot     = 12'(sum01) + 12'(sum23);
    fp_gen  = fp_from_int(32'(dot), int'(e_o));
    mux_out = shift_en ? psum_in : acc;
    addend  = en ? fp_gen : 32'h0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              acc <= 32'h0;
    else if (en || shift_en) acc <= fp_add(mux_out, addend);
  end

endmodule
