// fb_bit_trunc: selective bit-truncation unit of the 2D reduction path.
//
// Narrows the 42-bit subcore sum to TRUNC_W bits before the 6-way adder tree.
// The number of low bits dropped depends on the precision pair: it is the
// amount by which the largest possible subcore sum, px + pw + 3 bits for nine
// full products of one weight, exceeds TRUNC_W (3 bits for X16W16 at
// TRUNC_W = 32, none otherwise). The dropped count is reported so that the
// converter can add it to the exponent. Dropping is an arithmetic right shift
// (truncation toward minus infinity). The paper only names this unit; the rule
// is this design's.
module fb_bit_trunc
  import fb_pkg::*;
#(
  parameter int unsigned TRUNC_W = 32
) (
  input  logic signed [R2_W-1:0]    in,
  input  prec_e                     x_prec,
  input  prec_e                     w_prec,
  output logic signed [TRUNC_W-1:0] out,
  output logic [3:0]                drop
);
  int need;
  logic signed [R2_W-1:0] sh;
  always_comb begin
    need = int'(prec_bits(x_prec) + prec_bits(w_prec)) + 3;
    drop = (need > int'(TRUNC_W)) ? 4'(need - int'(TRUNC_W)) : 4'd0;
    sh   = in;
    for (int i = 0; i < 4; i++) if (drop[i]) sh = sh >>> (1 << i);
    out  = TRUNC_W'(sh);
  end
endmodule
