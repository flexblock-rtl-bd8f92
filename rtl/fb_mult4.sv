// fb_mult4: 4b x 4b sub-word multiplier of FlexBlock.
//
// Each operand is a 4-bit sub-word. A sub-word flagged as signed is the top
// sub-word of a signed element and is sign-extended to 5 bits; any other
// sub-word is zero-extended. The 5b x 5b signed product is 10 bits wide.
// Purely combinational. That one multiplier serves signed and unsigned
// operands follows the paper; the 5-bit extension scheme is the usual way to
// build it and is this design's choice.
module fb_mult4 (
  input  logic [3:0]        x,
  input  logic [3:0]        w,
  input  logic              x_sgn,
  input  logic              w_sgn,
  output logic signed [9:0] p
);
  logic signed [4:0] xe, we;
  always_comb begin
    xe = {x_sgn & x[3], x};
    we = {w_sgn & w[3], w};
    p  = 10'(xe * we);
  end
endmodule
