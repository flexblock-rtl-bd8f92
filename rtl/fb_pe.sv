// fb_pe: processing element, nine 4b x 4b multipliers and their adder tree.
//
// Multiplier i multiplies input sub-word x[i] with weight sub-word w[i]; the
// nine products are summed into a 14-bit signed result. The nine multipliers
// per PE (one per element of a 3x3 window) follow the paper. Combinational.
module fb_pe
  import fb_pkg::*;
#(
  parameter int unsigned N = N_MUL
) (
  input  logic [N-1:0][3:0]        x,
  input  logic [N-1:0][3:0]        w,
  input  logic                     x_sgn,
  input  logic                     w_sgn,
  output logic signed [PE_W-1:0]   sum
);
  logic signed [PROD_W-1:0] prod [N];

  for (genvar i = 0; i < N; i++) begin : g_mul
    fb_mult4 u_mul (.x(x[i]), .w(w[i]), .x_sgn(x_sgn), .w_sgn(w_sgn), .p(prod[i]));
  end

  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++) sum += PE_W'(prod[i]);
  end
endmodule
