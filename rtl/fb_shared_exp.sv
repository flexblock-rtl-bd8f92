// fb_shared_exp: shared exponent handler.
//
// Block floating point lets the core multiply mantissas as integers and apply
// the exponents once: w . x = (w^ . x^) * 2^(ew + ex). This unit forms, for
// each arithmetic converter, the signed scale exponent sc such that an integer
// partial sum S stands for S * 2^sc:
//   sc = (ex - 127 - (px - 2)) + (ew - 127 - (pw - 2)) [+ weight sub-word shift]
// 3D mode: one input block spans the whole core, so ex of subcore 0 is used;
// PU column k uses the weight exponent ew[0][k] of its output channel plus the
// sub-word shift of PU k (12/8/4/0 in W16, 4/0/4/0 in W8, 0 in W4).
// 2D mode: subcore s uses ex[s] and ew[s][0]; the weight sub-word shift is
// applied in the 2D integer adder tree instead.
// Inputs are sampled with in_valid and the outputs are registered, so they
// line up with the subcore output registers (one cycle). The exponent sum
// follows the paper (Eq. 3); the bias and offsets are this design's encoding.
module fb_shared_exp
  import fb_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  core_cfg_t                 cfg,
  input  logic [EXP_W-1:0]          ex [N_SUB],
  input  logic [EXP_W-1:0]          ew [N_SUB][N_PU],
  output logic signed [SC_W-1:0]    sc3d [N_PU],
  output logic signed [SC_W-1:0]    sc2d [N_SUB]
);
  function automatic logic signed [SC_W-1:0] base(logic [EXP_W-1:0] e_x, logic [EXP_W-1:0] e_w,
                                                 prec_e px, prec_e pw);
    return SC_W'(signed'({1'b0, e_x})) + SC_W'(signed'({1'b0, e_w}))
         - SC_W'(2 * EXP_BIAS) - SC_W'(prec_bits(px) - 2) - SC_W'(prec_bits(pw) - 2);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_PU; k++)  sc3d[k] <= '0;
      for (int s = 0; s < N_SUB; s++) sc2d[s] <= '0;
    end else if (in_valid) begin
      for (int k = 0; k < N_PU; k++)
        sc3d[k] <= base(ex[0], ew[0][k], cfg.x_prec, cfg.w_prec)
                 + SC_W'(w_shift(cfg.w_prec, k));
      for (int s = 0; s < N_SUB; s++)
        sc2d[s] <= base(ex[s], ew[s][0], cfg.x_prec, cfg.w_prec);
    end
  end
endmodule
