// fb_red3d: reduction unit for 3D operations (Conv, pointwise Conv, FC).
//
// For each PU column k a 6-way integer adder tree sums PU k of all six
// subcores (all subcores work on input channels or kernel rows of the same
// output block). The sum is converted to FP32 with the column's scale exponent
// (which already contains the weight sub-word shift of PU k) and added in FP32
// to a partial sum: the column accumulator, or on acc_first (start of a new
// output) psum_in[o] of the output o the column belongs to, given only to the
// group's top column so that a stored partial result is added once. The
// accumulators then feed the selective 4-way FP32 adder tree:
//   W16: out[0] = c3 + c2 + c1 + c0                (one output channel)
//   W8 : out[0] = c3 + c2 (C_out = k), out[1] = c1 + c0 (C_out = k+1)
//   W4 : out[3:0] = c0..c3 bypass the tree (four output channels)
// n_out gives the number of valid outputs (1, 2 or 4). The accumulators are
// updated on in_valid; out is combinational from the accumulators, so a result
// is available the cycle after the last accumulated step. The structure follows
// the paper's figure; the psum selection and output ordering are this design's.
module fb_red3d
  import fb_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     acc_first,
  input  prec_e                    w_prec,
  input  logic signed [PU_W-1:0]   pu_in [N_SUB][N_PU],
  input  logic signed [SC_W-1:0]   sc    [N_PU],
  input  logic [31:0]              psum_in [N_PU],
  output logic [31:0]              out   [N_PU],
  output logic [2:0]               n_out
);
  logic signed [R3_W-1:0] colsum [N_PU];
  logic [31:0]            colfp  [N_PU];
  logic [31:0]            addin  [N_PU];
  logic [31:0]            addout [N_PU];
  logic [31:0]            acc    [N_PU];
  logic [31:0]            s32, s10, s3210;

  // psum_in[o] is a stored partial result of output o: it enters the first
  // column of that output's group (W16: c3; W8: c3 and c1; W4: every column)
  // so that it is added exactly once
  logic [31:0]            ps_col [N_PU];
  always_comb begin
    for (int k = 0; k < N_PU; k++) ps_col[k] = '0;
    case (w_prec)
      PREC16:  ps_col[3] = psum_in[0];
      PREC8:   begin ps_col[3] = psum_in[0]; ps_col[1] = psum_in[1]; end
      default: for (int k = 0; k < N_PU; k++) ps_col[k] = psum_in[k];
    endcase
  end

  always_comb begin
    for (int k = 0; k < N_PU; k++) begin
      colsum[k] = '0;
      for (int s = 0; s < N_SUB; s++) colsum[k] += R3_W'(pu_in[s][k]);
      addin[k] = acc_first ? ps_col[k] : acc[k];
    end
  end

  for (genvar k = 0; k < N_PU; k++) begin : g_col
    fb_int2fp #(.IN_W(R3_W)) u_cvt (.in(colsum[k]), .sc(sc[k]), .out(colfp[k]));
    fb_fp32_add u_acc (.a(colfp[k]), .b(addin[k]), .s(addout[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int k = 0; k < N_PU; k++) acc[k] <= '0;
    else if (in_valid) for (int k = 0; k < N_PU; k++) acc[k] <= addout[k];
  end

  // selective 4-way FP32 adder tree
  fb_fp32_add u_t32 (.a(acc[3]), .b(acc[2]), .s(s32));
  fb_fp32_add u_t10 (.a(acc[1]), .b(acc[0]), .s(s10));
  fb_fp32_add u_tall (.a(s32), .b(s10), .s(s3210));

  always_comb begin
    case (w_prec)
      PREC16: begin
        out[0] = s3210; out[1] = '0; out[2] = '0; out[3] = '0; n_out = 3'd1;
      end
      PREC8: begin
        out[0] = s32; out[1] = s10; out[2] = '0; out[3] = '0; n_out = 3'd2;
      end
      default: begin
        for (int k = 0; k < N_PU; k++) out[k] = acc[k];
        n_out = 3'd4;
      end
    endcase
  end
endmodule
