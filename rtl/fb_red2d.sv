// fb_red2d: reduction unit for 2D operations (depthwise Conv, weight gradients).
//
// In 2D mode every subcore (or cluster of subcores) produces its own output
// channel, so PU outputs move "horizontally" out of each subcore:
//   1. a 4-way integer adder tree per subcore sums its four PUs, each shifted by
//      the weight sub-word weight (12/8/4/0 in W16);
//   2. a selective bit-truncation unit narrows the sum to TRUNC_W bits;
//   3. a selective 6-way integer adder tree groups subcores by `cluster`:
//        CL1: six outputs (DW Conv3, one subcore each),
//        CL3: two outputs, subcores 0-2 and 3-5 (DW Conv5),
//        CL6: one output, all six subcores (DW Conv7);
//   4. six arithmetic converters (scale exponent of the group's first subcore
//      plus the truncated bit count) and six FP32 adders accumulating against
//      their own accumulator or psum_in (when acc_first).
// n_out is 6, 2 or 1. Accumulators update on in_valid; out shows them. The
// chain of blocks follows the paper; widths and cluster placement are this
// design's.
module fb_red2d
  import fb_pkg::*;
#(
  parameter int unsigned TRUNC_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     acc_first,
  input  prec_e                    x_prec,
  input  prec_e                    w_prec,
  input  cluster_e                 cluster,
  input  logic signed [PU_W-1:0]   pu_in [N_SUB][N_PU],
  input  logic signed [SC_W-1:0]   sc    [N_SUB],
  input  logic [31:0]              psum_in [N_SUB],
  output logic [31:0]              out   [N_SUB],
  output logic [2:0]               n_out
);
  localparam int unsigned G_W = TRUNC_W + 3;

  logic signed [R2_W-1:0]    t4   [N_SUB];
  logic signed [TRUNC_W-1:0] tr   [N_SUB];
  logic [3:0]                drop [N_SUB];
  logic signed [G_W-1:0]     grp  [N_SUB];
  logic signed [SC_W-1:0]    gsc  [N_SUB];
  logic [31:0]               gfp  [N_SUB];
  logic [31:0]               addin[N_SUB];
  logic [31:0]               addout[N_SUB];
  logic [31:0]               acc  [N_SUB];

  always_comb begin
    for (int s = 0; s < N_SUB; s++) begin
      t4[s] = '0;
      for (int k = 0; k < N_PU; k++)
        case (w_prec)                          // constant shift per PU
          PREC16:  t4[s] += R2_W'(pu_in[s][k]) <<< (4 * k);
          PREC8:   t4[s] += R2_W'(pu_in[s][k]) <<< (4 * (k % 2));
          default: t4[s] += R2_W'(pu_in[s][k]);
        endcase
    end
  end

  for (genvar s = 0; s < N_SUB; s++) begin : g_tr
    fb_bit_trunc #(.TRUNC_W(TRUNC_W)) u_tr (
      .in(t4[s]), .x_prec(x_prec), .w_prec(w_prec), .out(tr[s]), .drop(drop[s]));
  end

  // selective 6-way adder tree
  always_comb begin
    for (int s = 0; s < N_SUB; s++) begin
      grp[s] = '0;
      gsc[s] = sc[s] + SC_W'(drop[s]);
    end
    case (cluster)
      CL3: begin
        grp[0] = G_W'(tr[0]) + G_W'(tr[1]) + G_W'(tr[2]);
        grp[1] = G_W'(tr[3]) + G_W'(tr[4]) + G_W'(tr[5]);
        gsc[1] = sc[3] + SC_W'(drop[3]);
        n_out  = 3'd2;
      end
      CL6: begin
        for (int s = 0; s < N_SUB; s++) grp[0] += G_W'(tr[s]);
        n_out  = 3'd1;
      end
      default: begin
        for (int s = 0; s < N_SUB; s++) grp[s] = G_W'(tr[s]);
        n_out  = 3'd6;
      end
    endcase
    for (int s = 0; s < N_SUB; s++) addin[s] = acc_first ? psum_in[s] : acc[s];
  end

  for (genvar s = 0; s < N_SUB; s++) begin : g_acc
    fb_int2fp #(.IN_W(G_W)) u_cvt (.in(grp[s]), .sc(gsc[s]), .out(gfp[s]));
    fb_fp32_add u_add (.a(gfp[s]), .b(addin[s]), .s(addout[s]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int s = 0; s < N_SUB; s++) acc[s] <= '0;
    else if (in_valid) for (int s = 0; s < N_SUB; s++) acc[s] <= addout[s];
  end

  always_comb for (int s = 0; s < N_SUB; s++) out[s] = acc[s];
endmodule
