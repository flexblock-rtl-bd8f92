// fb_subcore: four PUs realising sub-word parallelism on the weights.
//
// The 144-bit input bus is broadcast to all four PUs. The weight bus has one
// 144-bit lane per input channel of a slot (lane 0 only for 16-bit inputs,
// lanes 0-1 for 8-bit, all four for 4-bit inputs; see fb_pu). Each lane carries
// nine 16-bit slots; PU k takes bits [4k+3:4k] of every slot (36 bits),
// so in W16 the four PUs hold the four sub-words of one weight, in W8 PU3/PU2
// and PU1/PU0 hold two different output channels, and in W4 each PU holds its
// own output channel. The top sub-word of each weight (PU3 in W16, PU3 and PU1
// in W8, every PU in W4) is multiplied as signed when w_signed is set.
//
// Each PU result is registered (one cycle latency, qualified by in_valid ->
// out_valid) and routed by the per-PU mux either to the 3D reduction unit
// (mode = MODE_3D) or to the 2D reduction unit (MODE_2D); the unused path is
// held at zero. The register stage and the zeroing of the idle path are this
// design's choices; the PU/weight mapping follows the paper.
module fb_subcore
  import fb_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [BUS_W-1:0]              x_bus,
  input  logic [N_PE-1:0][BUS_W-1:0]    w_bus,
  input  core_cfg_t                     cfg,
  output logic                          out_valid,
  output logic signed [PU_W-1:0]        out3d [N_PU],
  output logic signed [PU_W-1:0]        out2d [N_PU]
);
  logic signed [PU_W-1:0] pu_sum [N_PU];
  logic signed [PU_W-1:0] pu_q   [N_PU];
  red_mode_e              mode_q;

  for (genvar k = 0; k < N_PU; k++) begin : g_pu
    logic [N_MUL*4-1:0] ws [N_PE];
    for (genvar c = 0; c < N_PE; c++) begin : g_lane
      for (genvar i = 0; i < N_MUL; i++) begin : g_col
        assign ws[c][i*4 +: 4] = w_bus[c][i*SLOT_W + 4*k +: 4];
      end
    end
    fb_pu u_pu (
      .x_bus(x_bus), .w_slice(ws),
      .x_prec(cfg.x_prec), .x_signed(cfg.x_signed),
      .w_sgn(cfg.w_signed & top_subword(cfg.w_prec, k)),
      .sum(pu_sum[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      mode_q    <= MODE_3D;
      for (int k = 0; k < N_PU; k++) pu_q[k] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        mode_q <= cfg.mode;
        for (int k = 0; k < N_PU; k++) pu_q[k] <= pu_sum[k];
      end
    end
  end

  always_comb begin
    for (int k = 0; k < N_PU; k++) begin
      out3d[k] = (mode_q == MODE_3D) ? pu_q[k] : '0;
      out2d[k] = (mode_q == MODE_2D) ? pu_q[k] : '0;
    end
  end
endmodule
