// fb_core: one FlexBlock core datapath.
//
// Processing core (six subcores) + shared exponent handler + the dual-path
// reduction units + the 2D/3D output mux:
//   cycle 0: in_valid with the 6x144-bit input bus, the 6x4x144-bit weight bus, the block
//            exponents, acc_first (first step of an output) and acc_last;
//   cycle 1: subcore output registers and scale exponents; the reduction unit
//            selected by cfg.mode accumulates (psum_in is sampled here);
//   cycle 2: res_valid for the step that had acc_last, with res[0..n_out-1].
// 3D mode gives 1, 2 or 4 FP32 outputs (W16/W8/W4), 2D mode 6, 2 or 1
// (cluster CL1/CL3/CL6). cfg must stay constant while an output accumulates.
// Block structure and dataflow follow the paper; the pipeline timing is this
// design's.
module fb_core
  import fb_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  core_cfg_t                   cfg,
  input  logic                        in_valid,
  input  logic                        acc_first,
  input  logic                        acc_last,
  input  logic [N_SUB-1:0][BUS_W-1:0] x_bus,
  input  logic [N_SUB-1:0][N_PE-1:0][BUS_W-1:0] w_bus,
  input  logic [EXP_W-1:0]            ex [N_SUB],
  input  logic [EXP_W-1:0]            ew [N_SUB][N_PU],
  input  logic [31:0]                 psum_in [N_SUB],
  output logic                        res_valid,
  output logic [31:0]                 res [N_SUB],
  output logic [2:0]                  n_out
);
  logic                   v1, first1, last1;
  logic signed [PU_W-1:0] o3 [N_SUB][N_PU];
  logic signed [PU_W-1:0] o2 [N_SUB][N_PU];
  logic signed [SC_W-1:0] sc3 [N_PU];
  logic signed [SC_W-1:0] sc2 [N_SUB];
  logic [31:0]            r3 [N_PU];
  logic [31:0]            r2 [N_SUB];
  logic [31:0]            ps3 [N_PU];
  logic [2:0]             n3, n2;

  fb_proc_core u_pc (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x_bus(x_bus), .w_bus(w_bus),
    .cfg(cfg), .out_valid(v1), .out3d(o3), .out2d(o2));

  fb_shared_exp u_se (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .cfg(cfg), .ex(ex), .ew(ew),
    .sc3d(sc3), .sc2d(sc2));

  always_comb for (int k = 0; k < N_PU; k++) ps3[k] = psum_in[k];

  fb_red3d u_r3 (
    .clk(clk), .rst_n(rst_n), .in_valid(v1 && cfg.mode == MODE_3D), .acc_first(first1),
    .w_prec(cfg.w_prec), .pu_in(o3), .sc(sc3), .psum_in(ps3), .out(r3), .n_out(n3));

  fb_red2d u_r2 (
    .clk(clk), .rst_n(rst_n), .in_valid(v1 && cfg.mode == MODE_2D), .acc_first(first1),
    .x_prec(cfg.x_prec), .w_prec(cfg.w_prec), .cluster(cfg.cluster),
    .pu_in(o2), .sc(sc2), .psum_in(psum_in), .out(r2), .n_out(n2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first1 <= 1'b0; last1 <= 1'b0; res_valid <= 1'b0;
    end else begin
      first1    <= in_valid & acc_first;
      last1     <= in_valid & acc_last;
      res_valid <= v1 & last1;
    end
  end

  // output mux: 1 = 2D reduction unit, 0 = 3D reduction unit
  always_comb begin
    for (int s = 0; s < N_SUB; s++)
      res[s] = (cfg.mode == MODE_2D) ? r2[s] : ((s < N_PU) ? r3[s % N_PU] : 32'h0);
    n_out = (cfg.mode == MODE_2D) ? n2 : n3;
  end
endmodule
