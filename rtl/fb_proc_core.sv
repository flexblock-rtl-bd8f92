// fb_proc_core: the processing core, six subcores side by side.
//
// Subcore s receives its own 144-bit input slice x_bus[s] and its weight
// lanes w_bus[s] (4 x 144 bits, one per input channel of a slot). How a layer is mapped (Conv1/FC: consecutive input channels
// per subcore; Conv3: a 3x3 window per PE; Conv5/Conv7: a kernel spread over a
// cluster of three or six subcores; depthwise: one channel per subcore) is a
// matter of what the buffers place on these buses; the datapath is the same for
// every layer type. Six subcores, 144-bit buses and the mapping follow the paper.
// Latency one cycle (the subcore output registers).
module fb_proc_core
  import fb_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [N_SUB-1:0][BUS_W-1:0] x_bus,
  input  logic [N_SUB-1:0][N_PE-1:0][BUS_W-1:0] w_bus,
  input  core_cfg_t                 cfg,
  output logic                      out_valid,
  output logic signed [PU_W-1:0]    out3d [N_SUB][N_PU],
  output logic signed [PU_W-1:0]    out2d [N_SUB][N_PU]
);
  logic [N_SUB-1:0] v;
  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    fb_subcore u_sub (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid),
      .x_bus(x_bus[s]), .w_bus(w_bus[s]), .cfg(cfg),
      .out_valid(v[s]), .out3d(out3d[s]), .out2d(out2d[s])
    );
  end
  assign out_valid = v[0];
endmodule
