// fb_ctrl_regs: control signal distributor.
//
// Register file written by the host CPU over a simple synchronous write port
// (wr_en, 8-bit word address, 32-bit data) and read back combinationally. It
// holds every static setting of the core and of the post-processing units and
// turns a write of 1 to START into a one-cycle `start` pulse for the FSM.
// Register map (word addresses):
//   0x00 CORE    [1:0] x_prec [3:2] w_prec [4] x_signed [5] w_signed [6] mode(1=2D) [8:7] cluster
//   0x01 NGROUPS number of outputs (groups)          0x02 NSTEPS accumulation steps per group
//   0x03 IN_BASE 0x04 WT_BASE  0x05 IN_GSTRIDE 0x06 WT_GSTRIDE (buffer word addresses)
//   0x07 FLAGS   [0] psum_from_buf [1] post_en [2] wu_en [3] act_sel [4] pool_sel
//                [6:5] out_sel [8:7] pool_log2 [9] bn_en [10] bn_stat_en [11] wu_src (1 = core)
//                [12] FP2BFP precision from the dynamic precision controller
//   0x08 ALPHA   ReLU-alpha clip (FP32)              0x09 ETA learning rate (FP32)
//   0x0A BFP     [1:0] output precision [9:2] block length in elements
//   0x0B ZSE     [7:0] th_up [15:8] th_down (fractions of 256) [17:16] initial precision
//   0x0C CMD     write: [0] start [1] clear statistics [2] epoch end [3] load initial precision
//   0x20+l BN_A  lane l scale (FP32)                 0x40+l BN_B lane l offset (FP32)
// The paper only names this block and says the host programs it; the map is
// this design's.
module fb_ctrl_regs
  import fb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [7:0]        addr,
  input  logic [31:0]       wdata,
  output logic [31:0]       rdata,
  output core_cfg_t         cfg,
  output logic [15:0]       n_groups,
  output logic [15:0]       n_steps,
  output logic [15:0]       in_base,
  output logic [15:0]       wt_base,
  output logic [15:0]       in_gstride,
  output logic [15:0]       wt_gstride,
  output logic [12:0]       flags,
  output logic [31:0]       alpha,
  output logic [31:0]       eta,
  output prec_e             bfp_prec,
  output logic [7:0]        blk_len,
  output logic [7:0]        th_up,
  output logic [7:0]        th_down,
  output prec_e             zse_init_prec,
  output logic [31:0]       bn_a [LANES],
  output logic [31:0]       bn_b [LANES],
  output logic              start,
  output logic              stat_clr,
  output logic              epoch_end,
  output logic              prec_load
);
  logic [31:0] r [13];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 13; i++) r[i] <= '0;
      for (int l = 0; l < LANES; l++) begin bn_a[l] <= 32'h3F80_0000; bn_b[l] <= '0; end
      start <= 1'b0; stat_clr <= 1'b0; epoch_end <= 1'b0; prec_load <= 1'b0;
    end else begin
      start <= 1'b0; stat_clr <= 1'b0; epoch_end <= 1'b0; prec_load <= 1'b0;
      if (wr_en) begin
        if (addr == 8'h0C) begin
          start     <= wdata[0];
          stat_clr  <= wdata[1];
          epoch_end <= wdata[2];
          prec_load <= wdata[3];
        end else if (addr < 8'h0C) begin
          r[addr[3:0]] <= wdata;
        end else if (addr >= 8'h20 && addr < 8'h20 + 8'(LANES)) begin
          bn_a[5'(addr - 8'h20)] <= wdata;
        end else if (addr >= 8'h40 && addr < 8'h40 + 8'(LANES)) begin
          bn_b[5'(addr - 8'h40)] <= wdata;
        end
      end
    end
  end

  always_comb begin
    if (addr < 8'h0D)                                       rdata = r[addr[3:0]];
    else if (addr >= 8'h20 && addr < 8'h20 + 8'(LANES))      rdata = bn_a[5'(addr - 8'h20)];
    else if (addr >= 8'h40 && addr < 8'h40 + 8'(LANES))      rdata = bn_b[5'(addr - 8'h40)];
    else                                                    rdata = '0;
  end

  assign cfg = '{x_prec: prec_e'(r[0][1:0]), w_prec: prec_e'(r[0][3:2]),
                 x_signed: r[0][4], w_signed: r[0][5],
                 mode: red_mode_e'(r[0][6]), cluster: cluster_e'(r[0][8:7])};
  assign n_groups   = r[1][15:0];
  assign n_steps    = r[2][15:0];
  assign in_base    = r[3][15:0];
  assign wt_base    = r[4][15:0];
  assign in_gstride = r[5][15:0];
  assign wt_gstride = r[6][15:0];
  assign flags      = r[7][12:0];
  assign alpha      = r[8];
  assign eta        = r[9];
  assign bfp_prec   = prec_e'(r[10][1:0]);
  assign blk_len    = r[10][9:2];
  assign th_up      = r[11][7:0];
  assign th_down    = r[11][15:8];
  assign zse_init_prec = prec_e'(r[11][17:16]);
endmodule
