// flexblock_top: one FlexBlock core with its buffers, control and the
// post-processing chain from the core output to DRAM.
//
// Dataflow:
//   host -> control signal distributor (fb_ctrl_regs) -> FSM block (fb_fsm)
//   input / weight buffers (fb_sram) -> FlexBlock core (fb_core: processing core,
//   shared exponent handler, 3D and 2D reduction units, output mux)
//   -> results to the output buffer (stored partial sums, read back as psum)
//      and to the core output buffer (fb_core_obuf, rows of 18 FP32 words)
//   -> batch norm (fb_bn) -> ReLU-Pool (fb_relu_pool) -> masking (fb_mask)
//   -> FIFO (fb_fifo) -> weight update (fb_wu) -> FP2BFP converter (fb_fp2bfp)
//   -> quantization unit (fb_quant) -> DRAM port.
// With FLAGS.wu_src set, results skip BN/ReLU-Pool/mask/FIFO and go straight
// from the core output buffer to the weight update unit (weight gradients).
// The ZSE counts of the FP2BFP converter feed the dynamic precision controller
// (fb_prec_ctrl), whose choice can drive the converter's precision.
//
// Buffer words: input word = {ex[5..0] (8b each), x_bus[5..0] (144b each)},
// 912 bits; weight word = {ew[subcore 5..0][PU 3..0] (8b each), w_bus[5..0]},
// where w_bus[s] is four 144-bit lanes, 3648 bits; output buffer word = six
// FP32 values, 192 bits. The host fills the input and weight buffers through
// their own write ports, also while a run reads another address region
// (double buffering: the next run is pointed at the new region through
// IN_BASE/WT_BASE); the output buffer port is used while the core is idle.
// DRAM and the weight stream for the weight update are ports, since they are
// outside the design.
// The block chain follows the paper's overall architecture figure; the buffer
// word formats, handshakes and the host interface are this design's choices.
module flexblock_top
  import fb_pkg::*;
#(
  parameter int unsigned IN_BYTES  = 8192,   // 512 KB input buffer / 64 cores
  parameter int unsigned WT_BYTES  = 8192,   // 512 KB weight buffer / 64 cores
  parameter int unsigned OUT_BYTES = 4096,   // 256 KB output buffer / 64 cores
  parameter int unsigned OBUF_ROWS = 8,      // core output buffer rows of 18 words
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned IN_WORD  = N_SUB * BUS_W + N_SUB * EXP_W,
  localparam int unsigned WT_WORD  = N_SUB * N_PE * BUS_W + N_SUB * N_PU * EXP_W,
  localparam int unsigned OB_WORD  = N_SUB * 32,
  localparam int unsigned IN_DEPTH = IN_BYTES * 8 / (N_SUB * BUS_W),
  localparam int unsigned WT_DEPTH = WT_BYTES * 8 / (N_SUB * N_PE * BUS_W),
  localparam int unsigned OB_DEPTH = OUT_BYTES * 8 / OB_WORD,
  localparam int unsigned IN_AW = $clog2(IN_DEPTH),
  localparam int unsigned WT_AW = $clog2(WT_DEPTH),
  localparam int unsigned OB_AW = $clog2(OB_DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host register port
  input  logic                    reg_we,
  input  logic [7:0]              reg_addr,
  input  logic [31:0]             reg_wdata,
  output logic [31:0]             reg_rdata,
  // host buffer fill ports
  input  logic                    ibuf_we,
  input  logic [IN_AW-1:0]        ibuf_waddr,
  input  logic [IN_WORD-1:0]      ibuf_wdata,
  input  logic                    wbuf_we,
  input  logic [WT_AW-1:0]        wbuf_waddr,
  input  logic [WT_WORD-1:0]      wbuf_wdata,
  input  logic                    obuf_we,
  input  logic [OB_AW-1:0]        obuf_addr,
  input  logic [OB_WORD-1:0]      obuf_wdata,
  output logic [OB_WORD-1:0]      obuf_rdata,
  // current weights for the weight update unit
  input  logic                    wu_w_valid,
  output logic                    wu_w_ready,
  input  logic [31:0]             wu_w_data [LANES],
  // DRAM write port
  output logic                    dram_valid,
  input  logic                    dram_ready,
  output logic [LANES*16-1:0]     dram_data,
  output logic [7:0]              dram_exp,
  output logic [2:0]              dram_beats,
  // ReLU/pool bitmap for the backward pass
  output logic                    bitmap_valid,
  output logic [LANES-1:0]        bitmap,
  // status
  output logic                    busy,
  output logic                    done,
  output logic [15:0]             stall_cycles,
  output logic [31:0]             zse_count,
  output logic [31:0]             elem_count,
  output prec_e                   dyn_prec,
  output logic [31:0]             bn_sum [LANES],
  output logic [31:0]             bn_max [LANES],
  output logic [31:0]             bn_min [LANES]
);
  // ---------------- control ----------------
  core_cfg_t   cfg;
  logic [15:0] n_groups, n_steps, in_base, wt_base, in_gstride, wt_gstride;
  logic [12:0] flags;
  logic [31:0] alpha, eta;
  prec_e       bfp_prec, zse_init_prec;
  logic [7:0]  blk_len, th_up, th_down;
  logic [31:0] bn_a [LANES];
  logic [31:0] bn_b [LANES];
  logic        start, stat_clr, epoch_end, prec_load;

  fb_ctrl_regs u_regs (
    .clk(clk), .rst_n(rst_n), .wr_en(reg_we), .addr(reg_addr), .wdata(reg_wdata),
    .rdata(reg_rdata), .cfg(cfg), .n_groups(n_groups), .n_steps(n_steps),
    .in_base(in_base), .wt_base(wt_base), .in_gstride(in_gstride), .wt_gstride(wt_gstride),
    .flags(flags), .alpha(alpha), .eta(eta), .bfp_prec(bfp_prec), .blk_len(blk_len),
    .th_up(th_up), .th_down(th_down), .zse_init_prec(zse_init_prec),
    .bn_a(bn_a), .bn_b(bn_b), .start(start), .stat_clr(stat_clr),
    .epoch_end(epoch_end), .prec_load(prec_load));

  logic psum_from_buf, post_en, wu_en, act_sel, pool_sel, bn_en, bn_stat_en, wu_src, dyn_en;
  logic [1:0] out_sel, pool_log2;
  assign psum_from_buf = flags[0];
  assign post_en       = flags[1];
  assign wu_en         = flags[2];
  assign act_sel       = flags[3];
  assign pool_sel      = flags[4];
  assign out_sel       = flags[6:5];
  assign pool_log2     = flags[8:7];
  assign bn_en         = flags[9];
  assign bn_stat_en    = flags[10];
  assign wu_src        = flags[11];
  assign dyn_en        = flags[12];

  logic        buf_re, core_valid, core_first, core_last, res_valid;
  logic [7:0]  in_ra8, wt_ra8, ob_ra8;
  logic [15:0] cob_space, res_count;

  fb_fsm #(.AW(8)) u_fsm (
    .clk(clk), .rst_n(rst_n), .start(start), .n_groups(n_groups), .n_steps(n_steps),
    .in_base(in_base), .wt_base(wt_base), .in_gstride(in_gstride), .wt_gstride(wt_gstride),
    .post_en(post_en), .obuf_space(cob_space), .res_valid(res_valid),
    .buf_re(buf_re), .in_raddr(in_ra8), .wt_raddr(wt_ra8), .ob_raddr(ob_ra8),
    .core_valid(core_valid), .core_first(core_first), .core_last(core_last),
    .busy(busy), .done(done), .stall_cycles(stall_cycles), .res_count(res_count));

  // ---------------- buffers ----------------
  logic [IN_WORD-1:0] in_word;
  logic [WT_WORD-1:0] wt_word;
  logic [OB_WORD-1:0] ob_word, ob_wd;
  logic               ob_we;
  logic [OB_AW-1:0]   ob_wa, ob_ra;

  fb_sram #(.WIDTH(IN_WORD), .DEPTH(IN_DEPTH)) u_ibuf (
    .clk(clk), .we(ibuf_we), .waddr(ibuf_waddr), .wdata(ibuf_wdata),
    .re(buf_re), .raddr(IN_AW'(in_ra8)), .rdata(in_word));

  fb_sram #(.WIDTH(WT_WORD), .DEPTH(WT_DEPTH)) u_wbuf (
    .clk(clk), .we(wbuf_we), .waddr(wbuf_waddr), .wdata(wbuf_wdata),
    .re(buf_re), .raddr(WT_AW'(wt_ra8)), .rdata(wt_word));

  logic [31:0] res [N_SUB];
  logic [2:0]  n_out;

  // output buffer: results are written back at their group index; the host
  // reads and writes it while the core is idle
  always_comb begin
    ob_we = res_valid || (obuf_we && !busy);
    ob_wa = res_valid ? OB_AW'(res_count) : obuf_addr;
    for (int s = 0; s < N_SUB; s++)
      ob_wd[s*32 +: 32] = res_valid ? res[s] : obuf_wdata[s*32 +: 32];
    ob_ra = busy ? OB_AW'(ob_ra8) : obuf_addr;
  end

  fb_sram #(.WIDTH(OB_WORD), .DEPTH(OB_DEPTH)) u_obuf (
    .clk(clk), .we(ob_we), .waddr(ob_wa), .wdata(ob_wd),
    .re(buf_re || !busy), .raddr(ob_ra), .rdata(ob_word));
  assign obuf_rdata = ob_word;

  // ---------------- core ----------------
  logic [N_SUB-1:0][BUS_W-1:0] x_bus;
  logic [N_SUB-1:0][N_PE-1:0][BUS_W-1:0] w_bus;
  logic [EXP_W-1:0] ex [N_SUB];
  logic [EXP_W-1:0] ew [N_SUB][N_PU];
  logic [31:0]      psum [N_SUB];
  logic [31:0]      psum_q [N_SUB];

  always_comb begin
    for (int s = 0; s < N_SUB; s++) begin
      x_bus[s] = in_word[s*BUS_W +: BUS_W];
      w_bus[s] = wt_word[s*N_PE*BUS_W +: N_PE*BUS_W];
      ex[s]    = in_word[N_SUB*BUS_W + s*EXP_W +: EXP_W];
      for (int k = 0; k < N_PU; k++)
        ew[s][k] = wt_word[N_SUB*N_PE*BUS_W + (s*N_PU + k)*EXP_W +: EXP_W];
      psum[s]  = psum_from_buf ? psum_q[s] : 32'h0;
    end
  end

  // The output buffer word read with a group's first step arrives with that
  // step's core_valid; it is held here until the reduction unit adds it one
  // cycle later (the next read may already belong to the next group).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int s = 0; s < N_SUB; s++) psum_q[s] <= '0;
    else if (core_valid && core_first)
      for (int s = 0; s < N_SUB; s++) psum_q[s] <= ob_word[s*32 +: 32];
  end

  fb_core u_core (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .in_valid(core_valid),
    .acc_first(core_first), .acc_last(core_last), .x_bus(x_bus), .w_bus(w_bus),
    .ex(ex), .ew(ew), .psum_in(psum), .res_valid(res_valid), .res(res), .n_out(n_out));

  // ---------------- post-processing ----------------
  logic              cob_valid, cob_ready;
  logic [31:0]       cob_data [LANES];
  logic [LANES-1:0]  cob_mask;

  fb_core_obuf #(.DEPTH_ROWS(OBUF_ROWS)) u_cob (
    .clk(clk), .rst_n(rst_n), .wr_valid(res_valid && post_en), .wr_n(n_out),
    .wr_data(res), .flush(done && post_en), .space(cob_space),
    .out_valid(cob_valid), .out_ready(cob_ready), .out_data(cob_data), .out_mask(cob_mask));

  logic              bn_v, rp_v, mk_v;
  logic [31:0]       bn_d [LANES];
  logic [31:0]       rp_d [LANES];
  logic [31:0]       mk_d [LANES];
  logic [LANES-1:0]  bn_m, rp_m, mk_m;
  logic [15:0]       bn_beats;
  logic              to_bn;
  logic              ff_in_ready, ff_out_valid, ff_out_ready;
  logic [LANES*33-1:0] ff_in, ff_out;
  logic [$clog2(FIFO_DEPTH+1)-1:0] ff_count;

  // the BN..mask pipeline has no backpressure: pop only when the FIFO can
  // take everything already in flight
  assign to_bn = cob_valid && !wu_src &&
                 (32'(ff_count) + 32'(bn_v) + 32'(rp_v) + 32'(mk_v) + 1 <= FIFO_DEPTH);

  fb_bn u_bn (
    .clk(clk), .rst_n(rst_n), .bn_en(bn_en), .stat_en(bn_stat_en), .stat_clr(stat_clr),
    .a(bn_a), .b(bn_b), .in_valid(to_bn), .in_data(cob_data), .in_mask(cob_mask),
    .out_valid(bn_v), .out_data(bn_d), .out_mask(bn_m),
    .st_sum(bn_sum), .st_max(bn_max), .st_min(bn_min), .st_beats(bn_beats));

  fb_relu_pool u_rp (
    .clk(clk), .rst_n(rst_n), .act_sel(act_sel), .pool_sel(pool_sel), .out_sel(out_sel),
    .pool_log2(pool_log2), .alpha(alpha), .in_valid(bn_v), .in_data(bn_d), .in_mask(bn_m),
    .out_valid(rp_v), .out_data(rp_d), .out_mask(rp_m));

  fb_mask u_mk (
    .clk(clk), .rst_n(rst_n), .in_valid(rp_v), .in_data(rp_d), .in_mask(rp_m),
    .out_valid(mk_v), .out_data(mk_d), .out_mask(mk_m), .bitmap(bitmap));
  assign bitmap_valid = mk_v;

  always_comb begin
    ff_in[LANES*32 +: LANES] = mk_m;
    for (int l = 0; l < LANES; l++) ff_in[l*32 +: 32] = mk_d[l];
  end

  fb_fifo #(.WIDTH(LANES*33), .DEPTH(FIFO_DEPTH)) u_ff (
    .clk(clk), .rst_n(rst_n), .in_valid(mk_v), .in_ready(ff_in_ready), .in_data(ff_in),
    .out_valid(ff_out_valid), .out_ready(ff_out_ready), .out_data(ff_out), .count(ff_count));

  // weight update input: FIFO (BN path) or the core output buffer (wu_src)
  logic              wu_in_valid, wu_in_ready, wu_o_valid, wu_o_ready;
  logic [31:0]       wu_in_d [LANES];
  logic [LANES-1:0]  wu_in_m;
  logic [31:0]       wu_o_d [LANES];
  logic [LANES-1:0]  wu_o_m;

  always_comb begin
    wu_in_valid = wu_src ? cob_valid : ff_out_valid;
    wu_in_m     = wu_src ? cob_mask : ff_out[LANES*32 +: LANES];
    for (int l = 0; l < LANES; l++) wu_in_d[l] = wu_src ? cob_data[l] : ff_out[l*32 +: 32];
    ff_out_ready = !wu_src && wu_in_ready;
    cob_ready    = wu_src ? wu_in_ready : to_bn;
  end

  fb_wu u_wu (
    .clk(clk), .rst_n(rst_n), .wu_en(wu_en), .eta(eta),
    .in_valid(wu_in_valid), .in_ready(wu_in_ready), .in_data(wu_in_d), .in_mask(wu_in_m),
    .w_valid(wu_w_valid), .w_ready(wu_w_ready), .w_data(wu_w_data),
    .out_valid(wu_o_valid), .out_ready(wu_o_ready), .out_data(wu_o_d), .out_mask(wu_o_m));

  logic              bf_valid, bf_ready, bf_last;
  logic [15:0]       bf_mant [LANES];
  logic [LANES-1:0]  bf_mask;
  logic [7:0]        bf_exp;
  prec_e             conv_prec;

  assign conv_prec = dyn_en ? dyn_prec : bfp_prec;

  fb_fp2bfp u_f2b (
    .clk(clk), .rst_n(rst_n), .prec(conv_prec), .blk_len(blk_len), .stat_clr(stat_clr),
    .in_valid(wu_o_valid), .in_ready(wu_o_ready), .in_data(wu_o_d), .in_mask(wu_o_m),
    .out_valid(bf_valid), .out_ready(bf_ready), .out_mant(bf_mant), .out_mask(bf_mask),
    .out_exp(bf_exp), .out_last(bf_last), .zse_count(zse_count), .elem_count(elem_count));

  fb_quant u_q (
    .clk(clk), .rst_n(rst_n), .prec(conv_prec), .in_valid(bf_valid), .in_ready(bf_ready),
    .in_mant(bf_mant), .in_exp(bf_exp), .in_last(bf_last),
    .dram_valid(dram_valid), .dram_ready(dram_ready), .dram_data(dram_data),
    .dram_exp(dram_exp), .dram_beats(dram_beats));

  logic went_up, went_down;
  fb_prec_ctrl u_pc (
    .clk(clk), .rst_n(rst_n), .load(prec_load), .init_prec(zse_init_prec),
    .epoch_end(epoch_end), .zse(zse_count), .elems(elem_count),
    .th_up(th_up), .th_down(th_down), .prec(dyn_prec),
    .went_up(went_up), .went_down(went_down));

  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    mk_v |-> ff_in_ready);
endmodule
