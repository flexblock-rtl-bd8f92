// tb_fb_ctrl_regs: control signal distributor. Random writes to every
// register of the map are read back and checked on the decoded outputs
// (core configuration fields, counts, bases, flags, alpha/eta, BFP and ZSE
// settings, BN coefficients); command writes must give one-cycle pulses; BN
// scale resets to 1.0 and unmapped addresses read zero.
module tb_fb_ctrl_regs;
  import fb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0;
  logic [7:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  core_cfg_t cfg;
  logic [15:0] ng, ns, ib, wb, igs, wgs;
  logic [12:0] flags;
  logic [31:0] alpha, eta;
  prec_e bp, zp;
  logic [7:0] bl, thu, thd;
  logic [31:0] ba [18];
  logic [31:0] bb [18];
  logic start, sclr, ee, pl;

  fb_ctrl_regs dut (.clk(clk), .rst_n(rst_n), .wr_en(we), .addr(addr), .wdata(wdata),
                    .rdata(rdata), .cfg(cfg), .n_groups(ng), .n_steps(ns), .in_base(ib),
                    .wt_base(wb), .in_gstride(igs), .wt_gstride(wgs), .flags(flags),
                    .alpha(alpha), .eta(eta), .bfp_prec(bp), .blk_len(bl), .th_up(thu),
                    .th_down(thd), .zse_init_prec(zp), .bn_a(ba), .bn_b(bb), .start(start),
                    .stat_clr(sclr), .epoch_end(ee), .prec_load(pl));
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(negedge clk); we = 0;
  endtask

  initial begin
    logic [31:0] sh [13];
    logic [31:0] d;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int l = 0; l < 18; l++) begin checks++; if (ba[l] != 32'h3F80_0000 || bb[l] != 0) failures++; end
    for (int i = 0; i < 12; i++) sh[i] = 0;
    for (int n = 0; n < 600; n++) begin
      int a = int'($urandom % 12);
      d = $urandom;
      if (a == 0) d[8:7] = 2'($urandom % 3);
      if (a == 0) begin d[1:0] = 2'($urandom % 3); d[3:2] = 2'($urandom % 3); end
      wr(8'(a), d); sh[a] = d;
      addr = 8'(a); #1;
      checks++;
      if (rdata != d) failures++;
      checks++;
      if (cfg.x_prec != prec_e'(sh[0][1:0]) || cfg.w_prec != prec_e'(sh[0][3:2]) ||
          cfg.x_signed != sh[0][4] || cfg.w_signed != sh[0][5] || cfg.mode != red_mode_e'(sh[0][6]) ||
          cfg.cluster != cluster_e'(sh[0][8:7]) || ng != sh[1][15:0] || ns != sh[2][15:0] ||
          ib != sh[3][15:0] || wb != sh[4][15:0] || igs != sh[5][15:0] || wgs != sh[6][15:0] ||
          flags != sh[7][12:0] || alpha != sh[8] || eta != sh[9] || bp != prec_e'(sh[10][1:0]) ||
          bl != sh[10][9:2] || thu != sh[11][7:0] || thd != sh[11][15:8] || zp != prec_e'(sh[11][17:16]))
        failures++;
    end
    for (int l = 0; l < 18; l++) begin
      wr(8'h20 + 8'(l), 32'(l) * 3 + 1); wr(8'h40 + 8'(l), 32'(l) * 5 + 2);
    end
    for (int l = 0; l < 18; l++) begin
      checks++;
      if (ba[l] != 32'(l) * 3 + 1 || bb[l] != 32'(l) * 5 + 2) failures++;
      addr = 8'h20 + 8'(l); #1;
      if (rdata != 32'(l) * 3 + 1) failures++;
    end
    addr = 8'h80; #1;
    checks++;
    if (rdata != 0) failures++;
    for (int b = 0; b < 4; b++) begin
      @(negedge clk); we = 1; addr = 8'h0C; wdata = 32'(1) << b;
      @(negedge clk); we = 0;
      checks++;
      if ({pl, ee, sclr, start} != 4'(1 << b)) failures++;
      @(negedge clk);
      checks++;
      if ({pl, ee, sclr, start} != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
