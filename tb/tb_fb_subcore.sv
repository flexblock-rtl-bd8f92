// tb_fb_subcore: checks a subcore against whole-element dot products.
// For every input/weight precision pair the PU outputs of each weight group
// (W16: PU3..0, W8: PU3-2 and PU1-0, W4: each PU) are recombined with their
// sub-word weights and compared with sum_i sum_c X(i,c) * W(i,c,group), where
// X and W are read as whole 4/8/16-bit elements from the buses. Also checks the
// one-cycle latency and that the idle reduction path stays at zero.
module tb_fb_subcore;
  import fb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, iv = 0, ov;
  logic [143:0] xb;
  logic [3:0][143:0] wb;
  core_cfg_t cfg;
  logic signed [27:0] o3 [4];
  logic signed [27:0] o2 [4];

  fb_subcore dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .x_bus(xb), .w_bus(wb), .cfg(cfg),
                  .out_valid(ov), .out3d(o3), .out2d(o2));
  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint fld(logic [143:0] b, int pos, int nb, bit sg);
    longint v = longint'(16'(b >> pos)) & ((longint'(1) << nb) - 1);
    if (sg && v[nb-1]) v -= (longint'(1) << nb);
    return v;
  endfunction

  initial begin
    longint r, comb;
    int nx, nw, ncx, ngr, per;
    logic signed [27:0] sel [4];
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      for (int i = 0; i < 9; i++) xb[i*16 +: 16] = 16'($urandom);
      for (int c = 0; c < 4; c++) for (int i = 0; i < 9; i++) wb[c][i*16 +: 16] = 16'($urandom);
      cfg.x_prec = prec_e'(n % 3); cfg.w_prec = prec_e'((n / 3) % 3);
      cfg.x_signed = 1'($urandom); cfg.w_signed = 1'($urandom);
      cfg.mode = red_mode_e'((n / 9) % 2); cfg.cluster = CL1;
      @(negedge clk); iv = 1;
      @(negedge clk); iv = 0;
      checks++;
      if (!ov) failures++;
      nx = prec_bits(cfg.x_prec); nw = prec_bits(cfg.w_prec);
      ncx = 16 / nx; ngr = 16 / nw; per = nw / 4;
      for (int k = 0; k < 4; k++) begin
        sel[k] = (cfg.mode == MODE_3D) ? o3[k] : o2[k];
        checks++;
        if (((cfg.mode == MODE_3D) ? o2[k] : o3[k]) != 0) failures++;
      end
      for (int g = 0; g < ngr; g++) begin
        r = 0;
        for (int i = 0; i < 9; i++)
          for (int c = 0; c < ncx; c++)
            r += fld(xb, i*16 + 16 - nx*(c+1), nx, cfg.x_signed) *
                 fld(wb[c], i*16 + 16 - nw*(g+1), nw, cfg.w_signed);
        comb = 0;
        for (int j = 0; j < per; j++) comb += longint'(sel[3 - g*per - j]) <<< (4 * (per - 1 - j));
        checks++;
        if (comb != r) begin
          failures++;
          if (failures < 10) $display("mismatch px=%0d pw=%0d g=%0d dut=%0d ref=%0d", nx, nw, g, comb, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
