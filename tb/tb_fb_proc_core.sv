// tb_fb_proc_core: six subcores with independent buses. Random data; for each
// subcore and PU the output is compared with an independently computed
// sum of X element times weight sub-word (X16/X8/X4, W16 sub-words), and the
// 3D/2D routing is checked.
module tb_fb_proc_core;
  import fb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, iv = 0, ov;
  logic [5:0][143:0] xb;
  logic [5:0][3:0][143:0] wb;
  core_cfg_t cfg;
  logic signed [27:0] o3 [6][4];
  logic signed [27:0] o2 [6][4];

  fb_proc_core dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .x_bus(xb), .w_bus(wb), .cfg(cfg),
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
    longint r;
    int nx, ncx;
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      for (int s = 0; s < 6; s++) begin
        for (int i = 0; i < 9; i++) xb[s][i*16 +: 16] = 16'($urandom);
        for (int c = 0; c < 4; c++) for (int i = 0; i < 9; i++) wb[s][c][i*16 +: 16] = 16'($urandom);
      end
      cfg.x_prec = prec_e'(n % 3); cfg.w_prec = PREC16;
      cfg.x_signed = 1'($urandom); cfg.w_signed = 1'b1;
      cfg.mode = red_mode_e'((n / 3) % 2);
      @(negedge clk); iv = 1;
      @(negedge clk); iv = 0;
      checks++; if (!ov) failures++;
      nx = prec_bits(cfg.x_prec); ncx = 16 / nx;
      for (int s = 0; s < 6; s++)
        for (int k = 0; k < 4; k++) begin
          r = 0;
          for (int i = 0; i < 9; i++)
            for (int c = 0; c < ncx; c++)
              r += fld(xb[s], i*16 + 16 - nx*(c+1), nx, cfg.x_signed) *
                   fld(wb[s][c], i*16 + 4*k, 4, k == 3);
          checks++;
          if (longint'((cfg.mode == MODE_3D) ? o3[s][k] : o2[s][k]) != r ||
              ((cfg.mode == MODE_3D) ? o2[s][k] : o3[s][k]) != 0) begin
            failures++;
            if (failures < 10) $display("mismatch s=%0d k=%0d ref=%0d", s, k, r);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
