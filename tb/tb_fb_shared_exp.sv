// tb_fb_shared_exp: scale exponents of the shared exponent handler.
// sc3d[k] = ex[0] + ew[0][k] - 254 - (px-2) - (pw-2) + weight sub-word shift
// sc2d[s] = ex[s] + ew[s][0] - 254 - (px-2) - (pw-2)
// Checked one cycle after in_valid, and held while in_valid is low.
module tb_fb_shared_exp;
  import fb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, iv = 0;
  core_cfg_t cfg;
  logic [7:0] ex [6];
  logic [7:0] ew [6][4];
  logic signed [11:0] sc3d [4];
  logic signed [11:0] sc2d [6];

  fb_shared_exp dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .cfg(cfg), .ex(ex), .ew(ew),
                     .sc3d(sc3d), .sc2d(sc2d));
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int px, pw, r;
    logic signed [11:0] hold3 [4];
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      cfg.x_prec = prec_e'($urandom % 3); cfg.w_prec = prec_e'($urandom % 3);
      for (int s = 0; s < 6; s++) begin
        ex[s] = 8'($urandom);
        for (int k = 0; k < 4; k++) ew[s][k] = 8'($urandom);
      end
      iv = 1;
      @(negedge clk);
      iv = 0;
      px = prec_bits(cfg.x_prec); pw = prec_bits(cfg.w_prec);
      for (int k = 0; k < 4; k++) begin
        r = int'(ex[0]) + int'(ew[0][k]) - 254 - (px - 2) - (pw - 2) + int'(w_shift(cfg.w_prec, k));
        checks++;
        if (int'(sc3d[k]) != r) failures++;
        hold3[k] = sc3d[k];
      end
      for (int s = 0; s < 6; s++) begin
        r = int'(ex[s]) + int'(ew[s][0]) - 254 - (px - 2) - (pw - 2);
        checks++;
        if (int'(sc2d[s]) != r) failures++;
      end
      ex[0] = ~ex[0];
      @(negedge clk);
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (sc3d[k] != hold3[k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
