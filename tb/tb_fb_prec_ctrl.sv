// tb_fb_prec_ctrl: dynamic precision controller. Random ZSE counts, element
// counts and thresholds at epoch ends against a model of the hysteresis rule
// (ratio above th_up/256: one step up; below th_down/256: one step down;
// saturating at 4 and 16 bits), plus load of the initial precision. Counts
// up steps, down steps and saturation so each is exercised.
module tb_fb_prec_ctrl;
  import fb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, ee = 0, wu, wd;
  prec_e ip, prec;
  logic [31:0] zse, elems;
  logic [7:0] thu, thd;
  int ups = 0, downs = 0, sats = 0;

  fb_prec_ctrl dut (.clk(clk), .rst_n(rst_n), .load(load), .init_prec(ip), .epoch_end(ee),
                    .zse(zse), .elems(elems), .th_up(thu), .th_down(thd), .prec(prec),
                    .went_up(wu), .went_down(wd));
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p, e_up, e_dn;
    longint l, u, d;
    ip = PREC8; zse = 0; elems = 1; thu = 0; thd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (prec != PREC16) failures++;
    p = 2;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      load = ($urandom % 20) == 0; ip = prec_e'($urandom % 3);
      ee = 1'($urandom);
      elems = 1 + $urandom % 100000; zse = $urandom % (elems + 1);
      thu = 8'(100 + $urandom % 100); thd = 8'($urandom % 100);
      l = longint'(zse) * 256; u = longint'(elems) * thu; d = longint'(elems) * thd;
      e_up = 0; e_dn = 0;
      if (load) p = int'(ip);
      else if (ee) begin
        if (l > u) begin if (p < 2) begin p++; e_up = 1; ups++; end else sats++; end
        else if (l < d) begin if (p > 0) begin p--; e_dn = 1; downs++; end else sats++; end
      end
      @(negedge clk);
      load = 0; ee = 0;
      checks++;
      if (int'(prec) != p || wu != e_up || wd != e_dn) failures++;
    end
    checks++;
    if (ups == 0 || downs == 0 || sats == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
