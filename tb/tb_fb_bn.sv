// tb_fb_bn: batch normalisation unit. Random coefficients and data against a
// bit-exact model of y = a*x + b (two FP32 roundings) with bn_en, a one-cycle
// pass-through without it, and the per-lane statistics (FP32 running sum,
// maximum, minimum over masked lanes, beat count) with stat_en and stat_clr.
module tb_fb_bn;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bn_en = 0, st_en = 0, st_clr = 0, iv = 0, ov;
  logic [31:0] a [18];
  logic [31:0] b [18];
  logic [31:0] id [18];
  logic [31:0] od [18];
  logic [31:0] ssum [18];
  logic [31:0] smax [18];
  logic [31:0] smin [18];
  logic [17:0] im, om;
  logic [15:0] beats;

  fb_bn dut (.clk(clk), .rst_n(rst_n), .bn_en(bn_en), .stat_en(st_en), .stat_clr(st_clr),
             .a(a), .b(b), .in_valid(iv), .in_data(id), .in_mask(im), .out_valid(ov),
             .out_data(od), .out_mask(om), .st_sum(ssum), .st_max(smax), .st_min(smin),
             .st_beats(beats));
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ey [18];
    logic [31:0] msum [18];
    real mmax [18], mmin [18];
    int mbeats;
    for (int l = 0; l < 18; l++) begin a[l] = rnd_fp(-3, 3); b[l] = rnd_fp(-3, 3); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      st_clr = (n % 50 == 0);
      if (st_clr) begin
        mbeats = 0;
        for (int l = 0; l < 18; l++) begin msum[l] = 0; mmax[l] = -1.0e40; mmin[l] = 1.0e40; end
      end
      bn_en = 1'($urandom); st_en = !st_clr && ($urandom % 4 != 0);
      iv = ($urandom % 5) != 0; im = 18'($urandom);
      for (int l = 0; l < 18; l++) begin
        id[l] = rnd_fp(-10, 10);
        ey[l] = bn_en ? r2f(f2r(r2f(f2r(a[l]) * f2r(id[l]))) + f2r(b[l])) : id[l];
      end
      if (st_en && iv) begin
        mbeats++;
        for (int l = 0; l < 18; l++) if (im[l]) begin
          msum[l] = r2f(f2r(msum[l]) + f2r(id[l]));
          if (f2r(id[l]) > mmax[l]) mmax[l] = f2r(id[l]);
          if (f2r(id[l]) < mmin[l]) mmin[l] = f2r(id[l]);
        end
      end
      @(negedge clk);
      st_clr = 0; st_en = 0;
      checks++;
      if (ov != iv) failures++;
      if (iv) begin
        checks++;
        if (om != im) failures++;
        for (int l = 0; l < 18; l++) if (!feq(od[l], ey[l])) failures++;
      end
      checks++;
      if (int'(beats) != mbeats) failures++;
      for (int l = 0; l < 18; l++) begin
        checks++;
        if (!feq(ssum[l], msum[l])) failures++;
        if (mbeats > 0 && mmax[l] > -1.0e39 && f2r(smax[l]) != mmax[l]) failures++;
        if (mbeats > 0 && mmin[l] < 1.0e39 && f2r(smin[l]) != mmin[l]) failures++;
      end
      iv = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
