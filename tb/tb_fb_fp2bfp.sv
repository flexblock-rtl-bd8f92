// tb_fb_fp2bfp: FP32 to BFP conversion. Random blocks (block lengths 1..216,
// precisions 4/8/16, random lane masks, values over a wide exponent range
// including zeros) with random out_ready. For every emitted beat the shared
// exponent must be the block's largest element exponent, each mantissa the
// truncated, aligned two's-complement value (reconstruction error below one
// LSB, magnitude representable in p bits) and the ZSE/element counters must
// match a model. Counts blocks with ZSE so that case is exercised.
module tb_fb_fp2bfp;
  import fb_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, iv = 0, ir, ov, ordy = 0, olast;
  prec_e prec;
  logic [7:0] blen, oexp;
  logic [31:0] id [18];
  logic [17:0] im, om;
  logic [15:0] omant [18];
  logic [31:0] zc, ec;
  int zse_blocks = 0;

  fb_fp2bfp dut (.clk(clk), .rst_n(rst_n), .prec(prec), .blk_len(blen), .stat_clr(clr),
                 .in_valid(iv), .in_ready(ir), .in_data(id), .in_mask(im), .out_valid(ov),
                 .out_ready(ordy), .out_mant(omant), .out_mask(om), .out_exp(oexp),
                 .out_last(olast), .zse_count(zc), .elem_count(ec));
  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] bd [12][18];
    logic [17:0] bm [12];
    int nb, es, p, mz, me, zb;
    real lsb, x, m;
    logic [23:0] sig;
    longint mag, mx;
    prec = PREC8; blen = 8'd18;
    repeat (2) @(posedge clk);
    rst_n = 1;
    mz = 0; me = 0;
    for (int n = 0; n < 400; n++) begin
      prec = prec_e'(n % 3); p = prec_bits(prec);
      blen = 8'(1 + $urandom % 216);
      nb = (int'(blen) + 17) / 18;
      es = 0; zb = 0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        ordy = 0;
        while (!ir) @(negedge clk);
        iv = 1; im = 18'($urandom) | 18'h1;
        for (int l = 0; l < 18; l++) begin
          id[l] = ($urandom % 8 == 0) ? 32'h0 : rnd_fp(-12, 4);
          bd[b][l] = id[l];
          bm[b][l] = im[l] && (b * 18 + l < int'(blen));
          if (bm[b][l] && int'(id[l][30:23]) > es) es = int'(id[l][30:23]);
        end
        @(posedge clk);
        #1 iv = 0;
      end
      for (int b = 0; b < nb; ) begin
        @(negedge clk);
        ordy = $urandom % 3 != 0;
        if (!ov) continue;
        checks++;
        if (int'(oexp) != es || om != bm[b] || olast != (b == nb - 1)) begin
          failures++;
          if (failures < 10) $display("n=%0d b=%0d exp=%0d/%0d mask %h/%h", n, b, oexp, es, om, bm[b]);
        end
        lsb = pow2(es - 127 - (p - 2));
        for (int l = 0; l < 18; l++) if (bm[b][l]) begin
          x = f2r(bd[b][l]);
          mx = longint'($signed(omant[l]));
          m = real'(mx) * lsb;
          checks++;
          if ((x - m) * (x < 0 ? -1.0 : 1.0) >= lsb || (x - m) * (x < 0 ? -1.0 : 1.0) < 0.0 ||
              mx >= (longint'(1) << (p - 1)) || mx < -(longint'(1) << (p - 1))) begin
            failures++;
            if (failures < 10) $display("n=%0d l=%0d x=%g m=%0d lsb=%g", n, l, x, mx, lsb);
          end
          if (bd[b][l][30:23] != 0 && ordy) begin
            me++;
            if (mx == 0) begin mz++; zb = 1; end
          end
        end
        if (ordy) b++;
      end
      zse_blocks += zb;
      @(negedge clk);
      ordy = 0;
      checks++;
      if (int'(zc) != mz || int'(ec) != me) failures++;
      if (n % 50 == 49) begin
        clr = 1; @(negedge clk); clr = 0; mz = 0; me = 0;
      end
    end
    checks++;
    if (zse_blocks == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
