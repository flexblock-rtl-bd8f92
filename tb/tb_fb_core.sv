// tb_fb_core: one core (six subcores, exponent handler, both reduction units)
// against an element-level model. For random configurations (input and weight
// precision, signedness, 3D/2D mode, cluster size) several accumulation steps
// are streamed back to back; the model sums X * W * 2^scale over all steps,
// subcores, slots and channels in double precision. Because the datapath
// rounds at each FP32 step (and X16W16 2D truncates 3 bits), a result passes
// when its error is within 2^-18 of the sum of |terms| plus the truncation
// bound. Also checks n_out and that res_valid comes two cycles after the
// last step.
module tb_fb_core;
  import fb_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, iv = 0, first = 0, last = 0;
  core_cfg_t cfg;
  logic [5:0][143:0] xb;
  logic [5:0][3:0][143:0] wb;
  logic [7:0] ex [6];
  logic [7:0] ew [6][4];
  logic [31:0] psum [6];
  logic res_valid;
  logic [31:0] res [6];
  logic [2:0] n_out;

  fb_core dut (.clk(clk), .rst_n(rst_n), .cfg(cfg), .in_valid(iv), .acc_first(first),
               .acc_last(last), .x_bus(xb), .w_bus(wb), .ex(ex), .ew(ew), .psum_in(psum),
               .res_valid(res_valid), .res(res), .n_out(n_out));
  always #5 clk = ~clk;

  initial begin
    #5_000_000;
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
    real    exact [6], mag [6], t, tol;
    int     nx, nw, ncx, ngr, steps, nexp, gs, o, sc;
    cfg = '0;
    for (int s = 0; s < 6; s++) psum[s] = 32'h0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      cfg.x_prec = prec_e'(n % 3); cfg.w_prec = prec_e'((n / 3) % 3);
      cfg.x_signed = 1'($urandom); cfg.w_signed = 1'($urandom);
      cfg.mode = red_mode_e'((n / 9) % 2); cfg.cluster = cluster_e'($urandom % 3);
      nx = prec_bits(cfg.x_prec); nw = prec_bits(cfg.w_prec);
      ncx = 16 / nx; ngr = 16 / nw;
      gs = (cfg.cluster == CL1) ? 1 : (cfg.cluster == CL3) ? 3 : 6;
      nexp = (cfg.mode == MODE_3D) ? ngr : 6 / gs;
      // block exponents: one per input block (subcore) and per output channel
      for (int s = 0; s < 6; s++) begin
        ex[s] = 8'(120 + $urandom % 16);
        for (int k = 0; k < 4; k++) ew[s][k] = 8'(120 + $urandom % 16);
      end
      if (cfg.mode == MODE_3D)
        for (int k = 0; k < 4; k++) ew[0][k] = ew[0][(cfg.w_prec == PREC16) ? 3 :
                                                   (cfg.w_prec == PREC8) ? (k | 1) : k];
      else
        for (int s = 0; s < 6; s++) begin
          ex[s] = ex[(s / gs) * gs]; ew[s][0] = ew[(s / gs) * gs][0];
        end
      for (int q = 0; q < 6; q++) begin
        psum[q] = ($urandom % 2) ? rnd_fp(-4, 4) : 32'h0;
        exact[q] = f2r(psum[q]); mag[q] = (exact[q] < 0) ? -exact[q] : exact[q];
      end
      steps = 1 + int'($urandom % 4);
      for (int st = 0; st < steps; st++) begin
        @(negedge clk);
        for (int s = 0; s < 6; s++) begin
          for (int i = 0; i < 9; i++) xb[s][i*16 +: 16] = 16'($urandom);
          for (int c = 0; c < 4; c++) for (int i = 0; i < 9; i++) wb[s][c][i*16 +: 16] = 16'($urandom);
        end
        iv = 1; first = (st == 0); last = (st == steps - 1);
        for (int s = 0; s < 6; s++)
          for (int i = 0; i < 9; i++)
            for (int c = 0; c < ncx; c++)
              for (int g = 0; g < ngr; g++) begin
                if (cfg.mode == MODE_3D) begin
                  // PU columns of weight group g: top PU index 3 - g*(nw/4)
                  sc = int'(ex[0]) + int'(ew[0][3 - g * (nw / 4)]) - 254 - (nx - 2) - (nw - 2);
                  o = (cfg.w_prec == PREC4) ? 3 - g : g;
                end else begin
                  sc = int'(ex[s]) + int'(ew[s][0]) - 254 - (nx - 2) - (nw - 2);
                  o = s / gs;
                end
                t = real'(fld(xb[s], i*16 + 16 - nx*(c+1), nx, cfg.x_signed) *
                          fld(wb[s][c], i*16 + 16 - nw*(g+1), nw, cfg.w_signed)) * pow2(sc);
                exact[o] += t;
                mag[o] += (t < 0) ? -t : t;
              end
      end
      @(negedge clk);
      iv = 0; first = 0; last = 0;
      checks++;
      if (res_valid) failures++;
      @(negedge clk);
      checks++;
      if (!res_valid || int'(n_out) != nexp) begin
        failures++;
        $display("n=%0d res_valid=%0b n_out=%0d exp=%0d", n, res_valid, n_out, nexp);
      end
      for (int q = 0; q < nexp; q++) begin
        tol = mag[q] * pow2(-18) + 48.0 * steps * pow2(int'(ex[q * gs]) + int'(ew[q * gs][0]) - 254 - 28);
        t = f2r(res[q]) - exact[q];
        if (t < 0) t = -t;
        checks++;
        if (t > tol) begin
          failures++;
          if (failures < 10) $display("n=%0d cfg=%p q=%0d dut=%g ref=%g tol=%g", n, cfg, q, f2r(res[q]), exact[q], tol);
        end
      end
      @(negedge clk);
      checks++;
      if (res_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
