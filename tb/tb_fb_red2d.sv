// tb_fb_red2d: 2D reduction unit against a bit-exact model: per-subcore
// 4-way integer sum with weight sub-word shifts, bit truncation (only the
// X16W16 case drops 3 bits), selective 6-way tree for the three cluster
// settings, conversion with the group's scale exponent and accumulation over
// several steps with psum_in on the first step.
module tb_fb_red2d;
  import fb_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, iv = 0, first = 0;
  prec_e xp, wp;
  cluster_e cl;
  logic signed [27:0] pu [6][4];
  logic signed [11:0] sc [6];
  logic [31:0] psum [6];
  logic [31:0] out [6];
  logic [2:0] n_out;
  int dropped = 0;

  fb_red2d dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .acc_first(first), .x_prec(xp),
                .w_prec(wp), .cluster(cl), .pu_in(pu), .sc(sc), .psum_in(psum), .out(out),
                .n_out(n_out));
  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] acc [6];
    longint t4 [6];
    longint g;
    int steps, ng, gs, dr, sh;
    xp = PREC16; wp = PREC16; cl = CL1;
    for (int s = 0; s < 6; s++) begin sc[s] = '0; psum[s] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 900; n++) begin
      xp = prec_e'(n % 3); wp = prec_e'((n / 3) % 3); cl = cluster_e'((n / 9) % 3);
      ng = (cl == CL1) ? 6 : (cl == CL3) ? 2 : 1;
      gs = 6 / ng;
      dr = prec_bits(xp) + prec_bits(wp) + 3 - 32;
      if (dr < 0) dr = 0;
      steps = 1 + int'($urandom % 5);
      for (int s = 0; s < 6; s++) psum[s] = (n % 2) ? rnd_fp(-5, 20) : 32'h0;
      for (int t = 0; t < steps; t++) begin
        @(negedge clk);
        iv = 1; first = (t == 0);
        // keep PU outputs in the range a PU can produce at this input precision
        sh = 31 - (prec_bits(xp) + 5);
        for (int s = 0; s < 6; s++) begin
          sc[s] = 12'(int'($urandom % 30) - 25);
          t4[s] = 0;
          for (int k = 0; k < 4; k++) begin
            pu[s][k] = 28'(int'($urandom) >>> (sh + $urandom % 10));
            t4[s] += longint'(pu[s][k]) <<< w_shift(wp, k);
          end
          t4[s] = t4[s] >>> dr;
        end
        for (int q = 0; q < ng; q++) begin
          g = 0;
          for (int s = q * gs; s < (q + 1) * gs; s++) g += t4[s];
          acc[q] = r2f(f2r(r2f(real'(g) * pow2(int'(sc[q * gs]) + dr))) +
                       f2r(first ? psum[q] : acc[q]));
        end
        if (dr > 0) dropped++;
      end
      @(negedge clk);
      iv = 0;
      checks++;
      if (int'(n_out) != ng) failures++;
      for (int q = 0; q < ng; q++) begin
        checks++;
        if (!feq(out[q], acc[q])) begin
          failures++;
          if (failures < 10) $display("n=%0d q=%0d dut=%h ref=%h", n, q, out[q], acc[q]);
        end
      end
    end
    checks++;
    if (dropped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
