// tb_fb_red3d: 3D reduction unit against a bit-exact model. Each output is
// accumulated over a random number of steps (first step adds psum_in), with
// random PU outputs and scale exponents; after the last step the selective
// FP32 tree outputs are compared for W16 (1 output), W8 (2) and W4 (4).
module tb_fb_red3d;
  import fb_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, iv = 0, first = 0;
  prec_e wp;
  logic signed [27:0] pu [6][4];
  logic signed [11:0] sc [4];
  logic [31:0] psum [4];
  logic [31:0] out [4];
  logic [2:0] n_out;

  fb_red3d dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .acc_first(first), .w_prec(wp),
                .pu_in(pu), .sc(sc), .psum_in(psum), .out(out), .n_out(n_out));
  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // column that receives psum_in[o] on the first step
  function automatic logic [31:0] ps_col(prec_e p, int k);
    case (p)
      PREC16:  return (k == 3) ? psum[0] : 32'h0;
      PREC8:   return (k == 3) ? psum[0] : (k == 1) ? psum[1] : 32'h0;
      default: return psum[k];
    endcase
  endfunction

  initial begin
    logic [31:0] acc [4];
    logic [31:0] ref_o [4];
    longint cs;
    int steps, nexp;
    wp = PREC16;
    for (int k = 0; k < 4; k++) begin sc[k] = '0; psum[k] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      wp = prec_e'(n % 3);
      steps = 1 + int'($urandom % 6);
      for (int k = 0; k < 4; k++) psum[k] = (n % 2) ? rnd_fp(-5, 15) : 32'h0;
      for (int t = 0; t < steps; t++) begin
        @(negedge clk);
        iv = 1; first = (t == 0);
        for (int k = 0; k < 4; k++) begin
          sc[k] = 12'(int'($urandom % 30) - 20);
          cs = 0;
          for (int s = 0; s < 6; s++) begin
            pu[s][k] = 28'(int'($urandom) >>> (5 + $urandom % 20));
            cs += longint'(pu[s][k]);
          end
          acc[k] = r2f(f2r(r2f(real'(cs) * pow2(int'(sc[k])))) +
                       f2r(first ? ps_col(wp, k) : acc[k]));
        end
      end
      @(negedge clk);
      iv = 0;
      case (wp)
        PREC16: begin
          ref_o[0] = r2f(f2r(r2f(f2r(acc[3]) + f2r(acc[2]))) + f2r(r2f(f2r(acc[1]) + f2r(acc[0]))));
          nexp = 1;
        end
        PREC8: begin
          ref_o[0] = r2f(f2r(acc[3]) + f2r(acc[2]));
          ref_o[1] = r2f(f2r(acc[1]) + f2r(acc[0]));
          nexp = 2;
        end
        default: begin
          for (int k = 0; k < 4; k++) ref_o[k] = acc[k];
          nexp = 4;
        end
      endcase
      checks++;
      if (int'(n_out) != nexp) failures++;
      for (int k = 0; k < nexp; k++) begin
        checks++;
        if (!feq(out[k], ref_o[k])) begin
          failures++;
          if (failures < 10) $display("n=%0d k=%0d dut=%h ref=%h", n, k, out[k], ref_o[k]);
        end
      end
      // outputs hold while in_valid is low
      @(negedge clk);
      checks++;
      if (!feq(out[0], ref_o[0])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
