// tb_fb_mult4: exhaustive check of the 4b x 4b sub-word multiplier.
// Every operand pair and every signed/unsigned combination is compared with
// the product of the operands read as two's complement (signed sub-word) or
// unsigned (other sub-words).
module tb_fb_mult4;
  int checks = 0, failures = 0;
  logic [3:0] x, w;
  logic xs, ws;
  logic signed [9:0] p;

  fb_mult4 dut (.x(x), .w(w), .x_sgn(xs), .w_sgn(ws), .p(p));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xv, wv;
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          x = 4'(i); w = 4'(j); xs = s[0]; ws = s[1];
          #1;
          xv = (xs && i >= 8) ? i - 16 : i;
          wv = (ws && j >= 8) ? j - 16 : j;
          checks++;
          if (int'(p) != xv * wv) begin
            failures++;
            if (failures < 10) $display("mismatch x=%0d w=%0d s=%0d p=%0d", i, j, s, p);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
