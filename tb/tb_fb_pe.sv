// tb_fb_pe: random check of the processing element (sum of nine products).
module tb_fb_pe;
  int checks = 0, failures = 0;
  logic [8:0][3:0] x, w;
  logic xs, ws;
  logic signed [13:0] sum;

  fb_pe dut (.x(x), .w(w), .x_sgn(xs), .w_sgn(ws), .sum(sum));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r, xv, wv;
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 9; i++) begin
        x[i] = 4'($urandom); w[i] = 4'($urandom);
        if (n < 4) begin x[i] = 4'h8; w[i] = (n % 2) ? 4'h8 : 4'hF; end  // extremes
      end
      xs = 1'($urandom); ws = 1'($urandom);
      if (n < 4) begin xs = 1'b1; ws = n[1]; end
      #1;
      r = 0;
      for (int i = 0; i < 9; i++) begin
        xv = (xs && x[i][3]) ? int'(x[i]) - 16 : int'(x[i]);
        wv = (ws && w[i][3]) ? int'(w[i]) - 16 : int'(w[i]);
        r += xv * wv;
      end
      checks++;
      if (int'(sum) != r) begin
        failures++;
        if (failures < 10) $display("mismatch sum=%0d ref=%0d", sum, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
