// tb_fb_fp32_mul: FP32 multiplier against a bit-exact real model (the
// product of two 24-bit significands is exact in double precision).
module tb_fb_fp32_mul;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] a, b, p;

  fb_fp32_mul dut (.a(a), .b(b), .p(p));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [31:0] x, logic [31:0] y);
    logic [31:0] r;
    a = x; b = y;
    #1;
    r = r2f(f2r(x) * f2r(y));
    checks++;
    if (!feq(p, r)) begin
      failures++;
      if (failures < 10) $display("a=%h b=%h dut=%h ref=%h", x, y, p, r);
    end
  endtask

  initial begin
    chk(32'h0, 32'h3f800000); chk(32'h7f000000, 32'h7f000000); chk(32'h00800000, 32'h3e800000);
    for (int n = 0; n < 20000; n++) chk(rnd_fp(-40, 40), rnd_fp(-40, 40));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
