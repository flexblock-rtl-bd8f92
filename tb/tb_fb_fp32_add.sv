// tb_fb_fp32_add: FP32 adder against a bit-exact real model. Random operands
// with close and distant exponents, equal magnitudes of opposite sign (exact
// cancellation), zero operands, overflow and results that flush to zero.
module tb_fb_fp32_add;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] a, b, s;

  fb_fp32_add dut (.a(a), .b(b), .s(s));

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
    r = r2f(f2r(x) + f2r(y));
    checks++;
    if (!feq(s, r)) begin
      failures++;
      if (failures < 10) $display("a=%h b=%h dut=%h ref=%h", x, y, s, r);
    end
  endtask

  initial begin
    logic [31:0] x;
    chk(32'h0, 32'h0); chk(32'h3f800000, 32'h0); chk(32'h0, 32'hc0000000);
    chk(32'h7f7fffff, 32'h7f7fffff);             // overflow
    chk(32'h00800001, 32'h80800000);             // result below normal range
    for (int n = 0; n < 30000; n++) begin
      case (n % 4)
        0: chk(rnd_fp(-20, 20), rnd_fp(-20, 20));
        1: chk(rnd_fp(-3, 3), rnd_fp(-3, 3));
        2: begin x = rnd_fp(-30, 30); chk(x, {~x[31], x[30:0]}); end
        default: begin x = rnd_fp(-10, 10); chk(x, {~x[31], x[30:23], x[22:0] ^ 23'($urandom % 16)}); end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
