// tb_fb_int2fp: integer-to-FP32 converter against a bit-exact real model.
// Random signed inputs of random width with random scale exponents, plus
// zero, the most negative value, rounding ties, underflow and overflow.
module tb_fb_int2fp;
  import fb_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic signed [R2_W-1:0] in;
  logic signed [SC_W-1:0] sc;
  logic [31:0] out;

  fb_int2fp dut (.in(in), .sc(sc), .out(out));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(longint v, int s);
    logic [31:0] r;
    in = R2_W'(v); sc = SC_W'(s);
    #1;
    r = r2f(real'(v) * pow2(s));
    checks++;
    if (!feq(out, r)) begin
      failures++;
      if (failures < 10) $display("in=%0d sc=%0d dut=%h ref=%h", v, s, out, r);
    end
  endtask

  initial begin
    longint v;
    chk(0, 0); chk(1, 0); chk(-1, -10);
    chk(-(longint'(1) << 41), 0); chk((longint'(1) << 41) - 1, 0);
    chk(33554433, 0);  // 2^25+1: tie below, rounds to even
    chk(33554435, 0);  // 2^25+3: tie, rounds up
    chk(5, -140);      // underflow to zero
    chk(5, 200);       // overflow to infinity
    for (int n = 0; n < 20000; n++) begin
      int w = 1 + int'($urandom % 42);
      v = longint'({$urandom, $urandom}) >>> (64 - w);
      chk(v, int'($urandom % 200) - 100);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
