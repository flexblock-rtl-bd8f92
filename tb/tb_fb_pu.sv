// tb_fb_pu: checks the processing unit against a dot product of whole
// elements. The reference reads each 16-bit slot as one 16-bit, two 8-bit or
// four 4-bit input channels (channel 0 in the upper bits), multiplies every
// channel with its own weight sub-word and sums, without any sub-word split.
module tb_fb_pu;
  import fb_pkg::*;
  int checks = 0, failures = 0;
  logic [143:0] xb;
  logic [35:0]  wsl [4];
  prec_e        xp;
  logic         xsg, wsg;
  logic signed [27:0] sum;

  fb_pu dut (.x_bus(xb), .w_slice(wsl), .x_prec(xp), .x_signed(xsg), .w_sgn(wsg), .sum(sum));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sx(longint v, int bits, bit sg);
    if (sg && v[bits-1]) return v - (longint'(1) << bits);
    return v;
  endfunction

  initial begin
    longint r, xe, we;
    int nb, nch;
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 9; i++) xb[i*16 +: 16] = 16'($urandom);
      for (int c = 0; c < 4; c++) wsl[c] = 36'({$urandom, $urandom});
      xp  = prec_e'(n % 3);
      xsg = 1'($urandom); wsg = 1'($urandom);
      if (n < 6) begin xb = {9{16'h8000}}; for (int c = 0; c < 4; c++) wsl[c] = {9{4'h8}}; xsg = 1; wsg = 1; end
      #1;
      nb  = (xp == PREC16) ? 16 : (xp == PREC8) ? 8 : 4;
      nch = 16 / nb;
      r = 0;
      for (int i = 0; i < 9; i++)
        for (int c = 0; c < nch; c++) begin
          xe = sx(longint'(16'(xb >> (i*16 + 16 - nb*(c+1)))) & ((longint'(1) << nb) - 1), nb, xsg);
          we = sx(longint'(wsl[c][i*4 +: 4]), 4, wsg);
          r += xe * we;
        end
      checks++;
      if (longint'(sum) != r) begin
        failures++;
        if (failures < 10) $display("mismatch prec=%0d sum=%0d ref=%0d", xp, sum, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
