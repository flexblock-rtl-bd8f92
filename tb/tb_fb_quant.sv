// tb_fb_quant: quantisation/packing unit. Random BFP beats at 4, 8 and 16
// bits with random block ends and DRAM backpressure; the 288-bit DRAM words
// are compared with a model that packs 4, 2 or 1 beats of 18 p-bit lanes per
// word (lane 0 in the low bits, earlier beats lower) and closes a word early
// at the end of a block.
module tb_fb_quant;
  import fb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, iv = 0, ir, last = 0, dv, dr = 0;
  prec_e prec;
  logic [15:0] im [18];
  logic [7:0] iexp, dexp;
  logic [287:0] dd;
  logic [2:0] dbeats;
  logic [287+11:0] q [$];
  int early = 0, bp = 0;

  fb_quant dut (.clk(clk), .rst_n(rst_n), .prec(prec), .in_valid(iv), .in_ready(ir),
                .in_mant(im), .in_exp(iexp), .in_last(last), .dram_valid(dv), .dram_ready(dr),
                .dram_data(dd), .dram_exp(dexp), .dram_beats(dbeats));
  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output side: compare accepted words
  always @(negedge clk) if (rst_n) begin
    dr = $urandom % 3 != 0;
    if (dv && !dr) bp++;
    if (dv && dr) begin
      checks++;
      if (q.size() == 0 || {dd, dexp, dbeats} != q[0]) begin failures++; $display("t=%0t q=%0d beats=%0d", $time, q.size(), dbeats); end
      if (q.size() != 0) void'(q.pop_front());
    end
  end

  initial begin
    logic [287:0] w;
    int nb, p, per, pb;
    bit ok;
    prec = PREC4;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      prec = prec_e'(n % 3); p = prec_bits(prec); per = (p == 4) ? 4 : (p == 8) ? 2 : 1;
      nb = 1 + int'($urandom % 12);
      iexp = 8'($urandom);
      w = '0; pb = 0;
      for (int b = 0; b < nb; b++) begin
        for (int l = 0; l < 18; l++) im[l] = 16'($urandom);
        last = (b == nb - 1);
        do begin
          @(negedge clk); #1 iv = 1; ok = ir;
          @(posedge clk);
        end while (!ok);
        #1 iv = 0;
        for (int l = 0; l < 18; l++) w[pb * 18 * p + l * p +: 16] = 16'(im[l] & ((1 << p) - 1));
        pb++;
        if (pb == per || last) begin
          if (pb != per) early++;
          q.push_back({w, iexp, 3'(pb)});
          w = '0; pb = 0;
        end
      end
    end
    repeat (20) @(posedge clk);
    checks++;
    if (q.size() != 0 || early == 0 || bp == 0) begin failures++; $display("left=%0d early=%0d bp=%0d", q.size(), early, bp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
