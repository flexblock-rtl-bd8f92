// tb_fb_wu: weight update unit. With wu_en each beat of gradients is paired
// with a beat of weights and w - eta*g is produced (bit-exact model, two FP32
// roundings); without wu_en the data passes unchanged and no weights are
// taken. Random valid/ready on all three handshakes against queue models;
// counts output backpressure and weight-starved cycles.
module tb_fb_wu;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, iv = 0, ir, wv = 0, wr, ov, ordy = 0;
  logic [31:0] eta;
  logic [31:0] id [18];
  logic [31:0] wd [18];
  logic [31:0] od [18];
  logic [17:0] im, om;
  int bp = 0, starve = 0;

  fb_wu dut (.clk(clk), .rst_n(rst_n), .wu_en(en), .eta(eta), .in_valid(iv), .in_ready(ir),
             .in_data(id), .in_mask(im), .w_valid(wv), .w_ready(wr), .w_data(wd),
             .out_valid(ov), .out_ready(ordy), .out_data(od), .out_mask(om));
  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ex [$];
    logic [31:0] e [18];
    int got, sent;
    eta = rnd_fp(-8, -4);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 8; ph++) begin
      en = 1'(ph % 2);
      got = 0; sent = 0; ex.delete();
      for (int n = 0; n < 400; n++) begin
        @(negedge clk);
        iv = $urandom % 4 != 0; wv = $urandom % 3 != 0; ordy = $urandom % 3 != 0;
        im = 18'($urandom);
        for (int l = 0; l < 18; l++) begin id[l] = rnd_fp(-6, 6); wd[l] = rnd_fp(-2, 2); end
        #1;
        checks++;
        if (!en && wr) failures++;
        if (en && iv && ir != ((!ov || ordy) && wv)) failures++;
        if (en && iv && !wv) starve++;
        if (ov && !ordy) bp++;
        if (ov && ordy) begin
          checks++;
          for (int l = 0; l < 18; l++) if (!feq(od[l], ex[l])) failures++;
          if (om != 18'(ex[18])) failures++;
          repeat (19) void'(ex.pop_front());
          got++;
        end
        if (iv && ir) begin
          for (int l = 0; l < 18; l++)
            ex.push_back(en ? r2f(f2r(wd[l]) - f2r(r2f(f2r(eta) * f2r(id[l])))) : id[l]);
          ex.push_back(32'(im));
          sent++;
        end
        @(posedge clk);
      end
      // drain
      @(negedge clk); iv = 0; ordy = 1;
      @(negedge clk);
      checks++;
      if (ov) failures++;
    end
    checks++;
    if (bp == 0 || starve == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
