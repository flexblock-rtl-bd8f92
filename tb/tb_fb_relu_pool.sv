// tb_fb_relu_pool: ReLU / ReLU-alpha (clipped at alpha) and max/average
// pooling over windows of 2^pool_log2 beats. For each out_sel mode a random
// stream is compared with a model: outputs per beat for the activation modes,
// one output per window for the pooling modes (average = FP32 running sum of
// the window divided by the window size through the exponent).
module tb_fb_relu_pool;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, act = 0, psel = 0, iv = 0, ov;
  logic [1:0] osel = 0, plog = 0;
  logic [31:0] alpha;
  logic [31:0] id [18];
  logic [31:0] od [18];
  logic [17:0] im, om;
  int outs [4];

  fb_relu_pool dut (.clk(clk), .rst_n(rst_n), .act_sel(act), .pool_sel(psel), .out_sel(osel),
                    .pool_log2(plog), .alpha(alpha), .in_valid(iv), .in_data(id), .in_mask(im),
                    .out_valid(ov), .out_data(od), .out_mask(om));
  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] relu(logic [31:0] v);
    return (v[31] || v[30:23] == 0) ? 32'h0 : v;
  endfunction
  function automatic logic [31:0] act_out(logic [31:0] v, bit sel_clip);
    if (!sel_clip) return act ? 32'h0 : relu(v);
    if (!act) return 32'h0;
    return (f2r(relu(v)) > f2r(alpha)) ? alpha : relu(v);
  endfunction

  initial begin
    logic [31:0] mx [18];
    logic [31:0] sm [18];
    logic [31:0] ex [18];
    logic [31:0] p;
    int win, cnt;
    bit due;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 48; t++) begin
      @(negedge clk);
      osel = 2'(t % 4); act = 1'((t / 4) % 2); psel = act; plog = 2'((t / 8) % 3);
      alpha = rnd_fp(-1, 3);
      win = 1 << plog; cnt = 0;
      for (int n = 0; n < 40 * win || cnt != 0; n++) begin
        @(negedge clk);
        iv = ($urandom % 4) != 0; im = 18'($urandom);
        for (int l = 0; l < 18; l++) id[l] = rnd_fp(-4, 4);
        due = 0;
        if (iv) begin
          if (osel == 0 || osel == 3) begin
            for (int l = 0; l < 18; l++) ex[l] = act_out(id[l], osel == 3);
            due = 1;
          end else begin
            for (int l = 0; l < 18; l++) begin
              p = act_out(id[l], psel);
              if (cnt == 0 || f2r(p) > f2r(mx[l])) mx[l] = p;
              sm[l] = r2f(((cnt == 0) ? 0.0 : f2r(sm[l])) + f2r(p));
            end
            cnt++;
            if (cnt == win) begin
              cnt = 0; due = 1;
              for (int l = 0; l < 18; l++) ex[l] = (osel == 1) ? mx[l] : r2f(f2r(sm[l]) / win);
            end
          end
        end
        @(negedge clk);
        iv = 0;
        checks++;
        if (ov != due) failures++;
        if (due) begin
          outs[osel]++;
          checks++;
          if (om != im) failures++;
          for (int l = 0; l < 18; l++) if (!feq(od[l], ex[l])) begin
            failures++;
            if (failures < 10) $display("t=%0d l=%0d dut=%h ref=%h", t, l, od[l], ex[l]);
          end
        end
      end
    end
    for (int m = 0; m < 4; m++) begin checks++; if (outs[m] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
