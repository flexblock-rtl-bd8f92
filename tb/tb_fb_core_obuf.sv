// tb_fb_core_obuf: core output buffer that repacks 1..6 FP32 results per
// write into 18-lane rows. Random write sizes and random out_ready against a
// word-queue model; checks row data, lane masks, padding of a flushed partial
// row (padding lanes invalid), `space`, and that the writer only writes when
// space allows. Counts backpressure and flush events.
module tb_fb_core_obuf;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wv = 0, fl = 0, ov, ordy = 0;
  logic [2:0] wn;
  logic [31:0] wd [6];
  logic [15:0] space;
  logic [31:0] od [18];
  logic [17:0] om;
  logic [32:0] q [$];        // {valid, word}
  int flushes = 0, stalls = 0;

  fb_core_obuf dut (.clk(clk), .rst_n(rst_n), .wr_valid(wv), .wr_n(wn), .wr_data(wd),
                    .flush(fl), .space(space), .out_valid(ov), .out_ready(ordy),
                    .out_data(od), .out_mask(om));
  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_w, pad;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      n_w = 1 + int'($urandom % 6);
      wn = 3'(n_w);
      for (int j = 0; j < 6; j++) wd[j] = $urandom;
      wv = ($urandom % 3 != 0) && (int'(space) >= n_w + 18);
      if (int'(space) < n_w + 18) stalls++;
      fl = ($urandom % 40) == 0;
      ordy = ((n / 400) % 2) ? ($urandom % 12 == 0) : ($urandom % 3 != 0);
      #1;
      checks++;
      if (int'(space) != 144 - q.size() || ov != (q.size() >= 18)) failures++;
      if (ov) for (int l = 0; l < 18; l++) begin
        checks++;
        if (om[l] != q[l][32] || (om[l] && od[l] != q[l][31:0])) failures++;
      end
      @(posedge clk);
      if (ov && ordy) repeat (18) void'(q.pop_front());
      if (wv) for (int j = 0; j < n_w; j++) q.push_back({1'b1, wd[j]});
      if (fl) begin
        pad = (q.size() % 18 == 0) ? 0 : 18 - q.size() % 18;
        if (pad != 0) flushes++;
        repeat (pad) q.push_back(33'h0);
      end
    end
    checks++;
    if (flushes == 0 || stalls == 0) begin failures++; $display("flushes=%0d stalls=%0d", flushes, stalls); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
