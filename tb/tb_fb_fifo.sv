// tb_fb_fifo: FIFO between the masking and weight update units. Random
// valid/ready on both sides against a queue model: order and data, count,
// in_ready dropping when full and out_valid when empty; counts full and
// empty cycles so both are exercised.
module tb_fb_fifo;
  int checks = 0, failures = 0;
  localparam int W = 594, D = 4;
  logic clk = 0, rst_n = 0, iv = 0, ir, ov, ordy = 0;
  logic [W-1:0] id, od;
  logic [2:0] count;
  logic [W-1:0] q [$];
  int fulls = 0, empties = 0;

  fb_fifo dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .in_ready(ir), .in_data(id),
               .out_valid(ov), .out_ready(ordy), .out_data(od), .count(count));
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      iv = ($urandom % 4) != 0 ^ (n / 500) % 2;
      ordy = ($urandom % 4) != 0 ^ (n / 700) % 2;
      for (int i = 0; i < W; i += 32) id[i +: 32] = $urandom;
      #1;
      checks++;
      if (int'(count) != q.size() || ir != (q.size() < D) || ov != (q.size() > 0)) failures++;
      if (ov) begin
        checks++;
        if (od !== q[0]) failures++;
      end
      if (!ir) fulls++;
      if (!ov) empties++;
      @(posedge clk);
      if (ov && ordy) void'(q.pop_front());
      if (iv && ir) q.push_back(id);
    end
    checks++;
    if (fulls == 0 || empties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
