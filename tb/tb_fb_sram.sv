// tb_fb_sram: on-chip buffer macro model at its default size (912-bit words,
// 75 words). Random writes against a shadow array; reads return the data one
// cycle after re, hold while re is low, and out-of-range reads return zero.
module tb_fb_sram;
  int checks = 0, failures = 0;
  localparam int W = 912, D = 75;
  logic clk = 0, we = 0, re = 0;
  logic [6:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] shadow [D];
  bit written [D];

  fb_sram dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .re(re), .raddr(raddr), .rdata(rdata));
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    logic [W-1:0] exp_d;
    int a;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 7'(i); wdata = rnd(); shadow[i] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = 1'($urandom); a = int'($urandom % D);
      waddr = 7'(a); wdata = rnd();
      re = 1; raddr = 7'($urandom % (D + 10));
      exp_d = (int'(raddr) < D) ? shadow[raddr] : '0;
      if (we && waddr == raddr) exp_d = shadow[raddr];   // read returns the old word
      @(posedge clk);
      if (we) shadow[a] = wdata;
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (rdata !== exp_d) failures++;
      @(negedge clk);
      checks++;
      if (rdata !== exp_d) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
