// tb_fb_mask: masking unit. Data and lane mask pass with one cycle of latency;
// the bitmap marks valid lanes whose value is positive and nonzero (ReLU
// outputs that survive), held while in_valid is low.
module tb_fb_mask;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, iv = 0, ov;
  logic [31:0] id [18];
  logic [31:0] od [18];
  logic [17:0] im, om, bm;

  fb_mask dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .in_data(id), .in_mask(im),
               .out_valid(ov), .out_data(od), .out_mask(om), .bitmap(bm));
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [17:0] eb;
    logic [31:0] ed [18];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      iv = 1; im = 18'($urandom);
      for (int l = 0; l < 18; l++) begin
        case ($urandom % 4)
          0: id[l] = 32'h0;
          1: id[l] = {1'b1, 31'($urandom)};
          default: id[l] = {1'b0, 8'(1 + $urandom % 254), 23'($urandom)};
        endcase
        eb[l] = im[l] && !id[l][31] && id[l][30:23] != 0;
        ed[l] = id[l];
      end
      @(negedge clk);
      iv = 0; id[0] = ~id[0];
      checks++;
      if (!ov || bm != eb || om != im) failures++;
      for (int l = 0; l < 18; l++) if (od[l] != ed[l]) failures++;
      @(negedge clk);
      checks++;
      if (ov || bm != eb) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
