// tb_fb_fsm: sequencer. Random group/step counts, bases and strides; checks
// the read address sequence (input base + g*stride + t, weight likewise,
// output buffer word g), core_valid/first/last one cycle after each read,
// stalls at group starts while the core output buffer space is low (and only
// with post-processing on), the stall counter, and busy/done after all
// results have returned (results are returned by a model of the core delay).
module tb_fb_fsm;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, post_en = 0, res_valid;
  logic [15:0] ng, ns, ib, wb, igs, wgs, space, stall_cycles, res_count;
  logic buf_re, cv, cf, cl, busy, done;
  logic [7:0] ia, wa, oa;
  int stalls_seen = 0;

  fb_fsm dut (.clk(clk), .rst_n(rst_n), .start(start), .n_groups(ng), .n_steps(ns),
              .in_base(ib), .wt_base(wb), .in_gstride(igs), .wt_gstride(wgs),
              .post_en(post_en), .obuf_space(space), .res_valid(res_valid), .buf_re(buf_re),
              .in_raddr(ia), .wt_raddr(wa), .ob_raddr(oa), .core_valid(cv), .core_first(cf),
              .core_last(cl), .busy(busy), .done(done), .stall_cycles(stall_cycles),
              .res_count(res_count));
  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // core model: res_valid two cycles after core_valid with core_last
  logic l1, l2;
  always @(posedge clk) begin
    l1 <= cv & cl;
    l2 <= l1;
  end
  assign res_valid = l2;

  initial begin
    int g, t, nst, exp_first, exp_last;
    bit pend, pf, pl;
    ng = 1; ns = 1; ib = 0; wb = 0; igs = 0; wgs = 0; space = 100;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      ng = 16'(1 + $urandom % 12); ns = 16'(1 + $urandom % 5);
      ib = 16'($urandom % 20); wb = 16'($urandom % 20);
      igs = 16'($urandom % 6); wgs = 16'($urandom % 3);
      post_en = 1'($urandom);
      start = 1;
      @(negedge clk);
      start = 0;
      g = 0; t = 0; nst = 0; pend = 0;
      while (!done) begin
        space = ($urandom % 4 == 0) ? 16'(5) : 16'(100);
        #1;
        // previous cycle's read must show up as core_valid now
        checks++;
        if (cv != pend || (pend && (cf != pf || cl != pl))) failures++;
        pend = 0;
        if (g < int'(ng)) begin
          if (t == 0 && post_en && space < 24) begin
            checks++;
            if (buf_re) failures++;
            nst++; stalls_seen++;
          end else begin
            checks++;
            if (!buf_re || int'(ia) != (int'(ib) + g * int'(igs) + t) % 256 ||
                int'(wa) != (int'(wb) + g * int'(wgs) + t) % 256 || int'(oa) != g % 256) begin
              failures++;
              if (failures < 5) $display("n=%0d g=%0d t=%0d ia=%0d wa=%0d", n, g, t, ia, wa);
            end
            pend = 1; pf = (t == 0); pl = (t == int'(ns) - 1);
            if (t == int'(ns) - 1) begin t = 0; g++; end else t++;
          end
        end else begin
          checks++;
          if (buf_re) failures++;
        end
        @(negedge clk);
      end
      checks++;
      if (int'(stall_cycles) != nst) failures++;
      @(negedge clk);
      checks++;
      if (busy) failures++;
    end
    checks++;
    if (stalls_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
