// tb_flexblock_top: end-to-end test of one FlexBlock core at its default
// sizes (no parameter overrides). The host side of the bench fills the input,
// weight and output buffers, programs the control registers and starts six
// layer runs that together cover every mode:
//   R1 3D X16W16 signed, 9 groups x 2 steps           DRAM data checked (ReLU, BFP8)
//   R2 3D X8W4, 150 groups, partial sums from the output buffer, ReLU-alpha,
//      DRAM held back most of the time                -> FSM stall, FIFO full
//   R3 2D X4W8 cluster 3, BN (a*x+b) and max pooling, BFP4, blocks of 36
//      (run sizes are chosen so pooling windows and BFP blocks close)
//   R4 2D X16W16 cluster 1 (bit truncation), results straight to the weight
//      update unit (w - eta*g), BFP precision from the dynamic precision
//      controller (loaded as 4 bit, raised at the epoch end by the ZSE count);
//      DRAM data checked
//   R5 3D X4W8 average pooling        R6 2D X8W16 cluster 6
//   R7 3D X16W16 on input words the host wrote while R6 was running from
//      another region of the input buffer (double buffering by address)
// After each run the output buffer is read back through the host port and
// every result is compared with an element-level model (sum of X*W*2^scale
// plus the stored partial sum, with an FP32 rounding tolerance). Each
// mechanism is counted (stall cycles, both modes, all precisions, psum reuse,
// weight-update bypass, pooled outputs, bitmap beats, precision change, FIFO
// full, DRAM backpressure) and one that never happens is a failure.
module tb_flexblock_top;
  import fb_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;

  localparam int IN_W = 912, WT_W = 3648, OB_W = 192;
  logic clk = 0, rst_n = 0;
  logic reg_we = 0; logic [7:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic ibuf_we = 0; logic [6:0] ibuf_waddr = 0; logic [IN_W-1:0] ibuf_wdata = '0;
  logic wbuf_we = 0; logic [4:0] wbuf_waddr = 0; logic [WT_W-1:0] wbuf_wdata = '0;
  logic obuf_we = 0; logic [7:0] obuf_addr = 0; logic [OB_W-1:0] obuf_wdata = '0, obuf_rdata;
  logic wu_w_valid = 0, wu_w_ready;
  logic [31:0] wu_w_data [18];
  logic dram_valid, dram_ready = 1;
  logic [287:0] dram_data; logic [7:0] dram_exp; logic [2:0] dram_beats;
  logic bitmap_valid; logic [17:0] bitmap;
  logic busy, done; logic [15:0] stall_cycles;
  logic [31:0] zse_count, elem_count;
  prec_e dyn_prec;
  logic [31:0] bn_sum [18];
  logic [31:0] bn_max [18];
  logic [31:0] bn_min [18];

  flexblock_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- shadow memories and monitors ----------------
  logic [IN_W-1:0] in_sh [75];
  logic [WT_W-1:0] wt_sh [18];
  logic [OB_W-1:0] ob_sh [170];
  logic [287:0] dq_data [$];
  logic [7:0]   dq_exp [$];
  logic [31:0]  wq [$];            // weights taken by the weight update unit
  int dram_words = 0, dram_bp = 0, fifo_full = 0, bitmaps = 0, wu_beats = 0;
  int dram_mode = 0;               // 0: accept always-ish, 1: mostly stalled
  int busy_cycles = 0;

  always @(posedge clk) if (rst_n) begin
    if (dram_valid && dram_ready) begin
      dq_data.push_back(dram_data); dq_exp.push_back(dram_exp); dram_words++;
    end
    if (dram_valid && !dram_ready) dram_bp++;
    if (32'(dut.u_ff.count) == 4) fifo_full++;
    if (bitmap_valid) bitmaps++;
    if (wu_w_valid && wu_w_ready) begin
      for (int l = 0; l < 18; l++) wq.push_back(wu_w_data[l]);
      wu_beats++;
    end
    if (busy) busy_cycles++;
  end

  always @(negedge clk) begin
    dram_ready = (dram_mode == 1) ? ($urandom % 10 == 0) : ($urandom % 4 != 0);
    if (!wu_w_valid || wu_w_ready) begin
      wu_w_valid = $urandom % 3 != 0;
      for (int l = 0; l < 18; l++) wu_w_data[l] = rnd_fp(-2, 2);
    end
  end

  // ---------------- host helpers ----------------
  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask

  function automatic longint fld(logic [143:0] b, int pos, int nb, bit sg);
    longint v = longint'(16'(b >> pos)) & ((longint'(1) << nb) - 1);
    if (sg && v[nb-1]) v -= (longint'(1) << nb);
    return v;
  endfunction

  task automatic fill_buffers();
    logic [7:0] e;
    for (int a = 0; a < 75; a++) begin
      e = 8'(122 + $urandom % 8);
      for (int i = 0; i < 864; i += 32) in_sh[a][i +: 32] = $urandom;
      for (int s = 0; s < 6; s++) in_sh[a][864 + 8*s +: 8] = e;
      @(negedge clk); ibuf_we = 1; ibuf_waddr = 7'(a); ibuf_wdata = in_sh[a];
    end
    @(negedge clk); ibuf_we = 0;
    for (int a = 0; a < 18; a++) begin
      e = 8'(122 + $urandom % 8);
      for (int i = 0; i < 3456; i += 32) wt_sh[a][i +: 32] = $urandom;
      for (int j = 0; j < 24; j++) wt_sh[a][3456 + 8*j +: 8] = e;
      @(negedge clk); wbuf_we = 1; wbuf_waddr = 5'(a); wbuf_wdata = wt_sh[a];
    end
    @(negedge clk); wbuf_we = 0;
  endtask

  task automatic write_obuf_random(int n);
    for (int a = 0; a < n; a++) begin
      for (int s = 0; s < 6; s++) ob_sh[a][s*32 +: 32] = rnd_fp(-3, 3);
      @(negedge clk); obuf_we = 1; obuf_addr = 8'(a); obuf_wdata = ob_sh[a];
    end
    @(negedge clk); obuf_we = 0;
  endtask

  task automatic read_obuf(int n);
    for (int a = 0; a < n; a++) begin
      @(negedge clk); obuf_addr = 8'(a);
      @(negedge clk); ob_sh[a] = obuf_rdata;
    end
  endtask

  // ---------------- element-level model of one run ----------------
  real ex_r [170][6];
  real mag_r [170][6];

  task automatic model(core_cfg_t c, int ng, int ns, int ib, int wb, int igs, int wgs, bit use_ps);
    int nx, nw, ncx, ngr, gs, o, sc, ia, wa;
    real t;
    logic [143:0] xs, wl;
    nx = prec_bits(c.x_prec); nw = prec_bits(c.w_prec);
    ncx = 16 / nx; ngr = 16 / nw;
    gs = (c.cluster == CL1) ? 1 : (c.cluster == CL3) ? 3 : 6;
    for (int g = 0; g < ng; g++) begin
      for (int q = 0; q < 6; q++) begin
        ex_r[g][q] = use_ps ? f2r(ob_sh[g][q*32 +: 32]) : 0.0;
        mag_r[g][q] = (ex_r[g][q] < 0) ? -ex_r[g][q] : ex_r[g][q];
      end
      for (int st = 0; st < ns; st++) begin
        ia = ib + g * igs + st; wa = wb + g * wgs + st;
        for (int s = 0; s < 6; s++)
          for (int i = 0; i < 9; i++)
            for (int ch = 0; ch < ncx; ch++)
              for (int gg = 0; gg < ngr; gg++) begin
                xs = in_sh[ia][s*144 +: 144];
                wl = wt_sh[wa][s*576 + ch*144 +: 144];
                if (c.mode == MODE_3D) begin
                  sc = int'(in_sh[ia][864 +: 8]) + int'(wt_sh[wa][3456 + 8*(3 - gg*(nw/4)) +: 8])
                       - 254 - (nx - 2) - (nw - 2);
                  o = (c.w_prec == PREC4) ? 3 - gg : gg;
                end else begin
                  sc = int'(in_sh[ia][864 + 8*s +: 8]) + int'(wt_sh[wa][3456 + 8*(s*4) +: 8])
                       - 254 - (nx - 2) - (nw - 2);
                  o = s / gs;
                end
                t = real'(fld(xs, i*16 + 16 - nx*(ch+1), nx, c.x_signed) *
                          fld(wl, i*16 + 16 - nw*(gg+1), nw, c.w_signed)) * pow2(sc);
                ex_r[g][o] += t;
                mag_r[g][o] += (t < 0) ? -t : t;
              end
      end
    end
  endtask

  function automatic int n_out_of(core_cfg_t c);
    if (c.mode == MODE_3D) return 16 / int'(prec_bits(c.w_prec));
    return (c.cluster == CL1) ? 6 : (c.cluster == CL3) ? 2 : 1;
  endfunction

  // compare the output buffer after a run with the model
  task automatic check_results(core_cfg_t c, int ng, string tag);
    int no = n_out_of(c), bad = 0;
    real d, tol;
    read_obuf(ng);
    for (int g = 0; g < ng; g++)
      for (int q = 0; q < no; q++) begin
        d = f2r(ob_sh[g][q*32 +: 32]) - ex_r[g][q];
        if (d < 0) d = -d;
        tol = mag_r[g][q] * pow2(-18) + pow2(-40);
        checks++;
        if (d > tol) begin
          failures++; bad++;
          if (bad < 4) $display("%s g=%0d q=%0d dut=%g ref=%g", tag, g, q, f2r(ob_sh[g][q*32 +: 32]), ex_r[g][q]);
        end
      end
  endtask

  // expected DRAM word (one 18-lane beat per word) for FP32 values v
  function automatic logic [287:0] bfp_word(logic [31:0] v [18], int nvalid, int p, output int es);
    logic [287:0] w;
    logic [23:0] sig;
    longint m;
    int sh;
    w = '0;
    es = 0;
    for (int l = 0; l < nvalid; l++) if (int'(v[l][30:23]) > es) es = int'(v[l][30:23]);
    for (int l = 0; l < nvalid; l++) begin
      sig = (v[l][30:23] == 0) ? 24'h0 : {1'b1, v[l][22:0]};
      sh = 25 - p + es - int'(v[l][30:23]);
      m = (sh >= 24) ? 0 : (longint'(sig) >> sh);
      if (v[l][31]) m = -m;
      w[l*p +: 16] = 16'(m & ((longint'(1) << p) - 1));
    end
    return w;
  endfunction

  // compare DRAM words with results of `vals` (in stream order) at precision p
  task automatic check_dram(logic [31:0] vals [$], int p, string tag);
    logic [31:0] v [18];
    logic [287:0] w, m;
    int nb = (vals.size() + 17) / 18, es, nv, bad = 0;
    checks++;
    if (dq_data.size() != nb) begin
      failures++;
      $display("%s dram words %0d expected %0d", tag, dq_data.size(), nb);
    end
    for (int b = 0; b < nb && b < dq_data.size(); b++) begin
      nv = (vals.size() - 18*b < 18) ? vals.size() - 18*b : 18;
      for (int l = 0; l < 18; l++) v[l] = (l < nv) ? vals[18*b + l] : 32'h0;
      w = bfp_word(v, nv, p, es);
      m = '0;
      for (int l = 0; l < nv; l++) m[l*p +: 16] = 16'((1 << p) - 1);
      checks++;
      if (((dq_data[b] ^ w) & m) != 0 || int'(dq_exp[b]) != es) begin
        failures++; bad++;
        if (bad < 4) $display("%s beat %0d exp %0d/%0d", tag, b, dq_exp[b], es);
      end
    end
  endtask

  task automatic run(core_cfg_t c, int ng, int ns, int ib, int wb, int igs, int wgs, logic [31:0] flags);
    wr(8'h00, {23'h0, c.cluster, c.mode, c.w_signed, c.x_signed, c.w_prec, c.x_prec});
    wr(8'h01, ng); wr(8'h02, ns); wr(8'h03, ib); wr(8'h04, wb); wr(8'h05, igs); wr(8'h06, wgs);
    wr(8'h07, flags);
    dq_data.delete(); dq_exp.delete(); wq.delete();
    wr(8'h0C, 32'h1);
    @(negedge clk);
    checks++;
    if (!busy) failures++;
    while (!done) @(negedge clk);
    // drain the post-processing chain
    begin
      int quiet = 0;
      while (quiet < 200) begin
        @(negedge clk);
        quiet = (dram_valid || dut.cob_valid || dut.u_ff.count != 0 || dut.wu_o_valid) ? 0 : quiet + 1;
      end
    end
  endtask

  // ---------------- the runs ----------------
  int modes_seen [2], xprec_seen [3], wprec_seen [3];
  int overlap_writes = 0;
  int psum_runs = 0, wu_src_runs = 0, pooled_words = 0, prec_changes = 0;

  initial begin
    core_cfg_t c;
    logic [31:0] vals [$];
    int no, stall0;
    logic [31:0] r, gr, w;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fill_buffers();

    // R1: 3D X16W16 signed, ReLU, BFP8 blocks of 18
    c = '{x_prec: PREC16, w_prec: PREC16, x_signed: 1, w_signed: 1, mode: MODE_3D, cluster: CL1};
    wr(8'h0A, {22'h0, 8'd18, 2'(PREC8)});
    dram_mode = 0;
    model(c, 9, 2, 0, 0, 2, 2, 0);
    run(c, 9, 2, 0, 0, 2, 2, 32'h2);
    check_results(c, 9, "R1");
    vals.delete();
    for (int g = 0; g < 9; g++) begin
      r = ob_sh[g][31:0];
      vals.push_back((r[31] || r[30:23] == 0) ? 32'h0 : r);
    end
    check_dram(vals, 8, "R1");
    modes_seen[0]++; xprec_seen[2]++; wprec_seen[2]++;

    // R2: 3D X8W4 with stored partial sums, ReLU-alpha, DRAM mostly stalled
    c = '{x_prec: PREC8, w_prec: PREC4, x_signed: 1, w_signed: 0, mode: MODE_3D, cluster: CL1};
    write_obuf_random(150);
    wr(8'h08, 32'h4000_0000);                       // alpha = 2.0
    dram_mode = 1;
    stall0 = 0;
    model(c, 150, 1, 0, 3, 0, 0, 1);
    run(c, 150, 1, 0, 3, 0, 0, 32'h1 | 32'h2 | 32'h8 | 32'h10 | (32'd3 << 5));
    dram_mode = 0;
    check_results(c, 150, "R2");
    checks++;
    if (dram_words == 0) failures++;
    psum_runs++; modes_seen[0]++; xprec_seen[1]++; wprec_seen[0]++;
    stall0 = int'(stall_cycles);

    // R3: 2D X4W8 cluster 3, BN, max pooling over 2 beats, BFP4 blocks of 36
    c = '{x_prec: PREC4, w_prec: PREC8, x_signed: 0, w_signed: 1, mode: MODE_2D, cluster: CL3};
    for (int l = 0; l < 18; l++) begin wr(8'h20 + 8'(l), 32'h4000_0000); wr(8'h40 + 8'(l), 32'h3F00_0000); end
    wr(8'h0A, {22'h0, 8'd36, 2'(PREC4)});
    wr(8'h0C, 32'h2);                               // clear statistics
    model(c, 36, 3, 5, 2, 1, 0, 0);
    begin
      automatic int bw0 = bitmaps;
      run(c, 36, 3, 5, 2, 1, 0, 32'h2 | (32'd1 << 5) | (32'd1 << 7) | (32'd1 << 9) | (32'd1 << 10));
      pooled_words += bitmaps - bw0;
    end
    check_results(c, 36, "R3");
    checks++;
    if (dut.bn_beats == 0 || dq_data.size() == 0) failures++;
    modes_seen[1]++; xprec_seen[0]++; wprec_seen[1]++;

    // R4: 2D X16W16 cluster 1, weight update straight from the core, dynamic precision
    c = '{x_prec: PREC16, w_prec: PREC16, x_signed: 1, w_signed: 1, mode: MODE_2D, cluster: CL1};
    wr(8'h09, 32'h3C23_D70A);                       // eta = 0.01
    wr(8'h0A, {22'h0, 8'd18, 2'(PREC8)});
    wr(8'h0B, {14'h0, 2'(PREC4), 8'd1, 8'd2});      // init 4 bit, th_down 1/256, th_up 2/256
    wr(8'h0C, 32'h8 | 32'h2);                       // load precision, clear statistics
    @(negedge clk);
    checks++;
    if (dyn_prec != PREC4) failures++;
    model(c, 12, 2, 40, 1, 2, 1, 0);
    run(c, 12, 2, 40, 1, 2, 1, 32'h2 | 32'h4 | (32'd1 << 11) | (32'd1 << 12));
    check_results(c, 12, "R4");
    vals.delete();
    for (int g = 0; g < 12; g++)
      for (int q = 0; q < 6; q++) begin
        gr = ob_sh[g][q*32 +: 32];
        w = wq[g*6 + q];
        vals.push_back(r2f(f2r(w) - f2r(r2f(f2r(32'h3C23_D70A) * f2r(gr)))));
      end
    check_dram(vals, 4, "R4");
    wr(8'h0C, 32'h4);                               // epoch end
    @(negedge clk);
    checks++;
    if (zse_count == 0 || dyn_prec == PREC4) failures++;
    else prec_changes++;
    wu_src_runs++; modes_seen[1]++; xprec_seen[2]++; wprec_seen[2]++;

    // R5: 3D X4W8 average pooling over 4 beats
    c = '{x_prec: PREC4, w_prec: PREC8, x_signed: 1, w_signed: 1, mode: MODE_3D, cluster: CL1};
    model(c, 36, 1, 10, 7, 1, 0, 0);
    begin
      automatic int bw0 = bitmaps;
      run(c, 36, 1, 10, 7, 1, 0, 32'h2 | (32'd2 << 5) | (32'd2 << 7));
      pooled_words += bitmaps - bw0;
    end
    check_results(c, 36, "R5");
    modes_seen[0]++; xprec_seen[0]++; wprec_seen[1]++;

    // R6: 2D X8W16 cluster 6
    c = '{x_prec: PREC8, w_prec: PREC16, x_signed: 0, w_signed: 1, mode: MODE_2D, cluster: CL6};
    // While R6 runs from input words 30..69, the host loads new data into
    // words 0..29 (double buffering by address region); R7 then uses it.
    model(c, 10, 4, 30, 1, 4, 1, 0);
    fork
      run(c, 10, 4, 30, 1, 4, 1, 32'h2);
      begin
        logic [7:0] e;
        @(negedge clk);
        for (int a = 0; a < 30; a++) begin
          e = 8'(122 + $urandom % 8);
          for (int i = 0; i < 864; i += 32) in_sh[a][i +: 32] = $urandom;
          for (int s = 0; s < 6; s++) in_sh[a][864 + 8*s +: 8] = e;
          @(negedge clk); ibuf_we = 1; ibuf_waddr = 7'(a); ibuf_wdata = in_sh[a];
          if (busy) overlap_writes++;
        end
        @(negedge clk); ibuf_we = 0;
      end
    join
    check_results(c, 10, "R6");
    modes_seen[1]++; xprec_seen[1]++; wprec_seen[2]++;

    // R7: 3D X16W16 on the data loaded during R6
    c = '{x_prec: PREC16, w_prec: PREC16, x_signed: 1, w_signed: 1, mode: MODE_3D, cluster: CL1};
    model(c, 10, 3, 0, 4, 3, 1, 0);
    run(c, 10, 3, 0, 4, 3, 1, 32'h2);
    check_results(c, 10, "R7");

    // every mechanism must have happened
    $display("overlapped buffer writes=%0d", overlap_writes);
    $display("stall_cycles=%0d fifo_full=%0d dram_bp=%0d bitmaps=%0d pooled=%0d wu_beats=%0d prec=%0d zse=%0d",
             stall0, fifo_full, dram_bp, bitmaps, pooled_words, wu_beats, dyn_prec, zse_count);
    checks++; if (stall0 == 0) begin failures++; $display("no FSM stall"); end
    checks++; if (fifo_full == 0) begin failures++; $display("FIFO never full"); end
    checks++; if (dram_bp == 0) begin failures++; $display("no DRAM backpressure"); end
    checks++; if (bitmaps == 0 || pooled_words == 0) begin failures++; $display("no pooled output"); end
    checks++; if (wu_beats == 0 || wu_src_runs == 0) begin failures++; $display("no weight update"); end
    checks++; if (psum_runs == 0) failures++;
    checks++; if (overlap_writes == 0) begin failures++; $display("no buffer load during a run"); end
    checks++; if (prec_changes == 0) begin failures++; $display("no precision change"); end
    for (int m = 0; m < 2; m++) begin checks++; if (modes_seen[m] == 0) failures++; end
    for (int p = 0; p < 3; p++) begin
      checks++; if (xprec_seen[p] == 0 || wprec_seen[p] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
