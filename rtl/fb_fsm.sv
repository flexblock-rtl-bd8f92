// fb_fsm: sequencer of a FlexBlock core.
//
// After `start` it runs n_groups outputs ("groups"); each group accumulates
// n_steps buffer words. In step t of group g it reads
//   input  buffer word in_base + g*in_gstride + t
//   weight buffer word wt_base + g*wt_gstride + t
// and, at t = 0, output buffer word g (a stored partial sum, used when
// psum_from_buf is set). One cycle later, when the SRAM data arrive, it raises
// core_valid with core_first (t = 0) and core_last (t = n_steps-1). The
// sequencer stalls at the start of a group while the core output buffer has
// fewer than STALL_SPACE free words and post-processing is enabled; stalled
// cycles are counted. STALL_SPACE = 24 covers the worst case: up to three
// groups are in flight between the read and res_valid, plus the group being
// started, each with at most six results. `done` pulses, and busy falls, once all n_groups results
// have come back (res_valid). States: IDLE -> RUN -> DRAIN -> IDLE. The paper
// only names an FSM block; this loop and its timing are this design's.
module fb_fsm #(
  parameter int unsigned AW          = 8,
  parameter int unsigned STALL_SPACE = 24
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [15:0]     n_groups,
  input  logic [15:0]     n_steps,
  input  logic [15:0]     in_base,
  input  logic [15:0]     wt_base,
  input  logic [15:0]     in_gstride,
  input  logic [15:0]     wt_gstride,
  input  logic            post_en,
  input  logic [15:0]     obuf_space,
  input  logic            res_valid,
  output logic            buf_re,
  output logic [AW-1:0]   in_raddr,
  output logic [AW-1:0]   wt_raddr,
  output logic [AW-1:0]   ob_raddr,
  output logic            core_valid,
  output logic            core_first,
  output logic            core_last,
  output logic            busy,
  output logic            done,
  output logic [15:0]     stall_cycles,
  output logic [15:0]     res_count
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e      st;
  logic [15:0] g, t;
  logic        stall;
  logic [31:0] ia, wa;

  always_comb begin
    stall    = (st == S_RUN) && (t == 0) && post_en && (obuf_space < 16'(STALL_SPACE));
    buf_re   = (st == S_RUN) && !stall;
    ia       = 32'(in_base) + 32'(g) * 32'(in_gstride) + 32'(t);
    wa       = 32'(wt_base) + 32'(g) * 32'(wt_gstride) + 32'(t);
    in_raddr = AW'(ia);
    wt_raddr = AW'(wa);
    ob_raddr = AW'(g);
    busy     = (st != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; g <= '0; t <= '0;
      core_valid <= 1'b0; core_first <= 1'b0; core_last <= 1'b0;
      done <= 1'b0; stall_cycles <= '0; res_count <= '0;
    end else begin
      done       <= 1'b0;
      core_valid <= buf_re;
      core_first <= buf_re && (t == 0);
      core_last  <= buf_re && (t == n_steps - 1);
      if (st != S_IDLE && res_valid) res_count <= res_count + 1;
      if (stall) stall_cycles <= stall_cycles + 1;
      case (st)
        S_IDLE: if (start && n_groups != 0 && n_steps != 0) begin
          st <= S_RUN; g <= '0; t <= '0; res_count <= '0; stall_cycles <= '0;
        end
        S_RUN: if (!stall) begin
          if (t == n_steps - 1) begin
            t <= '0;
            if (g == n_groups - 1) st <= S_DRAIN;
            else g <= g + 1;
          end else begin
            t <= t + 1;
          end
        end
        S_DRAIN: if (res_count + 16'(res_valid) == n_groups) begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
