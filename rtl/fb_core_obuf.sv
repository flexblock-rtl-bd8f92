// fb_core_obuf: core output buffer.
//
// Gathers the FP32 results of the core (1, 2, 4 or 6 per result, wr_n of them
// in wr_data[0..wr_n-1]) in arrival order into rows of LANES = 18 words, the
// width of the post-processing datapath (BN, ReLU-Pool, ...). A full row is
// offered on the output with valid/ready; `flush` closes a partly filled row,
// whose unused lanes are marked invalid in out_mask. `space` is the number of
// free words; the sequencer must not write more than that (an assertion checks
// it). Storage is DEPTH_ROWS rows. The 18 lanes follow the paper's ReLU-Pool
// figure; the buffer's size and organisation are this design's choice.
module fb_core_obuf
  import fb_pkg::*;
#(
  parameter int unsigned DEPTH_ROWS = 8,
  parameter int unsigned NW         = N_SUB
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_valid,
  input  logic [2:0]          wr_n,
  input  logic [31:0]         wr_data [NW],
  input  logic                flush,
  output logic [15:0]         space,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [31:0]         out_data [LANES],
  output logic [LANES-1:0]    out_mask
);
  localparam int unsigned ENT = DEPTH_ROWS * LANES;

  logic [31:0]      mem   [ENT];
  logic [ENT-1:0]   vld;
  int unsigned      wp, rp, cnt;          // word write pointer, row read index, words held
  int unsigned      wp_n, cnt_n, pad;

  assign space     = 16'(ENT - cnt);
  assign out_valid = cnt >= LANES;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      out_data[l] = mem[rp * LANES + l];
      out_mask[l] = vld[rp * LANES + l];
    end
  end

  logic pop;
  assign pop = out_valid && out_ready;

  // next pointers and the padding a flush adds
  always_comb begin
    int unsigned w1;
    w1    = (wp + (wr_valid ? 32'(wr_n) : 0)) % ENT;
    pad   = (flush && (w1 % LANES) != 0) ? LANES - (w1 % LANES) : 0;
    wp_n  = (w1 + pad) % ENT;
    cnt_n = cnt - (pop ? LANES : 0) + (wr_valid ? 32'(wr_n) : 0) + pad;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= 0; rp <= 0; cnt <= 0;
    end else begin
      if (pop) rp <= (rp + 1) % DEPTH_ROWS;
      wp  <= wp_n;
      cnt <= cnt_n;
    end
  end

  // storage and per-word valid flags (padding words are written invalid)
  always_ff @(posedge clk) begin
    for (int j = 0; j < int'(NW); j++)
      if (wr_valid && j < int'(wr_n)) begin
        mem[(wp + 32'(j)) % ENT] <= wr_data[j];
        vld[(wp + 32'(j)) % ENT] <= 1'b1;
      end
    for (int j = 0; j < int'(LANES); j++)
      if (32'(j) < pad) vld[(wp + (wr_valid ? 32'(wr_n) : 0) + 32'(j)) % ENT] <= 1'b0;
  end

  // The writer must respect `space`.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid |-> (32'(wr_n) <= ENT - cnt + ((out_valid && out_ready) ? LANES : 0)));
endmodule
