// fb_fp2bfp: FP2BFP converter (shared exponent extractor + mantissa aligner).
//
// Turns a stream of FP32 values (18 lanes per beat) into block floating point
// for the next layer. A block is blk_len elements (for example 1x1x216 or
// 3x3x12 as listed for each format and layer type), that is ceil(blk_len/18)
// beats; lanes beyond blk_len in the last beat are ignored.
//   COLLECT: beats are stored and the largest exponent of the block's nonzero
//            elements is tracked (the shared exponent, floor(log2 max|x|)).
//   EMIT   : one beat per cycle of p-bit two's-complement mantissas
//            m = +-(significand >> (25 - p + Es - Ei)), truncated, held in
//            16-bit containers, with the shared exponent, the lane mask and a
//            last flag.
// A nonzero element whose aligned mantissa becomes 0 is a zero setting error
// (ZSE). zse_count and elem_count accumulate over blocks until stat_clr; they
// drive the dynamic precision controller. Shared exponent extraction, alignment
// by shifting and the ZSE definition follow the paper; the two-phase
// buffering and the mantissa scaling are this design's.
module fb_fp2bfp
  import fb_pkg::*;
#(
  parameter int unsigned MAX_BLK = 216,
  localparam int unsigned MAX_BEATS = (MAX_BLK + LANES - 1) / LANES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  prec_e             prec,
  input  logic [7:0]        blk_len,
  input  logic              stat_clr,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [31:0]       in_data [LANES],
  input  logic [LANES-1:0]  in_mask,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [15:0]       out_mant [LANES],
  output logic [LANES-1:0]  out_mask,
  output logic [7:0]        out_exp,
  output logic              out_last,
  output logic [31:0]       zse_count,
  output logic [31:0]       elem_count
);
  typedef enum logic {S_COLLECT, S_EMIT} state_e;
  state_e st;
  logic [31:0]      buf_d [MAX_BEATS][LANES];
  logic [LANES-1:0] buf_m [MAX_BEATS];
  logic [7:0]       es, es_beat;
  logic [7:0]       nbeats, bi;
  logic [LANES-1:0] lm, zse_v;
  logic [15:0]      mant [LANES];
  logic [4:0]       nz, nel;

  assign in_ready  = (st == S_COLLECT);
  assign out_valid = (st == S_EMIT);
  assign out_exp   = es;
  assign out_last  = (st == S_EMIT) && (bi == nbeats - 1);
  assign out_mask  = buf_m[bi[$clog2(MAX_BEATS)-1:0]];

  always_comb begin
    int unsigned b8, lim;
    logic [8:0] bl;
    bl     = (blk_len == 0) ? 9'd1 : {1'b0, blk_len};
    nbeats = 8'((32'(bl) + LANES - 1) / LANES);
    if (nbeats > 8'(MAX_BEATS)) nbeats = 8'(MAX_BEATS);
    // lane mask for the current collect beat
    b8  = 32'(bi) * LANES;
    lim = 32'(bl) - b8;
    for (int l = 0; l < LANES; l++) lm[l] = in_mask[l] && (32'(l) < lim);
    // largest exponent among valid nonzero lanes of the incoming beat
    es_beat = '0;
    for (int l = 0; l < LANES; l++)
      if (lm[l] && in_data[l][30:23] > es_beat) es_beat = in_data[l][30:23];
    // aligned mantissas of the beat being emitted
    nz  = '0;
    nel = '0;
    for (int l = 0; l < LANES; l++) begin
      logic [31:0] f;
      logic [23:0] sig, mag;
      int unsigned sh;
      f   = buf_d[bi[$clog2(MAX_BEATS)-1:0]][l];
      sig = (f[30:23] == 0) ? 24'h0 : {1'b1, f[22:0]};
      sh  = 25 - prec_bits(prec) + 32'(es - f[30:23]);
      mag = sig;                               // log shifter, 0 once sh >= 24
      for (int i = 0; i < 5; i++) if (sh[i]) mag = mag >> (1 << i);
      if (sh >= 24) mag = '0;
      mant[l]  = f[31] ? -mag[15:0] : mag[15:0];
      zse_v[l] = out_mask[l] && (f[30:23] != 0) && (mag == 0);
      nz  = nz  + 5'(zse_v[l]);
      nel = nel + 5'(out_mask[l] && f[30:23] != 0);
    end
  end

  always_comb for (int l = 0; l < LANES; l++) out_mant[l] = mant[l];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_COLLECT; bi <= '0; es <= '0; zse_count <= '0; elem_count <= '0;
      for (int b = 0; b < MAX_BEATS; b++) buf_m[b] <= '0;
    end else begin
      if (stat_clr) begin
        zse_count <= '0; elem_count <= '0;
      end
      case (st)
        S_COLLECT: if (in_valid) begin
          for (int l = 0; l < LANES; l++) buf_d[bi[$clog2(MAX_BEATS)-1:0]][l] <= in_data[l];
          buf_m[bi[$clog2(MAX_BEATS)-1:0]] <= lm;
          es <= ((bi == 0) || es_beat > es) ? es_beat : es;
          if (bi == nbeats - 1) begin
            bi <= '0;
            st <= S_EMIT;
          end else begin
            bi <= bi + 1;
          end
        end
        S_EMIT: if (out_ready) begin
          if (!stat_clr) begin
            zse_count  <= zse_count + 32'(nz);
            elem_count <= elem_count + 32'(nel);
          end
          if (bi == nbeats - 1) begin
            bi <= '0;
            st <= S_COLLECT;
          end else begin
            bi <= bi + 1;
          end
        end
        default: st <= S_COLLECT;
      endcase
    end
  end
endmodule
