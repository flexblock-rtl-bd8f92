// fb_quant: quantization unit, packs block floating point beats for DRAM.
//
// Each input beat holds 18 mantissas of p bits (p = 4, 8 or 16, in 16-bit
// containers). Only the low p bits of each are kept and packed back to back,
// lane 0 in the least significant bits, so a beat is 72, 144 or 288 bits. Beats
// are concatenated into 288-bit DRAM words (4, 2 or 1 beats per word); a block's
// last beat closes the word early so that a word never mixes two blocks. Each
// word leaves with the block's shared exponent. in_ready is low while a full
// word waits for dram_ready. The paper places this unit after the FP2BFP
// converter to cut core-to-DRAM traffic; dense packing is this design's
// reading of that.
module fb_quant
  import fb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  prec_e             prec,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [15:0]       in_mant [LANES],
  input  logic [7:0]        in_exp,
  input  logic              in_last,
  output logic              dram_valid,
  input  logic              dram_ready,
  output logic [LANES*16-1:0] dram_data,
  output logic [7:0]        dram_exp,
  output logic [2:0]        dram_beats
);
  localparam int unsigned WW = LANES * 16;
  logic [WW-1:0] acc, packed_beat;
  logic [2:0]    nb;
  logic [2:0]    per_word;

  always_comb begin
    packed_beat = '0;
    for (int l = 0; l < LANES; l++) begin
      case (prec)
        PREC4:   packed_beat[l*4  +: 4]  = in_mant[l][3:0];
        PREC8:   packed_beat[l*8  +: 8]  = in_mant[l][7:0];
        default: packed_beat[l*16 +: 16] = in_mant[l];
      endcase
    end
    per_word = (prec == PREC4) ? 3'd4 : (prec == PREC8) ? 3'd2 : 3'd1;
  end

  assign in_ready = !dram_valid || dram_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; nb <= '0; dram_valid <= 1'b0; dram_data <= '0; dram_exp <= '0; dram_beats <= '0;
    end else begin
      if (dram_valid && dram_ready) dram_valid <= 1'b0;
      if (in_valid && in_ready) begin
        logic [WW-1:0] na;
        na = acc;
        for (int j = 0; j < 4; j++)              // constant shift per beat slot
          if (32'(nb) == j)
            case (prec)
              PREC4:   na = acc | (packed_beat << (j * 72));
              PREC8:   na = acc | (packed_beat << (j * 144));
              default: na = acc | ((j == 0) ? packed_beat : '0);
            endcase
        if (nb + 1 == per_word || in_last) begin
          dram_valid <= 1'b1;
          dram_data  <= na;
          dram_exp   <= in_exp;
          dram_beats <= nb + 1;
          acc <= '0;
          nb  <= '0;
        end else begin
          acc <= na;
          nb  <= nb + 1;
        end
      end
    end
  end
endmodule
