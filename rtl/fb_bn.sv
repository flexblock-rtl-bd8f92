// fb_bn: batch normalization unit (forward), range batch normalization.
//
// Range BN normalises by the range (max - min) of a channel instead of its
// standard deviation, so the statistics can be gathered while the data stream
// past once: y = gamma * (x - mean) / (C(n) * (max - min)) + beta.
// This unit does the per-element work on 18 FP32 lanes:
//   - statistics (when stat_en): per lane the FP32 running sum, the maximum and
//     the minimum of the valid input elements, and the number of beats;
//     stat_clr restarts them;
//   - normalisation (when bn_en): y = a[l] * x + b[l] in FP32, where the host
//     derives a = gamma / (C(n) * range) and b = beta - a * mean from the
//     statistics; with bn_en low the data pass unchanged.
// One register stage: out_* follow in_* by one cycle. Range BN follows the
// paper; the split between this unit and the host (division and C(n) are left
// to the host) is this design's.
module fb_bn
  import fb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bn_en,
  input  logic              stat_en,
  input  logic              stat_clr,
  input  logic [31:0]       a [LANES],
  input  logic [31:0]       b [LANES],
  input  logic              in_valid,
  input  logic [31:0]       in_data [LANES],
  input  logic [LANES-1:0]  in_mask,
  output logic              out_valid,
  output logic [31:0]       out_data [LANES],
  output logic [LANES-1:0]  out_mask,
  output logic [31:0]       st_sum [LANES],
  output logic [31:0]       st_max [LANES],
  output logic [31:0]       st_min [LANES],
  output logic [15:0]       st_beats
);
  logic [31:0] ax [LANES];
  logic [31:0] y  [LANES];
  logic [31:0] sum_n [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fb_fp32_mul u_mul (.a(a[l]), .b(in_data[l]), .p(ax[l]));
    fb_fp32_add u_add (.a(ax[l]), .b(b[l]), .s(y[l]));
    fb_fp32_add u_sum (.a(st_sum[l]), .b(in_data[l]), .s(sum_n[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_mask <= '0; st_beats <= '0;
      for (int l = 0; l < LANES; l++) begin
        out_data[l] <= '0; st_sum[l] <= '0;
        st_max[l] <= 32'hFF80_0000; st_min[l] <= 32'h7F80_0000;
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_mask <= in_mask;
        for (int l = 0; l < LANES; l++) out_data[l] <= bn_en ? y[l] : in_data[l];
      end
      if (stat_clr) begin
        st_beats <= '0;
        for (int l = 0; l < LANES; l++) begin
          st_sum[l] <= '0; st_max[l] <= 32'hFF80_0000; st_min[l] <= 32'h7F80_0000;
        end
      end else if (stat_en && in_valid) begin
        st_beats <= st_beats + 1;
        for (int l = 0; l < LANES; l++) if (in_mask[l]) begin
          st_sum[l] <= sum_n[l];
          if (fp_key(in_data[l]) > fp_key(st_max[l])) st_max[l] <= in_data[l];
          if (fp_key(in_data[l]) < fp_key(st_min[l])) st_min[l] <= in_data[l];
        end
      end
    end
  end
endmodule
