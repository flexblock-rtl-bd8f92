// fb_wu: weight update unit (18 FP32 lanes).
//
// With wu_en set, each incoming beat of weight gradients dW is combined with
// the matching beat of current weights W (w_valid/w_data, consumed together):
// a vector multiplier forms eta * dW and element-wise subtractors give
// W - eta * dW. With wu_en low (activations or local gradients passing to the
// next layer) the data pass unchanged and no weights are consumed. The output
// is a pipeline register with valid/ready. The multiply-by-eta and subtract
// follow the paper; the handshake is this design's.
module fb_wu
  import fb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wu_en,
  input  logic [31:0]       eta,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [31:0]       in_data [LANES],
  input  logic [LANES-1:0]  in_mask,
  input  logic              w_valid,
  output logic              w_ready,
  input  logic [31:0]       w_data [LANES],
  output logic              out_valid,
  input  logic              out_ready,
  output logic [31:0]       out_data [LANES],
  output logic [LANES-1:0]  out_mask
);
  logic [31:0] sg [LANES];
  logic [31:0] nw [LANES];
  logic        take, slot;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fb_fp32_mul u_mul (.a(eta), .b(in_data[l]), .p(sg[l]));
    fb_fp32_add u_sub (.a(w_data[l]), .b({~sg[l][31], sg[l][30:0]}), .s(nw[l]));
  end

  assign slot     = !out_valid || out_ready;
  assign in_ready = slot && (!wu_en || w_valid);
  assign w_ready  = wu_en && slot && in_valid;
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_mask <= '0;
      for (int l = 0; l < LANES; l++) out_data[l] <= '0;
    end else begin
      if (take) begin
        out_valid <= 1'b1;
        out_mask  <= in_mask;
        for (int l = 0; l < LANES; l++) out_data[l] <= wu_en ? nw[l] : in_data[l];
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
