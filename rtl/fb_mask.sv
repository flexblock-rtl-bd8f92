// fb_mask: masking unit.
//
// Passes the ReLU-Pool output through one register stage and extracts a bitmap
// with one bit per lane that is set where the output is positive. The bitmap
// is what the backward pass needs to route gradients through ReLU/pool, so it
// can be stored instead of the activations. The paper names this unit and
// places it after the ReLU-Pool unit; the bitmap rule is this design's reading
// of its purpose.
module fb_mask
  import fb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [31:0]       in_data [LANES],
  input  logic [LANES-1:0]  in_mask,
  output logic              out_valid,
  output logic [31:0]       out_data [LANES],
  output logic [LANES-1:0]  out_mask,
  output logic [LANES-1:0]  bitmap
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_mask <= '0; bitmap <= '0;
      for (int l = 0; l < LANES; l++) out_data[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_mask <= in_mask;
        for (int l = 0; l < LANES; l++) begin
          out_data[l] <= in_data[l];
          bitmap[l]   <= in_mask[l] && !in_data[l][31] && in_data[l][30:23] != 0;
        end
      end
    end
  end
endmodule
