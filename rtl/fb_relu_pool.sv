// fb_relu_pool: reconfigurable ReLU-Pool unit (18 FP32 lanes).
//
// act_sel routes the BN output to ReLU (0) or ReLU-alpha (1); the other
// activation sees zero. ReLU-alpha clips to [0, alpha] (alpha = 6 gives ReLU6).
// pool_sel picks which activation feeds the poolers (0 ReLU, 1 ReLU-alpha).
// out_sel picks the output: 0 ReLU, 1 max pool, 2 avg pool, 3 ReLU-alpha.
// A pooling window is 2^pool_log2 consecutive beats (one pixel of 18 channels
// per beat, pool_log2 <= MAX_LOG2); the pooled beat leaves when the window is
// complete. Max pooling compares the FP32 values; avg pooling sums them in FP32
// and divides by lowering the exponent by pool_log2. Unpooled outputs leave one
// cycle after their input. The four-way out_sel, the two activations and alpha
// follow the paper's figure; the window order is this design's choice.
module fb_relu_pool
  import fb_pkg::*;
#(
  parameter int unsigned MAX_LOG2 = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              act_sel,
  input  logic              pool_sel,
  input  logic [1:0]        out_sel,
  input  logic [1:0]        pool_log2,
  input  logic [31:0]       alpha,
  input  logic              in_valid,
  input  logic [31:0]       in_data [LANES],
  input  logic [LANES-1:0]  in_mask,
  output logic              out_valid,
  output logic [31:0]       out_data [LANES],
  output logic [LANES-1:0]  out_mask
);
  logic [31:0] r0 [LANES];
  logic [31:0] r1 [LANES];
  logic [31:0] pin [LANES];
  logic [31:0] mx [LANES];
  logic [31:0] sm [LANES];
  logic [31:0] sm_n [LANES];
  logic [MAX_LOG2:0] cnt;
  logic [MAX_LOG2:0] win;
  logic              pooled, win_done;

  function automatic logic [31:0] relu(logic [31:0] v);
    return (v[31] || v[30:23] == 0) ? 32'h0 : v;
  endfunction

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      r0[l]  = act_sel ? 32'h0 : relu(in_data[l]);
      r1[l]  = !act_sel ? 32'h0 :
               (fp_key(relu(in_data[l])) > fp_key(alpha) ? alpha : relu(in_data[l]));
      pin[l] = pool_sel ? r1[l] : r0[l];
    end
    win      = (MAX_LOG2+1)'(1) << ((pool_log2 > 2'(MAX_LOG2)) ? 2'(MAX_LOG2) : pool_log2);
    pooled   = (out_sel == 2'd1) || (out_sel == 2'd2);
    win_done = (cnt + 1'b1) == win;
  end

  for (genvar l = 0; l < LANES; l++) begin : g_avg
    fb_fp32_add u_add (.a((cnt == 0) ? 32'h0 : sm[l]), .b(pin[l]), .s(sm_n[l]));
  end

  function automatic logic [31:0] div_pow2(logic [31:0] v, logic [1:0] k);
    return (v[30:23] <= 8'(k)) ? 32'h0 : {v[31], v[30:23] - 8'(k), v[22:0]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_mask <= '0; cnt <= '0;
      for (int l = 0; l < LANES; l++) begin out_data[l] <= '0; mx[l] <= '0; sm[l] <= '0; end
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (!pooled) begin
          out_valid <= 1'b1;
          out_mask  <= in_mask;
          for (int l = 0; l < LANES; l++) out_data[l] <= (out_sel == 2'd3) ? r1[l] : r0[l];
        end else begin
          for (int l = 0; l < LANES; l++) begin
            mx[l] <= (cnt == 0 || fp_key(pin[l]) > fp_key(mx[l])) ? pin[l] : mx[l];
            sm[l] <= sm_n[l];
          end
          if (win_done) begin
            cnt       <= '0;
            out_valid <= 1'b1;
            out_mask  <= in_mask;
            for (int l = 0; l < LANES; l++)
              out_data[l] <= (out_sel == 2'd1)
                ? ((cnt == 0 || fp_key(pin[l]) > fp_key(mx[l])) ? pin[l] : mx[l])
                : div_pow2(sm_n[l], pool_log2);
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
      end
    end
  end
endmodule
