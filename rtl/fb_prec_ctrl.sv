// fb_prec_ctrl: hysteresis controller for dynamic precision selection.
//
// At the end of an epoch (epoch_end) it compares the ratio of zero setting
// errors, zse / elems, of a tensor with two thresholds given as fractions of
// 256: above th_up it moves the tensor one precision up (4 -> 8 -> 16 bits),
// otherwise below th_down one precision down, otherwise it keeps it. `load`
// sets the precision to init_prec. The comparison zse*256 > th*elems avoids a
// divider. The decision rule follows the paper's flow chart; the threshold
// encoding is this design's.
module fb_prec_ctrl
  import fb_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  prec_e       init_prec,
  input  logic        epoch_end,
  input  logic [31:0] zse,
  input  logic [31:0] elems,
  input  logic [7:0]  th_up,
  input  logic [7:0]  th_down,
  output prec_e       prec,
  output logic        went_up,
  output logic        went_down
);
  logic [47:0] lhs, up_r, dn_r;
  always_comb begin
    lhs  = 48'(zse) << 8;
    up_r = 48'(elems) * 48'(th_up);
    dn_r = 48'(elems) * 48'(th_down);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prec <= PREC16; went_up <= 1'b0; went_down <= 1'b0;
    end else begin
      went_up <= 1'b0; went_down <= 1'b0;
      if (load) prec <= init_prec;
      else if (epoch_end) begin
        if (lhs > up_r) begin
          if (prec != PREC16) begin prec <= prec_e'(2'(prec + 2'd1)); went_up <= 1'b1; end
        end else if (lhs < dn_r) begin
          if (prec != PREC4) begin prec <= prec_e'(2'(prec - 2'd1)); went_down <= 1'b1; end
        end
      end
    end
  end
endmodule
