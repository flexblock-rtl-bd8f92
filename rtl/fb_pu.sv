// fb_pu: processing unit, four PEs realising sub-word parallelism on the input.
//
// The 144-bit input bus carries nine 16-bit slots (one per multiplier column)
// and is broadcast to every PU. PE k takes bits [4k+3:4k] of every slot. A
// slot holds one 16-bit, two 8-bit or four 4-bit input channels; the PU gets a
// 36-bit weight slice (nine 4-bit sub-words) per input channel, w_slice[c], and
// PE k multiplies with the slice of the channel it holds (pe_chan). With 16-bit
// inputs all four PEs share w_slice[0], as in the paper's PU figure; with 8-
// and 4-bit inputs the channels of a slot need their own weights (the paper's
// example sums w_i * x_i over the channels), which is why this design carries
// four slices.
// The PE sums are shifted by their input sub-word weight and added:
//   X16: one channel per slot, PE3..PE0 shifted by 12/8/4/0
//   X8 : two channels per slot, PE3/PE1 shifted by 4, PE2/PE0 by 0
//   X4 : four channels per slot, no shift
// The PU output is therefore sum over channels and multiplier columns of
// x * w_sub, a 28-bit signed integer. Combinational. The PE/sub-word mapping
// follows the paper's figures; the shift-and-add form is this design's reading
// of the shifters drawn there.
module fb_pu
  import fb_pkg::*;
(
  input  logic [BUS_W-1:0]         x_bus,
  input  logic [N_MUL*4-1:0]       w_slice [N_PE],
  input  prec_e                    x_prec,
  input  logic                     x_signed,
  input  logic                     w_sgn,
  output logic signed [PU_W-1:0]   sum
);
  logic signed [PE_W-1:0] pe_sum [N_PE];

  for (genvar k = 0; k < N_PE; k++) begin : g_pe
    logic [N_MUL-1:0][3:0] xs, ws;
    for (genvar i = 0; i < N_MUL; i++) begin : g_col
      assign xs[i] = x_bus[i*SLOT_W + 4*k +: 4];
      assign ws[i] = w_slice[pe_chan(x_prec, k)][i*4 +: 4];
    end
    fb_pe u_pe (
      .x(xs), .w(ws),
      .x_sgn(x_signed & top_subword(x_prec, k)),
      .w_sgn(w_sgn),
      .sum(pe_sum[k])
    );
  end

  always_comb begin
    sum = '0;
    for (int k = 0; k < N_PE; k++)
      case (x_prec)                            // constant shift per PE
        PREC16:  sum += PU_W'(pe_sum[k]) <<< (4 * k);
        PREC8:   sum += PU_W'(pe_sum[k]) <<< (4 * (k % 2));
        default: sum += PU_W'(pe_sum[k]);
      endcase
  end
endmodule
