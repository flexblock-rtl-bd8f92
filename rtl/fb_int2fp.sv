// fb_int2fp: arithmetic converter, signed integer partial sum to FP32.
//
// The result is the FP32 value nearest to in * 2^sc (round to nearest, ties to
// even). Results below the smallest FP32 normal flush to +0, results above the
// largest finite value become infinity. Combinational. The paper names these
// converters and places them before the FP32 accumulators; rounding and range
// handling are this design's choices.
module fb_int2fp
  import fb_pkg::*;
#(
  parameter int unsigned IN_W = R2_W
) (
  input  logic signed [IN_W-1:0]   in,
  input  logic signed [SC_W-1:0]   sc,
  output logic [31:0]              out
);
  logic [IN_W-1:0]  mag, norm;
  logic             sgn;
  int               lead;
  logic [6:0]       sh;
  logic             nz, fin, inf;
  logic [23:0]      mant;
  logic             g, st, up;
  logic signed [SC_W+1:0] e;

  always_comb begin
    sgn  = in[IN_W-1];
    mag  = sgn ? IN_W'(-in) : IN_W'(in);
    lead = 0;
    for (int i = 0; i < IN_W; i++) if (mag[i]) lead = i;
    sh   = 7'(IN_W - 1 - lead);
    norm = mag;                                // leading one moved to IN_W-1
    for (int i = 0; i < 7; i++) if (sh[i]) norm = norm << (1 << i);
    mant = {1'b0, norm[IN_W-2 -: 23]};
    g    = norm[IN_W-25];
    st   = |(norm & ((IN_W'(1) << (IN_W-25)) - 1));
    up   = g & (st | mant[0]);
    mant = mant + 24'(up);
    e    = (SC_W+2)'(lead) + (SC_W+2)'(sc) + (SC_W+2)'(EXP_BIAS);
    if (mant[23]) e = e + 1;                 // rounding carried out: mantissa is 1.0
    // result select as AND-OR masks (zero, infinity or normal)
    nz  = (mag != '0) && (e > 0);
    fin = nz && (e < 255);
    inf = nz && (e >= 255);
    out = ({sgn, e[7:0], mant[22:0] & {23{~mant[23]}}} & {32{fin}})
        | ({sgn, 8'hFF, 23'h0} & {32{inf}});
  end
endmodule
