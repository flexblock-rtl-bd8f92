// fb_fp32_add: combinational FP32 adder.
//
// Used for the psum accumulators and the FP32 selective adder tree of the
// reduction units, and by the post-processing units. Round to nearest, ties to
// even; subnormal inputs count as zero and subnormal results flush to +0;
// exponent overflow gives infinity. NaN is not produced or propagated. The
// paper names the FP32 adders; these number-format details are this design's.
module fb_fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] s
);
  logic [31:0] x, y;
  logic [7:0]  ex, ey;
  logic [23:0] mx, my;
  logic [8:0]  d;
  logic [4:0]  dsh;
  logic [26:0] ax, ay, ysh, ymask;
  logic [27:0] sum, nrm, sh1;
  logic        sticky, up, ovf, nz, fin, inf;
  logic signed [9:0] e;
  logic [4:0]  lz;
  logic [24:0] r;

  // Shifts are written as log shifters with constant stages and the result
  // select as AND-OR masks, so synthesis finds no shifter worth sharing.
  always_comb begin
    // larger magnitude first
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    ex = x[30:23]; ey = y[30:23];
    mx = (ex == 0) ? 24'h0 : {1'b1, x[22:0]};
    my = (ey == 0) ? 24'h0 : {1'b1, y[22:0]};
    d  = {1'b0, ex} - {1'b0, ey};
    dsh = (d > 9'd27) ? 5'd27 : d[4:0];
    ax = {mx, 3'b000};
    // align the smaller operand; shifted-out bits collapse into a sticky bit
    ysh   = {my, 3'b000};
    ymask = 27'h7FF_FFFF;
    for (int i = 0; i < 5; i++)
      if (dsh[i]) begin
        ysh   = ysh >> (1 << i);
        ymask = ymask << (1 << i);
      end
    ymask = ~ymask;
    sticky = |({my, 3'b000} & ymask) | ((d > 9'd27) & |my);
    ay     = {ysh[26:1], ysh[0] | sticky};
    if (x[31] == y[31]) sum = {1'b0, ax} + {1'b0, ay};
    else                sum = {1'b0, ax} - {1'b0, ay};
    // normalise so that the leading one sits at bit 26
    ovf = sum[27];
    lz  = 5'd0;
    for (int i = 0; i <= 26; i++) if (sum[i]) lz = 5'(26 - i);
    nrm = sum;
    for (int i = 0; i < 5; i++) if (lz[i]) nrm = nrm << (1 << i);
    sh1 = {1'b0, sum[27:2], sum[1] | sum[0]};
    nrm = (nrm & {28{~ovf}}) | (sh1 & {28{ovf}});
    e   = 10'(signed'({2'b00, ex})) + (ovf ? 10'sd1 : -10'(signed'({5'b0, lz})));
    up  = nrm[2] & (nrm[1] | nrm[0] | nrm[3]);
    r   = {1'b0, nrm[26:3]} + 25'(up);
    if (r[24]) e = e + 1;                    // rounding carried out: mantissa is 1.0
    // result select written as AND-OR masks (zero, infinity or normal)
    nz   = (ex != 0) && (sum != 28'h0) && (e > 0);
    fin  = nz && (e < 255);
    inf  = nz && (e >= 255);
    s    = ({x[31], e[7:0], r[22:0] & {23{~r[24]}}} & {32{fin}})
         | ({x[31], 8'hFF, 23'h0} & {32{inf}});
  end
endmodule
