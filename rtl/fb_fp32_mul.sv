// fb_fp32_mul: combinational FP32 multiplier (helper of the weight update and
// batch normalization units).
//
// Round to nearest, ties to even; zero or subnormal inputs give +0 (with the
// product sign), underflow flushes to zero and overflow gives infinity.
module fb_fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] p
);
  logic        sgn, up, nz, fin, inf;
  logic [47:0] prod;
  logic [23:0] m;
  logic        g, st;
  logic signed [10:0] e;
  logic [24:0] r;

  always_comb begin
    sgn  = a[31] ^ b[31];
    prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e    = 11'(a[30:23]) + 11'(b[30:23]) - 11'sd127;
    if (prod[47]) begin
      m  = prod[47:24];
      g  = prod[23];
      st = |prod[22:0];
      e  = e + 1;
    end else begin
      m  = prod[46:23];
      g  = prod[22];
      st = |prod[21:0];
    end
    up = g & (st | m[0]);
    r  = {1'b0, m} + 25'(up);
    if (r[24]) e = e + 1;                    // rounding carried out: mantissa is 1.0
    // result select as AND-OR masks (keeps the multiplier out of resource sharing)
    nz  = (a[30:23] != 0) && (b[30:23] != 0) && (e > 0);
    fin = nz && (e < 255);
    inf = nz && (e >= 255);
    p   = {sgn, 31'h0}
        | ({1'b0, e[7:0], r[22:0] & {23{~r[24]}}} & {32{fin}})
        | ({1'b0, 8'hFF, 23'h0} & {32{inf}});
  end
endmodule
