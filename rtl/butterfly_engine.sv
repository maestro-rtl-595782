// Floating-point radix-2 decimation-in-time butterfly engine.
//
//   YL = XL + TW * XR,   YR = XL - TW * XR
//
// with XL = a + jb, XR = c + jd and the twiddle TW = e + jf. Written out, the real and the
// imaginary parts have the paper's form E +/- (A*B +/- C*D):
//   Re{YL}, Re{YR} = a +/- (c*e - d*f)   -> DO-SDOTP with MOD = 1, P4 = a
//   Im{YL}, Im{YR} = b +/- (c*f + d*e)   -> DO-SDOTP with MOD = 0, P4 = b
// The MOD settings, the P4 operands and the output names follow the paper's butterfly figure;
// the assignment of c, d, e, f to P0..P3 follows from the equation. Each output is rounded
// once. `narrow_i` selects the narrow format in the low bits (FP16 on the FP32 engine).
// Combinational.
module butterfly_engine #(
  parameter int unsigned EW  = 8,
  parameter int unsigned MW  = 23,
  parameter int unsigned NEW = 5,
  parameter int unsigned NMW = 10
) (
  input  logic           narrow_i,
  input  logic [EW+MW:0] a_i, b_i,   // XL = a + jb
  input  logic [EW+MW:0] c_i, d_i,   // XR = c + jd
  input  logic [EW+MW:0] e_i, f_i,   // TW = e + jf
  output logic [EW+MW:0] yl_re_o, yl_im_o,
  output logic [EW+MW:0] yr_re_o, yr_im_o
);

  do_sdotp #(.EW(EW), .MW(MW), .NEW(NEW), .NMW(NMW)) i_re (
    .narrow_i, .mod_i(1'b1),
    .p0_i(c_i), .p1_i(e_i), .p2_i(d_i), .p3_i(f_i), .p4_i(a_i),
    .sum_o(yl_re_o), .diff_o(yr_re_o)
  );

  do_sdotp #(.EW(EW), .MW(MW), .NEW(NEW), .NMW(NMW)) i_im (
    .narrow_i, .mod_i(1'b0),
    .p0_i(c_i), .p1_i(f_i), .p2_i(d_i), .p3_i(e_i), .p4_i(b_i),
    .sum_o(yl_im_o), .diff_o(yr_im_o)
  );

endmodule
