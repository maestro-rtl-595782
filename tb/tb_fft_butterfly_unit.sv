// Self-checking testbench of the butterfly unit: random C64 butterflies on lane 0 and random
// pairs of C32 butterflies on both lanes, compared with YL/YR = XL +/- TW*XR computed exactly in
// double precision and rounded once per output component.
module tb_fft_butterfly_unit;
  import fp_ref_pkg::*;
  int checks = 0, failures = 0;

  logic        c32;
  logic [63:0] xl [2], xr [2], tw [2], yl [2], yr [2];

  fft_butterfly_unit dut (.c32_i(c32), .xl_i(xl), .xr_i(xr), .tw_i(tw), .yl_o(yl), .yr_o(yr));

  task automatic chk(input string w, input logic [31:0] g, input logic [31:0] e);
    checks++;
    if (g !== e) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h exp %h", w, g, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    c32 = 0;
    for (int n = 0; n < 1000; n++) begin
      real a, b, c, d, e, f;
      xl[0] = {rand_f(-4, 4), rand_f(-4, 4)};
      xr[0] = {rand_f(-4, 4), rand_f(-4, 4)};
      tw[0] = {rand_f(-3, 0), rand_f(-3, 0)};
      xl[1] = '0; xr[1] = '0; tw[1] = '0;
      #1;
      a = f2r(xl[0][31:0]); b = f2r(xl[0][63:32]);
      c = f2r(xr[0][31:0]); d = f2r(xr[0][63:32]);
      e = f2r(tw[0][31:0]); f = f2r(tw[0][63:32]);
      chk("c64 yl.re", yl[0][31:0],  r2f(a + (c*e - d*f)));
      chk("c64 yl.im", yl[0][63:32], r2f(b + (c*f + d*e)));
      chk("c64 yr.re", yr[0][31:0],  r2f(a - (c*e - d*f)));
      chk("c64 yr.im", yr[0][63:32], r2f(b - (c*f + d*e)));
    end
    c32 = 1;
    for (int n = 0; n < 1000; n++) begin
      for (int l = 0; l < 2; l++) begin
        xl[l] = {32'h0, rand_h(-4, 4), rand_h(-4, 4)};
        xr[l] = {32'h0, rand_h(-4, 4), rand_h(-4, 4)};
        tw[l] = {32'h0, rand_h(-3, 0), rand_h(-3, 0)};
      end
      #1;
      for (int l = 0; l < 2; l++) begin
        real a, b, c, d, e, f;
        a = h2r(xl[l][15:0]); b = h2r(xl[l][31:16]);
        c = h2r(xr[l][15:0]); d = h2r(xr[l][31:16]);
        e = h2r(tw[l][15:0]); f = h2r(tw[l][31:16]);
        chk("c32 yl", yl[l][31:0], {r2h(b + (c*f + d*e)), r2h(a + (c*e - d*f))});
        chk("c32 yr", yr[l][31:0], {r2h(b - (c*f + d*e)), r2h(a - (c*e - d*f))});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
