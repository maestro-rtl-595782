// Self-checking testbench of the DO-SDOTP unit.
//
// Drives a native FP16 instance and an FP32 instance (in FP32 and in narrow FP16 mode) with
// random operands and a few special cases, and compares both outputs with the exact sum
// computed in double precision and rounded once by the reference package.
module tb_do_sdotp;
  import fp_ref_pkg::*;

  int checks = 0, failures = 0;

  logic        mod;
  logic [15:0] h [5];
  logic [31:0] f [5];
  logic        nar;
  logic [15:0] hs, hd;
  logic [31:0] fs, fd;

  do_sdotp #(.EW(5), .MW(10)) i_h (
    .narrow_i(1'b0), .mod_i(mod), .p0_i(h[0]), .p1_i(h[1]), .p2_i(h[2]), .p3_i(h[3]),
    .p4_i(h[4]), .sum_o(hs), .diff_o(hd)
  );
  do_sdotp i_f (
    .narrow_i(nar), .mod_i(mod), .p0_i(f[0]), .p1_i(f[1]), .p2_i(f[2]), .p3_i(f[3]),
    .p4_i(f[4]), .sum_o(fs), .diff_o(fd)
  );

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  task automatic run_h();
    real s, t;
    #1;
    t = h2r(h[0]) * h2r(h[1]) + (mod ? -1.0 : 1.0) * h2r(h[2]) * h2r(h[3]);
    s = h2r(h[4]) + t;
    check("fp16 sum", {16'h0, hs}, {16'h0, r2h(s)});
    s = h2r(h[4]) - t;
    check("fp16 diff", {16'h0, hd}, {16'h0, r2h(s)});
    // the FP32 unit in narrow mode must give the same bits
    nar = 1'b1;
    for (int i = 0; i < 5; i++) f[i] = {16'h0, h[i]};
    #1;
    check("fp32/narrow sum", fs, {16'h0, hs});
    check("fp32/narrow diff", fd, {16'h0, hd});
  endtask

  task automatic run_f();
    real s, t;
    nar = 1'b0;
    #1;
    t = f2r(f[0]) * f2r(f[1]) + (mod ? -1.0 : 1.0) * f2r(f[2]) * f2r(f[3]);
    s = f2r(f[4]) + t;
    check("fp32 sum", fs, r2f(s));
    s = f2r(f[4]) - t;
    check("fp32 diff", fd, r2f(s));
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed: 1*1 + 1*1 + 0.5, MOD = 0 -> 2.5 and -1.5
    mod = 0;
    h[0] = 16'h3c00; h[1] = 16'h3c00; h[2] = 16'h3c00; h[3] = 16'h3c00; h[4] = 16'h3800;
    run_h();
    check("fp16 2.5", {16'h0, hs}, 32'h0000_4100);
    check("fp16 -1.5", {16'h0, hd}, 32'h0000_be00);
    // MOD = 1 gives E + (1 - 1) = E exactly
    mod = 1;
    run_h();
    check("fp16 mod", {16'h0, hs}, 32'h0000_3800);
    // subnormal result: tiny products
    mod = 0;
    h[0] = 16'h0400; h[1] = 16'h3000; h[2] = 16'h0000; h[3] = 16'h0000; h[4] = 16'h0000;
    run_h();
    // random FP16
    for (int n = 0; n < 3000; n++) begin
      mod = 1'($urandom);
      for (int i = 0; i < 4; i++) h[i] = rand_h(-6, 6);
      h[4] = rand_h(-8, 8);
      if (n % 7 == 0) h[4] = 16'h0000;
      run_h();
    end
    // random FP32 with short significands (exact in double)
    for (int n = 0; n < 3000; n++) begin
      mod = 1'($urandom);
      for (int i = 0; i < 4; i++) f[i] = rand_f(-10, 10);
      f[4] = rand_f(-12, 12);
      run_f();
    end
    // infinities and NaN
    nar = 0; mod = 0;
    f[0] = 32'h7f80_0000; f[1] = 32'h3f80_0000; f[2] = 32'h0; f[3] = 32'h0; f[4] = 32'h3f80_0000;
    #1 check("inf sum", fs, 32'h7f80_0000);
    check("inf diff", fd, 32'hff80_0000);
    f[1] = 32'h0;
    #1 check("inf*0 nan", fs, 32'h7fc0_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
