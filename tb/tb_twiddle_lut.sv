// Self-checking testbench of the twiddle LUTs: every index of a C32 (FP16, 1024-point) and a
// C64 (FP32, 512-point) table is compared with cos/sin computed by the simulator's $cos/$sin
// and rounded by the reference package; an FP32 entry may differ by one unit in the last place
// from the library value.
module tb_twiddle_lut;
  import fp_ref_pkg::*;
  localparam real PI = 3.14159265358979323846;
  int checks = 0, failures = 0;

  logic [8:0]  k16;
  logic [15:0] c16, s16;
  logic [7:0]  k32;
  logic [31:0] c32, s32;

  twiddle_lut #(.NMAX(1024), .FMT_W(16)) i_l16 (.k_i(k16), .cos_o(c16), .sin_o(s16));
  twiddle_lut #(.NMAX(512),  .FMT_W(32)) i_l32 (.k_i(k32), .cos_o(c32), .sin_o(s32));

  function automatic int ulp_diff(input logic [31:0] a, input logic [31:0] b);
    int d;
    if (a[31] != b[31]) return ((a[30:0] == 0) && (b[30:0] == 0)) ? 0 : 1000;
    d = int'(a[30:0]) - int'(b[30:0]);
    return d < 0 ? -d : d;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 512; k++) begin
      real th;
      k16 = 9'(k);
      th = 2.0 * PI * real'(k) / 1024.0;
      #1;
      checks += 2;
      if (k == 256 ? (c16[14:0] != 0) : (ulp_diff({16'h0, c16}, {16'h0, r2h($cos(th))}) > 1)) begin
        failures++; $display("FAIL cos16 k=%0d %h %h", k, c16, r2h($cos(th)));
      end
      if (ulp_diff({16'h0, s16}, {16'h0, r2h($sin(th))}) > 1) begin
        failures++; $display("FAIL sin16 k=%0d %h %h", k, s16, r2h($sin(th)));
      end
    end
    for (int k = 0; k < 256; k++) begin
      real th;
      k32 = 8'(k);
      th = 2.0 * PI * real'(k) / 512.0;
      #1;
      checks += 2;
      if (k == 128 ? (c32[30:0] != 0) : (ulp_diff(c32, r2f($cos(th))) > 1)) begin
        failures++; $display("FAIL cos32 k=%0d %h %h", k, c32, r2f($cos(th)));
      end
      if (ulp_diff(s32, r2f($sin(th))) > 1) begin
        failures++; $display("FAIL sin32 k=%0d %h %h", k, s32, r2f($sin(th)));
      end
    end
    // exact points
    k16 = 9'd256; #1; checks++; if (c16[14:0] != 0 || s16 != 16'h3c00) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
