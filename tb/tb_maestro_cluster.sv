// End-to-end testbench of the Maestro cluster at its default parameters.
//
// Data enter and leave the L1 TCDM through external master port 0 (the scalar core's port);
// the vector unit is driven by pre-decoded instructions and the MP-FFT through its register
// port. The program:
//   A  tensor MatMul: VLE of X, Y, W (LMUL = 8), TCSR into tensor mode, TENSOR (N = 16), TCSR
//      back, VSE of Z; Z is compared bit-exactly with a sequential FP16 FMA reference.
//   B  VAU: VFMACC FP32, VFADD FP16, VADD on 8-bit integers, VMUL on 16-bit integers, results
//      stored and checked.
//   C  VSLDU: slide up (FP32 elements, keeps the low elements of vd), slide down (16-bit, zero
//      fill) and VMV, checked.
//   D  concurrency: a C32 FFT of 256 points runs while the VLSU streams loads and stores on the
//      same banks and the VAU and VSLDU share VRF bank port 1; FFT output against a DFT, the
//      VAU and VSLDU results checked; a C64 FFT of 64 points follows.
// At the end it prints how often each mechanism occurred (tensor jobs, tensor-mode switches,
// FFT jobs and bit-reversal stalls, TCDM bank conflicts, VRF port refusals, scoreboard holds,
// instructions per unit) and checks that each one occurred.
module tb_maestro_cluster;
  import maestro_pkg::*;
  import fp_ref_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int unsigned NEXT = 9;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        vvalid, vready, vidle;
  vinstr_t     vins;
  logic        fclk_en, freq, fwe, fdone, fbusy;
  logic [2:0]  faddr;
  logic [31:0] fwdata, frdata;
  logic        ereq [NEXT], egnt [NEXT], erv [NEXT];
  tcdm_req_t   em   [NEXT];
  logic [63:0] erd  [NEXT];
  tcsr_t       csr;
  logic [31:0] conflicts, refusals, fstalls, vstalls, hazards;
  logic [31:0] issued [4];

  maestro_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .vinstr_valid_i(vvalid), .vinstr_i(vins), .vinstr_ready_o(vready), .vec_idle_o(vidle),
    .fft_clk_en_i(fclk_en), .fft_reg_req_i(freq), .fft_reg_we_i(fwe), .fft_reg_addr_i(faddr),
    .fft_reg_wdata_i(fwdata), .fft_reg_rdata_o(frdata), .fft_done_o(fdone), .fft_busy_o(fbusy),
    .ext_req_i(ereq), .ext_m_i(em), .ext_gnt_o(egnt), .ext_rvalid_o(erv), .ext_rdata_o(erd),
    .tcsr_o(csr), .tcdm_conflicts_o(conflicts), .vrf_refusals_o(refusals),
    .fft_stall_cycles_o(fstalls), .vtu_stall_cycles_o(vstalls), .issued_o(issued),
    .hazard_cycles_o(hazards)
  );

  // ---------------- mechanism counters ----------------
  int n_tmode_sw = 0, n_fft_jobs = 0, n_vtu_jobs = 0;
  logic tmode_d = 0;
  always @(posedge clk) begin
    if (rst_n && csr.tensor_en != tmode_d) n_tmode_sw++;
    tmode_d <= csr.tensor_en;
    if (fdone) n_fft_jobs++;
    if (dut.fu_done[FU_VTU]) n_vtu_jobs++;
  end

  // ---------------- L1 access through external port 0 ----------------
  task automatic l1_wr(input int addr, input logic [63:0] d);
    @(negedge clk);
    ereq[0] = 1; em[0] = '{addr: 32'(addr), we: 1'b1, be: 8'hff, wdata: d};
    #1;
    while (!egnt[0]) begin @(negedge clk); #1; end
    @(negedge clk);
    ereq[0] = 0;
  endtask

  task automatic l1_rd(input int addr, output logic [63:0] d);
    @(negedge clk);
    ereq[0] = 1; em[0] = '{addr: 32'(addr), we: 1'b0, be: 8'hff, wdata: '0};
    #1;
    while (!egnt[0]) begin @(negedge clk); #1; end
    @(negedge clk);
    ereq[0] = 0;
    d = erd[0];
  endtask

  task automatic l1_wr_word(input int addr, input vword_t w);
    for (int j = 0; j < 4; j++) l1_wr(addr + 8 * j, w[64*j +: 64]);
  endtask

  task automatic l1_rd_word(input int addr, output vword_t w);
    for (int j = 0; j < 4; j++) begin
      logic [63:0] d;
      l1_rd(addr + 8 * j, d);
      w[64*j +: 64] = d;
    end
  endtask

  // ---------------- vector instruction issue ----------------
  task automatic issue(input vop_e op, input vew_e ew, input int lmul, input int vd,
                       input int vs1, input int vs2, input logic [31:0] rs1,
                       input logic [31:0] rs2);
    @(negedge clk);
    vvalid = 1;
    vins = '{op: op, ew: ew, lmul: 4'(lmul), vd: 5'(vd), vs1: 5'(vs1), vs2: 5'(vs2),
             rs1: rs1, rs2: rs2};
    #1;
    while (!vready) begin @(negedge clk); #1; end
    @(negedge clk);
    vvalid = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (!vidle) @(negedge clk);
  endtask

  task automatic chk(input logic [255:0] got, input logic [255:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s\n  got %h\n  exp %h", what, got, exp);
    end
  endtask

  // ---------------- FFT register port ----------------
  task automatic fft_reg(input logic [2:0] a, input logic [31:0] d);
    @(negedge clk);
    freq = 1; fwe = 1; faddr = a; fwdata = d;
    @(negedge clk);
    freq = 0; fwe = 0;
  endtask

  // ================= A: tensor MatMul =================
  localparam int AX = 'h0000, AY = 'h0200, AW = 'h0400, AZ = 'h0600;
  logic [15:0] X [12][16], W [16][16], Y [12][16];

  task automatic phase_a();
    vword_t wd;
    for (int i = 0; i < 12; i++) for (int j = 0; j < 16; j++) X[i][j] = rand_h(-3, 1);
    for (int j = 0; j < 16; j++) for (int k = 0; k < 16; k++) W[j][k] = rand_h(-3, 1);
    for (int i = 0; i < 12; i++) for (int k = 0; k < 16; k++) Y[i][k] = rand_h(-2, 2);
    for (int g = 0; g < 4; g++)
      for (int q = 0; q < 3; q++) begin
        for (int e = 0; e < 16; e++) wd[16*e +: 16] = X[4*q + e/4][4*g + e%4];
        l1_wr_word(AX + 32 * (3 * g + q), wd);
      end
    for (int j = 0; j < 16; j++) begin
      for (int k = 0; k < 16; k++) wd[16*k +: 16] = W[j][k];
      l1_wr_word(AW + 32 * j, wd);
    end
    for (int i = 0; i < 12; i++) begin
      for (int k = 0; k < 16; k++) wd[16*k +: 16] = Y[i][k];
      l1_wr_word(AY + 32 * i, wd);
    end
    issue(VOP_VLE, EW16, 8, 0, 0, 0, AX, 0);
    issue(VOP_VLE, EW16, 8, 8, 0, 0, AY, 0);
    issue(VOP_VLE, EW16, 8, 16, 0, 0, AW, 0);
    issue(VOP_TCSR, EW16, 1, 0, 0, 0, 32'b11111, 0);
    issue(VOP_TENSOR, EW16, 8, 0, 0, 0, 0, {9'd0, 3'd4, 5'd24, 5'd8, 5'd16, 5'd0});
    issue(VOP_TCSR, EW16, 1, 0, 0, 0, 32'b01111, 0);
    issue(VOP_VSE, EW16, 8, 24, 0, 0, AZ, 0);
    wait_idle();
    for (int i = 0; i < 12; i++) begin
      vword_t got, exp;
      l1_rd_word(AZ + 32 * i, got);
      for (int k = 0; k < 16; k++) begin
        logic [15:0] z;
        z = Y[i][k];
        for (int j = 0; j < 16; j++) z = r2h(h2r(z) + h2r(X[i][j]) * h2r(W[j][k]));
        exp[16*k +: 16] = z;
      end
      chk(got, exp, $sformatf("tensor Z row %0d", i));
    end
  endtask

  // ================= B: VAU =================
  localparam int BA = 'h0800, BB = 'h0840, BC = 'h0880, BO = 'h0900;
  vword_t va [2], vb [2], vc [2];

  task automatic phase_b();
    for (int w = 0; w < 2; w++) begin
      for (int l = 0; l < 8; l++) begin
        va[w][32*l +: 32] = rand_f(-3, 3);
        vb[w][32*l +: 32] = rand_f(-3, 3);
        vc[w][32*l +: 32] = rand_f(-3, 3);
      end
      l1_wr_word(BA + 32 * w, va[w]);
      l1_wr_word(BB + 32 * w, vb[w]);
      l1_wr_word(BC + 32 * w, vc[w]);
    end
    issue(VOP_VLE, EW32, 1, 1, 0, 0, BA, 0);
    issue(VOP_VLE, EW32, 1, 2, 0, 0, BB, 0);
    issue(VOP_VLE, EW32, 1, 3, 0, 0, BC, 0);
    issue(VOP_VFMACC, EW32, 1, 3, 1, 2, 0, 0);     // v3 = v1 * v2 + v3
    issue(VOP_VFADD, EW16, 1, 4, 1, 2, 0, 0);      // v4 = v2 + v1 (FP16 lanes)
    issue(VOP_VADD, EW8, 1, 5, 1, 2, 0, 0);        // v5 = v2 + v1 (bytes)
    issue(VOP_VMUL, EW16, 1, 6, 1, 2, 0, 0);       // v6 = v2 * v1 (16-bit, low half)
    issue(VOP_VSE, EW32, 1, 3, 0, 0, BO, 0);
    issue(VOP_VSE, EW16, 1, 4, 0, 0, BO + 64, 0);
    issue(VOP_VSE, EW8, 1, 5, 0, 0, BO + 128, 0);
    issue(VOP_VSE, EW16, 1, 6, 0, 0, BO + 192, 0);
    wait_idle();
    for (int w = 0; w < 2; w++) begin
      vword_t got, e3, e4, e5, e6;
      for (int l = 0; l < 8; l++)
        e3[32*l +: 32] = r2f(f2r(va[w][32*l +: 32]) * f2r(vb[w][32*l +: 32]) + f2r(vc[w][32*l +: 32]));
      for (int l = 0; l < 16; l++) begin
        real s;
        s = h2r(va[w][16*l +: 16]) + h2r(vb[w][16*l +: 16]);
        e4[16*l +: 16] = r2h(s);
        // NaN inputs (any 16-bit pattern can occur here) give the canonical quiet NaN
        if (va[w][16*l+10 +: 5] == 5'h1f || vb[w][16*l+10 +: 5] == 5'h1f) e4[16*l +: 16] = 'x;
        e6[16*l +: 16] = va[w][16*l +: 16] * vb[w][16*l +: 16];
      end
      for (int l = 0; l < 32; l++) e5[8*l +: 8] = va[w][8*l +: 8] + vb[w][8*l +: 8];
      l1_rd_word(BO + 32 * w, got);       chk(got, e3, "vfmacc fp32");
      l1_rd_word(BO + 64 + 32 * w, got);
      for (int l = 0; l < 16; l++) if ($isunknown(e4[16*l +: 16])) e4[16*l +: 16] = got[16*l +: 16];
      chk(got, e4, "vfadd fp16");
      l1_rd_word(BO + 128 + 32 * w, got); chk(got, e5, "vadd e8");
      l1_rd_word(BO + 192 + 32 * w, got); chk(got, e6, "vmul e16");
    end
  endtask

  // ================= C: VSLDU =================
  localparam int CO = 'h0A00;

  task automatic phase_c();
    vword_t got, e;
    logic [511:0] src, old, exp;
    int up, dn;
    up = 3; dn = 5;
    src = {vb[1], vb[0]};
    old = {vc[1], vc[0]};
    issue(VOP_VLE, EW32, 1, 7, 0, 0, BC, 0);                 // v7 = C
    issue(VOP_VSLIDEUP, EW32, 1, 7, 0, 2, 32'(up), 0);       // v7[i] = v2[i-3], i >= 3
    issue(VOP_VSLIDEDOWN, EW16, 1, 9, 0, 2, 32'(dn), 0);     // v9[i] = v2[i+5] or 0
    issue(VOP_VMV, EW32, 1, 10, 0, 2, 0, 0);                 // v10 = v2
    issue(VOP_VSE, EW32, 1, 7, 0, 0, CO, 0);
    issue(VOP_VSE, EW16, 1, 9, 0, 0, CO + 64, 0);
    issue(VOP_VSE, EW32, 1, 10, 0, 0, CO + 128, 0);
    wait_idle();
    exp = (src << (32 * up)) | (old & ((512'd1 << (32 * up)) - 1));
    for (int w = 0; w < 2; w++) begin l1_rd_word(CO + 32 * w, got); chk(got, exp[256*w +: 256], "slide up"); end
    exp = src >> (16 * dn);
    for (int w = 0; w < 2; w++) begin l1_rd_word(CO + 64 + 32 * w, got); chk(got, exp[256*w +: 256], "slide down"); end
    for (int w = 0; w < 2; w++) begin l1_rd_word(CO + 128 + 32 * w, got); chk(got, src[256*w +: 256], "vmv"); end
  endtask

  // ================= D: FFT with concurrent vector traffic =================
  localparam int FS = 'h4000, FD = 'h8000;

  task automatic fft_check(input int log2n, input bit c32);
    int n;
    real xr [1024], xi [1024];
    real maxmag, err, tol;
    logic [63:0] pair;
    n = 1 << log2n;
    pair = '0;
    for (int i = 0; i < n; i++) begin
      if (c32) begin
        logic [15:0] r, im;
        r = rand_h(-4, 0); im = rand_h(-4, 0);
        xr[i] = h2r(r); xi[i] = h2r(im);
        if (i % 2 == 0) pair[31:0] = {im, r};
        else begin pair[63:32] = {im, r}; l1_wr(FS + 4 * (i - 1), pair); end
      end else begin
        logic [31:0] r, im;
        r = r2f(($urandom % 2000) / 1000.0 - 1.0); im = r2f(($urandom % 2000) / 1000.0 - 1.0);
        xr[i] = f2r(r); xi[i] = f2r(im);
        l1_wr(FS + 8 * i, {im, r});
      end
    end
    fft_reg(3'd2, FS);
    fft_reg(3'd3, FD);
    fft_reg(3'd4, {27'h0, c32, 4'(log2n)});
    fft_reg(3'd0, 32'h1);
    if (c32) begin
      // vector traffic while the FFT runs: load/store streams through the L1 banks, and the
      // VAU and VSLDU competing for VRF bank port 1
      // v16..23 += v0..7 * v8..15; v24..31 = v1..8, its reads meet the VAU's VS1 reads on
      // the same bank (word offsets differ by an even number of cycles)
      issue(VOP_VFMACC, EW32, 8, 16, 0, 8, 0, 0);
      issue(VOP_VMV, EW32, 8, 24, 0, 1, 0, 0);
      for (int r = 0; r < 4; r++) begin
        issue(VOP_VLE, EW32, 4, 1 + 0, 0, 0, 'h1000 + 256 * r, 0);
        issue(VOP_VSE, EW32, 4, 1 + 0, 0, 0, 'h2000 + 256 * r, 0);
      end
    end
    @(negedge clk);
    while (!fdone) @(negedge clk);
    wait_idle();
    maxmag = 0; err = 0;
    for (int k = 0; k < n; k++) begin
      real er, ei, yr, yi;
      logic [63:0] d;
      er = 0; ei = 0;
      for (int i = 0; i < n; i++) begin
        real ang;
        ang = -2.0 * PI * real'((i * k) % n) / real'(n);
        er += xr[i] * $cos(ang) - xi[i] * $sin(ang);
        ei += xr[i] * $sin(ang) + xi[i] * $cos(ang);
      end
      if (c32) begin
        l1_rd(FD + 4 * (k - k % 2), d);
        d = (k % 2) ? (d >> 32) : d;
        yr = h2r(d[15:0]); yi = h2r(d[31:16]);
      end else begin
        l1_rd(FD + 8 * k, d);
        yr = f2r(d[31:0]); yi = f2r(d[63:32]);
      end
      if ($sqrt(er * er + ei * ei) > maxmag) maxmag = $sqrt(er * er + ei * ei);
      if ($sqrt((yr - er) ** 2 + (yi - ei) ** 2) > err) err = $sqrt((yr - er) ** 2 + (yi - ei) ** 2);
    end
    tol = c32 ? 4e-3 * log2n : 4e-7 * log2n;
    checks++;
    if (err > tol * maxmag) begin
      failures++;
      $display("FAIL fft n=%0d c32=%0d: max error %g, max |X| %g", n, c32, err, maxmag);
    end
    $display("fft n=%0d c32=%0d: relative error %g", n, c32, err / maxmag);
  endtask

  task automatic phase_d();
    vword_t got, e;
    issue(VOP_VSE, EW32, 8, 1, 0, 0, 'h3400, 0);    // snapshot of v1..8
    fft_check(8, 1);
    // VMV copied v1..8 to v24..31
    issue(VOP_VSE, EW32, 8, 24, 0, 0, 'h3000, 0);
    wait_idle();
    for (int w = 0; w < 16; w++) begin
      l1_rd_word('h3400 + 32 * w, e);
      l1_rd_word('h3000 + 32 * w, got);
      chk(got, e, "vmv during fft");
    end
    fft_check(6, 0);
  endtask

  // ---------------- run ----------------
  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vvalid = 0; vins = '0;
    fclk_en = 1; freq = 0; fwe = 0; faddr = 0; fwdata = 0;
    for (int j = 0; j < int'(NEXT); j++) begin ereq[j] = 0; em[j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    phase_a();
    phase_b();
    phase_c();
    phase_d();
    $display("mechanisms: tensor jobs %0d, tensor-mode switches %0d, VTU stall cycles %0d",
             n_vtu_jobs, n_tmode_sw, vstalls);
    $display("            FFT jobs %0d, FFT bit-reversal stall cycles %0d", n_fft_jobs, fstalls);
    $display("            TCDM bank conflicts %0d, VRF port refusal cycles %0d, scoreboard hold cycles %0d",
             conflicts, refusals, hazards);
    $display("            issued: VAU %0d, VLSU %0d, VSLDU %0d, VTU %0d",
             issued[FU_VAU], issued[FU_VLSU], issued[FU_VSLDU], issued[FU_VTU]);
    checks++; if (n_vtu_jobs != 1 || issued[FU_VTU] != 1) failures++;
    checks++; if (n_tmode_sw != 2) failures++;
    checks++; if (vstalls != 0) failures++;
    checks++; if (n_fft_jobs != 2) failures++;
    checks++; if (fstalls == 0) failures++;
    checks++; if (conflicts == 0) failures++;
    checks++; if (refusals == 0) failures++;
    checks++; if (hazards == 0) failures++;
    checks++; if (issued[FU_VAU] != 5 || issued[FU_VSLDU] != 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
