// Self-checking testbench of the MP-FFT accelerator.
//
// A behavioural L1 memory with four ports (random grants, read data one cycle after the grant)
// holds random complex input. The accelerator is programmed through its register port for
// C64 and C32 transforms of several sizes, forward and inverse; the output at DST is compared
// with a direct DFT computed in double precision, within a tolerance set by the format
// (relative to the largest output magnitude). It also checks that the C32 last stage stalls on
// bit-reversed writes while C64 does not, and counts cycles per job.
module tb_mp_fft;
  import maestro_pkg::*;
  import fp_ref_pkg::*;
  localparam real PI = 3.14159265358979323846;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        reg_req, reg_we;
  logic [2:0]  reg_addr;
  logic [31:0] reg_wdata, reg_rdata, stalls;
  logic        done, busy;
  logic        mreq [4], mgnt [4], mrv [4];
  tcdm_req_t   mq [4];
  logic [63:0] mrd [4];

  mp_fft dut (
    .clk_i(clk), .rst_ni(rst_n), .clk_en_i(1'b1),
    .reg_req_i(reg_req), .reg_we_i(reg_we), .reg_addr_i(reg_addr), .reg_wdata_i(reg_wdata),
    .reg_rdata_o(reg_rdata), .done_o(done), .busy_o(busy),
    .mem_req_o(mreq), .mem_o(mq), .mem_gnt_i(mgnt), .mem_rvalid_i(mrv), .mem_rdata_i(mrd),
    .stall_cycles_o(stalls)
  );

  logic [63:0] mem [4096];
  always_comb for (int j = 0; j < 4; j++) mgnt[j] = mreq[j] && ($urandom % 4 != 0);
  always_ff @(posedge clk) begin
    for (int j = 0; j < 4; j++) begin
      mrv[j] <= 1'b0;
      if (mreq[j] && mgnt[j]) begin
        if (mq[j].we) begin
          for (int b = 0; b < 8; b++)
            if (mq[j].be[b]) mem[mq[j].addr[14:3]][8*b +: 8] <= mq[j].wdata[8*b +: 8];
        end else begin
          mrv[j] <= 1'b1;
          mrd[j] <= mem[mq[j].addr[14:3]];
        end
      end
    end
  end

  task automatic wr_reg(input logic [2:0] a, input logic [31:0] d);
    @(negedge clk);
    reg_req = 1; reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_req = 0; reg_we = 0;
  endtask

  localparam int SRC = 0, DST = 16384;   // byte addresses

  task automatic run_fft(input int log2n, input bit c32, input bit inv);
    int n, cyc;
    real xr [1024], xi [1024];
    real maxmag, err, tol, yr, yi, er, ei;
    logic [31:0] st0;
    n = 1 << log2n;
    for (int i = 0; i < n; i++) begin
      if (c32) begin
        logic [15:0] r, im;
        r = rand_h(-4, 0); im = rand_h(-4, 0);
        xr[i] = h2r(r); xi[i] = h2r(im);
        mem[(SRC + 4 * i) / 8][32 * (i % 2) +: 32] = {im, r};
      end else begin
        logic [31:0] r, im;
        r = r2f(($urandom % 2000) / 1000.0 - 1.0); im = r2f(($urandom % 2000) / 1000.0 - 1.0);
        xr[i] = f2r(r); xi[i] = f2r(im);
        mem[(SRC + 8 * i) / 8] = {im, r};
      end
    end
    st0 = stalls;
    wr_reg(3'd2, SRC);
    wr_reg(3'd3, DST);
    wr_reg(3'd4, {26'h0, inv, c32, 4'(log2n)});
    wr_reg(3'd0, 32'h1);
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    @(negedge clk);
    // reference DFT
    maxmag = 0; err = 0;
    for (int k = 0; k < n; k++) begin
      er = 0; ei = 0;
      for (int i = 0; i < n; i++) begin
        real ang;
        ang = (inv ? 2.0 : -2.0) * PI * real'((i * k) % n) / real'(n);
        er += xr[i] * $cos(ang) - xi[i] * $sin(ang);
        ei += xr[i] * $sin(ang) + xi[i] * $cos(ang);
      end
      if (c32) begin
        logic [31:0] w;
        w = mem[(DST + 4 * k) / 8][32 * (k % 2) +: 32];
        yr = h2r(w[15:0]); yi = h2r(w[31:16]);
      end else begin
        yr = f2r(mem[(DST + 8 * k) / 8][31:0]); yi = f2r(mem[(DST + 8 * k) / 8][63:32]);
      end
      if ($sqrt(er * er + ei * ei) > maxmag) maxmag = $sqrt(er * er + ei * ei);
      if ($sqrt((yr - er) ** 2 + (yi - ei) ** 2) > err) err = $sqrt((yr - er) ** 2 + (yi - ei) ** 2);
    end
    tol = c32 ? 4e-3 * log2n : 4e-7 * log2n;
    checks++;
    if (err > tol * maxmag) begin
      failures++;
      $display("FAIL fft n=%0d c32=%0d inv=%0d: max error %g, max |X| %g", n, c32, inv, err, maxmag);
    end
    $display("fft n=%0d c32=%0d inv=%0d: %0d cycles, rel. error %g, stall cycles %0d",
             n, c32, inv, cyc, err / maxmag, stalls - st0);
    checks++;
    if (c32 ? (stalls - st0 == 0) : (stalls - st0 != 0)) begin
      failures++;
      $display("FAIL bit-reversal stall count %0d", stalls - st0);
    end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reg_req = 0; reg_we = 0; reg_addr = 0; reg_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_fft(3, 0, 0);
    run_fft(3, 1, 0);
    run_fft(4, 1, 0);
    run_fft(6, 0, 0);
    run_fft(6, 1, 1);
    run_fft(7, 1, 0);
    run_fft(9, 0, 0);
    run_fft(9, 0, 1);
    run_fft(10, 1, 0);
    // status register reads back idle
    @(negedge clk); reg_addr = 3'd1; #1;
    checks++; if (reg_rdata[0] !== 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
