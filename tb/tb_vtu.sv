// Self-checking testbench of the tensor unit on the real vector register file.
//
// Random FP16 X (12 x N), W (N x 16) and Y (12 x 16) are written into the VRF groups V0, V16
// and V8 in the paper's layout, the unit is started in tensor mode with Z in V24, and every
// element of Z is compared with the reference  z = y; for n: z = round16(z + x[i][n]*w[n][k]),
// the accumulation order of the CE chain. The job length must be 15 + 16*(N/4) + 17 + 12 cycles.
module tb_vtu;
  import maestro_pkg::*;
  import fp_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   rd_req [VRF_NR_RD], rd_gnt [VRF_NR_RD];
  vaddr_t rd_addr [VRF_NR_RD];
  vword_t rd_data [VRF_NR_RD];
  logic   wr_req [VRF_NR_WR], wr_gnt [VRF_NR_WR];
  vaddr_t wr_addr [VRF_NR_WR];
  vword_t wr_data [VRF_NR_WR];
  logic [31:0] wr_be [VRF_NR_WR];
  logic   tu_rreq, tu_rgnt, tu_wreq, tu_wgnt;
  vaddr_t tu_raddr, tu_waddr;
  vword_t tu_rdata, tu_wdata;
  logic   start, busy, done;
  logic [2:0] ng;
  logic [31:0] stalls;

  vrf i_vrf (
    .clk_i(clk), .rst_ni(rst_n), .tensor_en_i(1'b1),
    .rd_req_i(rd_req), .rd_addr_i(rd_addr), .rd_gnt_o(rd_gnt), .rd_data_o(rd_data),
    .tu_rd_req_i(tu_rreq), .tu_rd_addr_i(tu_raddr), .tu_rd_gnt_o(tu_rgnt), .tu_rd_data_o(tu_rdata),
    .tu_wr_req_i(tu_wreq), .tu_wr_addr_i(tu_waddr), .tu_wr_data_i(tu_wdata), .tu_wr_gnt_o(tu_wgnt),
    .wr_req_i(wr_req), .wr_addr_i(wr_addr), .wr_data_i(wr_data), .wr_be_i(wr_be), .wr_gnt_o(wr_gnt)
  );

  vtu dut (
    .clk_i(clk), .rst_ni(rst_n), .en_i(1'b1), .start_i(start),
    .x_reg_i(5'd0), .w_reg_i(5'd16), .y_reg_i(5'd8), .z_reg_i(5'd24), .n_groups_i(ng),
    .busy_o(busy), .done_o(done),
    .rd_req_o(tu_rreq), .rd_addr_o(tu_raddr), .rd_gnt_i(tu_rgnt), .rd_data_i(tu_rdata),
    .wr_req_o(tu_wreq), .wr_addr_o(tu_waddr), .wr_data_o(tu_wdata), .wr_gnt_i(tu_wgnt),
    .stall_cycles_o(stalls)
  );

  logic [15:0] X [12][16], W [16][16], Y [12][16];

  task automatic vwrite(input vaddr_t a, input vword_t d);
    @(negedge clk);
    wr_req[WR_VLSU] = 1; wr_addr[WR_VLSU] = a; wr_data[WR_VLSU] = d;
    @(negedge clk);
    wr_req[WR_VLSU] = 0;
  endtask

  task automatic run(input int groups);
    int n, cyc;
    vword_t wd;
    n = 4 * groups;
    for (int i = 0; i < 12; i++) for (int j = 0; j < n; j++) X[i][j] = rand_h(-3, 1);
    for (int j = 0; j < n; j++) for (int k = 0; k < 16; k++) W[j][k] = rand_h(-3, 1);
    for (int i = 0; i < 12; i++) for (int k = 0; k < 16; k++) Y[i][k] = rand_h(-2, 2);
    for (int gg = 0; gg < groups; gg++)
      for (int q = 0; q < 3; q++) begin
        for (int e = 0; e < 16; e++) wd[16*e +: 16] = X[4*q + e/4][4*gg + e%4];
        vwrite(vrf_word(5'd0, 3*gg + q), wd);
      end
    for (int j = 0; j < n; j++) begin
      for (int k = 0; k < 16; k++) wd[16*k +: 16] = W[j][k];
      vwrite(vrf_word(5'd16, j), wd);
    end
    for (int i = 0; i < 12; i++) begin
      for (int k = 0; k < 16; k++) wd[16*k +: 16] = Y[i][k];
      vwrite(vrf_word(5'd8, i), wd);
    end
    @(negedge clk); ng = 3'(groups); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != 1 + 15 + 16 * groups + 17 + 12 + 1) begin  // start cycle, job, done register
      failures++; $display("FAIL cycles %0d for %0d groups", cyc, groups);
    end
    $display("vtu N=%0d: %0d cycles for %0d FMA", n, cyc, 12 * 16 * n);
    @(negedge clk);
    for (int i = 0; i < 12; i++) begin
      rd_req[RD_VLSU_VS2] = 1; rd_addr[RD_VLSU_VS2] = vrf_word(5'd24, i);
      #1;
      for (int k = 0; k < 16; k++) begin
        logic [15:0] z;
        z = Y[i][k];
        for (int j = 0; j < n; j++) z = r2h(h2r(z) + h2r(X[i][j]) * h2r(W[j][k]));
        checks++;
        if (rd_data[RD_VLSU_VS2][16*k +: 16] !== z) begin
          failures++;
          if (failures < 10) $display("FAIL z[%0d][%0d] got %h exp %h", i, k, rd_data[RD_VLSU_VS2][16*k +: 16], z);
        end
      end
    end
    rd_req[RD_VLSU_VS2] = 0;
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < VRF_NR_RD; p++) begin rd_req[p] = 0; rd_addr[p] = '0; end
    for (int p = 0; p < VRF_NR_WR; p++) begin wr_req[p] = 0; wr_addr[p] = '0; wr_data[p] = '0; wr_be[p] = '1; end
    start = 0; ng = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1);
    run(4);
    run(2);
    run(3);
    checks++; if (stalls != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
