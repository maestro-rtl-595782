// Maestro cluster: vector unit (controller, VAU, VLSU, VSLDU, VTU, tensor CSR, VRF), MP-FFT
// accelerator and the shared 128 KiB L1 TCDM with its interconnect.
//
// Interface
//   vinstr_*      : pre-decoded vector instructions from the scalar core (valid/ready);
//                   vec_idle_o is high when no vector instruction is in flight.
//   fft_*         : register port of the MP-FFT (word offsets 0 TRIGGER, 1 STATUS, 2 SRC,
//                   3 DST, 4 CFG), its clock enable and done event, as the cluster controller
//                   and the scalar core would drive them.
//   ext_*         : NEXT 64-bit TCDM master ports for the agents that live outside this RTL
//                   (scalar core data port and the DMA's 512-bit port as 8 x 64 bit).
//   statistics    : TCDM bank conflicts, VRF port refusals, FFT bit-reversal stalls, VTU stalls,
//                   instructions issued per unit and cycles the controller held an instruction.
// TCDM master order: 0-3 VLSU, 4-7 MP-FFT, 8.. external. Timing: single clock; TCDM reads return
// one cycle after the grant; VRF reads are served in the cycle of the grant.
// Follows the paper: the units, the VRF port sharing and priorities, tensor-mode routing of the
// VS1 read path and write port to the tensor unit, clock enables from the TCSR, 16 L1 banks
// shared by the vector unit, MP-FFT and DMA. Not in this RTL (outside it, driven through the
// ports): host domain, scalar core, DMA engine, instruction cache, AXI buses, FLLs.
module maestro_cluster
  import maestro_pkg::*;
#(
  parameter int unsigned NEXT = 9
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // vector instructions
  input  logic        vinstr_valid_i,
  input  vinstr_t     vinstr_i,
  output logic        vinstr_ready_o,
  output logic        vec_idle_o,
  // MP-FFT register port
  input  logic        fft_clk_en_i,
  input  logic        fft_reg_req_i,
  input  logic        fft_reg_we_i,
  input  logic [2:0]  fft_reg_addr_i,
  input  logic [31:0] fft_reg_wdata_i,
  output logic [31:0] fft_reg_rdata_o,
  output logic        fft_done_o,
  output logic        fft_busy_o,
  // external TCDM masters
  input  logic        ext_req_i    [NEXT],
  input  tcdm_req_t   ext_m_i      [NEXT],
  output logic        ext_gnt_o    [NEXT],
  output logic        ext_rvalid_o [NEXT],
  output logic [63:0] ext_rdata_o  [NEXT],
  // statistics
  output tcsr_t       tcsr_o,
  output logic [31:0] tcdm_conflicts_o,
  output logic [31:0] vrf_refusals_o,
  output logic [31:0] fft_stall_cycles_o,
  output logic [31:0] vtu_stall_cycles_o,
  output logic [31:0] issued_o [4],
  output logic [31:0] hazard_cycles_o
);

  localparam int unsigned NM = 8 + NEXT;

  // ================= L1 TCDM =================
  logic        m_req [NM];
  tcdm_req_t   m_q   [NM];
  logic        m_gnt [NM];
  logic        m_rv  [NM];
  logic [63:0] m_rd  [NM];

  logic        l_req [4], l_gnt [4], l_rv [4];
  tcdm_req_t   l_q   [4];
  logic [63:0] l_rd  [4];
  logic        f_req [4], f_gnt [4], f_rv [4];
  tcdm_req_t   f_q   [4];
  logic [63:0] f_rd  [4];

  always_comb begin
    for (int j = 0; j < 4; j++) begin
      m_req[j]   = l_req[j];  m_q[j]   = l_q[j];
      l_gnt[j]   = m_gnt[j];  l_rv[j]  = m_rv[j];   l_rd[j] = m_rd[j];
      m_req[4+j] = f_req[j];  m_q[4+j] = f_q[j];
      f_gnt[j]   = m_gnt[4+j]; f_rv[j] = m_rv[4+j]; f_rd[j] = m_rd[4+j];
    end
    for (int j = 0; j < int'(NEXT); j++) begin
      m_req[8+j]      = ext_req_i[j];
      m_q[8+j]        = ext_m_i[j];
      ext_gnt_o[j]    = m_gnt[8+j];
      ext_rvalid_o[j] = m_rv[8+j];
      ext_rdata_o[j]  = m_rd[8+j];
    end
  end

  tcdm_interconnect #(.NM(NM)) i_tcdm (
    .clk_i, .rst_ni, .req_i(m_req), .m_i(m_q), .gnt_o(m_gnt), .rvalid_o(m_rv), .rdata_o(m_rd),
    .conflicts_o(tcdm_conflicts_o)
  );

  // ================= MP-FFT =================
  mp_fft i_fft (
    .clk_i, .rst_ni, .clk_en_i(fft_clk_en_i),
    .reg_req_i(fft_reg_req_i), .reg_we_i(fft_reg_we_i), .reg_addr_i(fft_reg_addr_i),
    .reg_wdata_i(fft_reg_wdata_i), .reg_rdata_o(fft_reg_rdata_o),
    .done_o(fft_done_o), .busy_o(fft_busy_o),
    .mem_req_o(f_req), .mem_o(f_q), .mem_gnt_i(f_gnt), .mem_rvalid_i(f_rv), .mem_rdata_i(f_rd),
    .stall_cycles_o(fft_stall_cycles_o)
  );

  // ================= vector unit =================
  logic    rd_req  [VRF_NR_RD];
  vaddr_t  rd_addr [VRF_NR_RD];
  logic    rd_gnt  [VRF_NR_RD];
  vword_t  rd_data [VRF_NR_RD];
  logic    wr_req  [VRF_NR_WR];
  vaddr_t  wr_addr [VRF_NR_WR];
  vword_t  wr_data [VRF_NR_WR];
  logic [VRF_WORD_W/8-1:0] wr_be [VRF_NR_WR];
  logic    wr_gnt  [VRF_NR_WR];
  logic    tu_rreq, tu_rgnt, tu_wreq, tu_wgnt;
  vaddr_t  tu_raddr, tu_waddr;
  vword_t  tu_rdata, tu_wdata;

  logic    fu_start [4], fu_busy [4], fu_done [4];
  vinstr_t fu_instr;
  logic    tcsr_we;
  logic [4:0] tcsr_wdata;
  logic    vau_en, vlsu_en, vsldu_en, vtu_en, tmode;

  vector_controller i_ctrl (
    .clk_i, .rst_ni, .valid_i(vinstr_valid_i), .instr_i(vinstr_i), .ready_o(vinstr_ready_o),
    .idle_o(vec_idle_o), .start_o(fu_start), .instr_o(fu_instr), .busy_i(fu_busy),
    .done_i(fu_done), .tcsr_we_o(tcsr_we), .tcsr_wdata_o(tcsr_wdata), .issued_o(issued_o),
    .hazard_cycles_o(hazard_cycles_o)
  );

  tcsr i_tcsr (
    .clk_i, .rst_ni, .we_i(tcsr_we), .wdata_i(tcsr_wdata), .vtu_busy_i(fu_busy[FU_VTU]),
    .csr_o(tcsr_o), .vau_en_o(vau_en), .vlsu_en_o(vlsu_en), .vsldu_en_o(vsldu_en),
    .vtu_en_o(vtu_en), .tensor_mode_o(tmode)
  );

  vrf i_vrf (
    .clk_i, .rst_ni, .tensor_en_i(tmode),
    .rd_req_i(rd_req), .rd_addr_i(rd_addr), .rd_gnt_o(rd_gnt), .rd_data_o(rd_data),
    .tu_rd_req_i(tu_rreq), .tu_rd_addr_i(tu_raddr), .tu_rd_gnt_o(tu_rgnt), .tu_rd_data_o(tu_rdata),
    .tu_wr_req_i(tu_wreq), .tu_wr_addr_i(tu_waddr), .tu_wr_data_i(tu_wdata), .tu_wr_gnt_o(tu_wgnt),
    .wr_req_i(wr_req), .wr_addr_i(wr_addr), .wr_data_i(wr_data), .wr_be_i(wr_be), .wr_gnt_o(wr_gnt)
  );

  vau i_vau (
    .clk_i, .rst_ni, .en_i(vau_en), .start_i(fu_start[FU_VAU]), .instr_i(fu_instr),
    .busy_o(fu_busy[FU_VAU]), .done_o(fu_done[FU_VAU]),
    .vs2_req_o(rd_req[RD_VAU_VS2]), .vs2_addr_o(rd_addr[RD_VAU_VS2]),
    .vs2_gnt_i(rd_gnt[RD_VAU_VS2]), .vs2_data_i(rd_data[RD_VAU_VS2]),
    .vs1_req_o(rd_req[RD_VAU_VS1]), .vs1_addr_o(rd_addr[RD_VAU_VS1]),
    .vs1_gnt_i(rd_gnt[RD_VAU_VS1]), .vs1_data_i(rd_data[RD_VAU_VS1]),
    .vd_req_o(rd_req[RD_VAU_VD]), .vd_addr_o(rd_addr[RD_VAU_VD]),
    .vd_gnt_i(rd_gnt[RD_VAU_VD]), .vd_data_i(rd_data[RD_VAU_VD]),
    .wr_req_o(wr_req[WR_VAU]), .wr_addr_o(wr_addr[WR_VAU]), .wr_data_o(wr_data[WR_VAU]),
    .wr_be_o(wr_be[WR_VAU]), .wr_gnt_i(wr_gnt[WR_VAU])
  );

  vlsu i_vlsu (
    .clk_i, .rst_ni, .en_i(vlsu_en), .start_i(fu_start[FU_VLSU]), .instr_i(fu_instr),
    .busy_o(fu_busy[FU_VLSU]), .done_o(fu_done[FU_VLSU]),
    .rd_req_o(rd_req[RD_VLSU_VS2]), .rd_addr_o(rd_addr[RD_VLSU_VS2]),
    .rd_gnt_i(rd_gnt[RD_VLSU_VS2]), .rd_data_i(rd_data[RD_VLSU_VS2]),
    .wr_req_o(wr_req[WR_VLSU]), .wr_addr_o(wr_addr[WR_VLSU]), .wr_data_o(wr_data[WR_VLSU]),
    .wr_be_o(wr_be[WR_VLSU]), .wr_gnt_i(wr_gnt[WR_VLSU]),
    .mem_req_o(l_req), .mem_o(l_q), .mem_gnt_i(l_gnt), .mem_rvalid_i(l_rv), .mem_rdata_i(l_rd)
  );
  // the second VLSU read port (bank port 2, VD operand) is used by indexed accesses, which
  // this VLSU does not implement
  assign rd_req[RD_VLSU_VD]  = 1'b0;
  assign rd_addr[RD_VLSU_VD] = '0;

  vsldu i_vsldu (
    .clk_i, .rst_ni, .en_i(vsldu_en), .start_i(fu_start[FU_VSLDU]), .instr_i(fu_instr),
    .busy_o(fu_busy[FU_VSLDU]), .done_o(fu_done[FU_VSLDU]),
    .rd_req_o(rd_req[RD_VSLDU]), .rd_addr_o(rd_addr[RD_VSLDU]),
    .rd_gnt_i(rd_gnt[RD_VSLDU]), .rd_data_i(rd_data[RD_VSLDU]),
    .wr_req_o(wr_req[WR_VSLDU]), .wr_addr_o(wr_addr[WR_VSLDU]), .wr_data_o(wr_data[WR_VSLDU]),
    .wr_be_o(wr_be[WR_VSLDU]), .wr_gnt_i(wr_gnt[WR_VSLDU])
  );

  vtu i_vtu (
    .clk_i, .rst_ni, .en_i(vtu_en), .start_i(fu_start[FU_VTU]),
    .x_reg_i(fu_instr.rs2[4:0]), .w_reg_i(fu_instr.rs2[9:5]), .y_reg_i(fu_instr.rs2[14:10]),
    .z_reg_i(fu_instr.rs2[19:15]), .n_groups_i(fu_instr.rs2[22:20]),
    .busy_o(fu_busy[FU_VTU]), .done_o(fu_done[FU_VTU]),
    .rd_req_o(tu_rreq), .rd_addr_o(tu_raddr), .rd_gnt_i(tu_rgnt), .rd_data_i(tu_rdata),
    .wr_req_o(tu_wreq), .wr_addr_o(tu_waddr), .wr_data_o(tu_wdata), .wr_gnt_i(tu_wgnt),
    .stall_cycles_o(vtu_stall_cycles_o)
  );

  // cycles in which at least one VRF request lost its bank port
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vrf_refusals_o <= '0;
    end else begin
      logic lost;
      lost = 1'b0;
      for (int p = 0; p < int'(VRF_NR_RD); p++) if (rd_req[p] && !rd_gnt[p]) lost = 1'b1;
      for (int p = 0; p < int'(VRF_NR_WR); p++) if (wr_req[p] && !wr_gnt[p]) lost = 1'b1;
      if (lost) vrf_refusals_o <= vrf_refusals_o + 32'd1;
    end
  end

endmodule
