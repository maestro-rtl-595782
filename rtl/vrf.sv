// Vector register file: 32 x 512 bit in four banks of 256-bit words, three read ports and one
// write port per bank, shared by the functional units through read and write crossbars.
//
// Global word g (register g/2, half g%2) lives in bank g%4, row g/4. Read requests are served
// combinationally (data in the same cycle as the grant, like the latch-based array of the
// paper); writes take effect at the clock edge, with 32 byte enables.
//
// Per-bank priorities, as the paper specifies them:
//   read port 0: VAU vs2  >  VLSU vs2
//   read port 1: VAU vs1  >  VSLDU vs2      (in tensor mode the tensor unit takes the VAU's place)
//   read port 2: VAU vd   >  VLSU vd
//   write port : VAU      >  VLSU  >  VSLDU (the tensor unit shares the VAU's write port)
// With tensor_en_i the VS1 read path and the shared write port are routed to the tensor unit,
// which wins over the VAU on them (the paper's demux/mux; the TU-over-VAU order is this
// design's choice). A requester that loses keeps its request; gnt tells it when it is served.
// Storage is in flip-flops here; the paper uses latches.
module vrf
  import maestro_pkg::*;
(
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    tensor_en_i,
  // read ports, indexed by vrf_rd_port_e
  input  logic    rd_req_i  [VRF_NR_RD],
  input  vaddr_t  rd_addr_i [VRF_NR_RD],
  output logic    rd_gnt_o  [VRF_NR_RD],
  output vword_t  rd_data_o [VRF_NR_RD],
  // tensor unit read (VS1 path) and write (shared with the VAU)
  input  logic    tu_rd_req_i,
  input  vaddr_t  tu_rd_addr_i,
  output logic    tu_rd_gnt_o,
  output vword_t  tu_rd_data_o,
  input  logic    tu_wr_req_i,
  input  vaddr_t  tu_wr_addr_i,
  input  vword_t  tu_wr_data_i,
  output logic    tu_wr_gnt_o,
  // write ports, indexed by vrf_wr_port_e
  input  logic    wr_req_i  [VRF_NR_WR],
  input  vaddr_t  wr_addr_i [VRF_NR_WR],
  input  vword_t  wr_data_i [VRF_NR_WR],
  input  logic [VRF_WORD_W/8-1:0] wr_be_i [VRF_NR_WR],
  output logic    wr_gnt_o  [VRF_NR_WR]
);

  localparam int unsigned RW = $clog2(VRF_ROWS);

  vword_t mem_q [VRF_BANKS][VRF_ROWS];

  function automatic logic [1:0] bank_of(input vaddr_t a);
    return a[1:0];
  endfunction
  function automatic logic [RW-1:0] row_of(input vaddr_t a);
    return a[VRF_AW-1:2];
  endfunction

  // ---- effective requesters of the VS1 path and the shared write port ----
  logic   vs1_req;  vaddr_t vs1_addr;  logic vs1_is_tu;
  logic   w0_req;   vaddr_t w0_addr;   vword_t w0_data;  logic [VRF_WORD_W/8-1:0] w0_be;
  logic   w0_is_tu;
  always_comb begin
    vs1_is_tu = tensor_en_i && tu_rd_req_i;
    vs1_req   = vs1_is_tu || rd_req_i[RD_VAU_VS1];
    vs1_addr  = vs1_is_tu ? tu_rd_addr_i : rd_addr_i[RD_VAU_VS1];
    w0_is_tu  = tensor_en_i && tu_wr_req_i;
    w0_req    = w0_is_tu || wr_req_i[WR_VAU];
    w0_addr   = w0_is_tu ? tu_wr_addr_i : wr_addr_i[WR_VAU];
    w0_data   = w0_is_tu ? tu_wr_data_i : wr_data_i[WR_VAU];
    w0_be     = w0_is_tu ? '1 : wr_be_i[WR_VAU];
  end

  // ---- read crossbar ----
  always_comb begin
    for (int p = 0; p < int'(VRF_NR_RD); p++) begin
      rd_gnt_o[p]  = 1'b0;
      rd_data_o[p] = mem_q[bank_of(rd_addr_i[p])][row_of(rd_addr_i[p])];
    end
    tu_rd_data_o = mem_q[bank_of(tu_rd_addr_i)][row_of(tu_rd_addr_i)];
    tu_rd_gnt_o  = vs1_is_tu;          // highest priority on its bank port
    // port 0
    rd_gnt_o[RD_VAU_VS2]  = rd_req_i[RD_VAU_VS2];
    rd_gnt_o[RD_VLSU_VS2] = rd_req_i[RD_VLSU_VS2] &&
        !(rd_req_i[RD_VAU_VS2] && bank_of(rd_addr_i[RD_VAU_VS2]) == bank_of(rd_addr_i[RD_VLSU_VS2]));
    // port 1
    rd_gnt_o[RD_VAU_VS1]  = rd_req_i[RD_VAU_VS1] && !vs1_is_tu;
    rd_gnt_o[RD_VSLDU]    = rd_req_i[RD_VSLDU] &&
        !(vs1_req && bank_of(vs1_addr) == bank_of(rd_addr_i[RD_VSLDU]));
    // port 2
    rd_gnt_o[RD_VAU_VD]   = rd_req_i[RD_VAU_VD];
    rd_gnt_o[RD_VLSU_VD]  = rd_req_i[RD_VLSU_VD] &&
        !(rd_req_i[RD_VAU_VD] && bank_of(rd_addr_i[RD_VAU_VD]) == bank_of(rd_addr_i[RD_VLSU_VD]));
  end

  // ---- write crossbar: one write port per bank ----
  logic b0_hit, b1_hit;
  always_comb begin
    for (int p = 0; p < int'(VRF_NR_WR); p++) wr_gnt_o[p] = 1'b0;
    tu_wr_gnt_o = w0_is_tu;
    wr_gnt_o[WR_VAU] = wr_req_i[WR_VAU] && !w0_is_tu;
    b0_hit = w0_req && bank_of(w0_addr) == bank_of(wr_addr_i[WR_VLSU]);
    wr_gnt_o[WR_VLSU] = wr_req_i[WR_VLSU] && !b0_hit;
    b1_hit = (w0_req && bank_of(w0_addr) == bank_of(wr_addr_i[WR_VSLDU])) ||
             (wr_req_i[WR_VLSU] && bank_of(wr_addr_i[WR_VLSU]) == bank_of(wr_addr_i[WR_VSLDU]));
    wr_gnt_o[WR_VSLDU] = wr_req_i[WR_VSLDU] && !b1_hit;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mem_q <= '{default: '0};
    end else begin
      if (w0_req) begin
        for (int i = 0; i < int'(VRF_WORD_W / 8); i++)
          if (w0_be[i]) mem_q[bank_of(w0_addr)][row_of(w0_addr)][8*i +: 8] <= w0_data[8*i +: 8];
      end
      for (int p = 1; p < int'(VRF_NR_WR); p++) begin
        if (wr_gnt_o[p]) begin
          for (int i = 0; i < int'(VRF_WORD_W / 8); i++)
            if (wr_be_i[p][i]) mem_q[bank_of(wr_addr_i[p])][row_of(wr_addr_i[p])][8*i +: 8] <= wr_data_i[p][8*i +: 8];
        end
      end
    end
  end

endmodule
