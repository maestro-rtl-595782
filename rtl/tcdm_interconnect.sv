// Low-latency L1 interconnect: NM 64-bit master ports to the NB word-interleaved TCDM banks.
//
// Byte address bits [2:0] select the byte in a 64-bit word, bits [3 +: log2 NB] the bank and the
// bits above the row in the bank, so consecutive words fall into consecutive banks. Each bank
// grants one master per cycle, round robin among the requesters (the pointer moves past the
// last winner); the others see gnt low and keep their request. Read data return to the
// granted master one cycle later with rvalid. The banks themselves are instantiated here.
// The paper names a single-cycle TCDM interconnect to 16 interleaved banks; the arbitration
// rule is this design's choice.
module tcdm_interconnect
  import maestro_pkg::*;
#(
  parameter int unsigned NM    = 13,
  parameter int unsigned NB    = L1_BANKS,
  parameter int unsigned WORDS = L1_BANK_WORDS
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_i    [NM],
  input  tcdm_req_t   m_i      [NM],
  output logic        gnt_o    [NM],
  output logic        rvalid_o [NM],
  output logic [63:0] rdata_o  [NM],
  output logic [31:0] conflicts_o      // requests refused because a bank was busy
);

  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned RW = $clog2(WORDS);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  logic          b_req   [NB];
  logic          b_we    [NB];
  logic [RW-1:0] b_addr  [NB];
  logic [7:0]    b_be    [NB];
  logic [63:0]   b_wdata [NB];
  logic [63:0]   b_rdata [NB];
  logic [MW-1:0] b_win   [NB];
  logic [MW-1:0] rr_q    [NB];

  logic          rpend_q [NM];
  logic [BW-1:0] bsel_q  [NM];

  always_comb begin
    for (int m = 0; m < int'(NM); m++) gnt_o[m] = 1'b0;
    for (int b = 0; b < int'(NB); b++) begin
      b_req[b] = 1'b0; b_we[b] = 1'b0; b_addr[b] = '0; b_be[b] = '0; b_wdata[b] = '0;
      b_win[b] = '0;
      for (int k = 0; k < int'(NM); k++) begin
        int m;
        m = (int'(rr_q[b]) + k) % int'(NM);
        if (!b_req[b] && req_i[m] && int'(m_i[m].addr[3 +: BW]) == b) begin
          b_req[b]   = 1'b1;
          b_win[b]   = MW'(m);
          b_we[b]    = m_i[m].we;
          b_addr[b]  = m_i[m].addr[3 + BW +: RW];
          b_be[b]    = m_i[m].be;
          b_wdata[b] = m_i[m].wdata;
          gnt_o[m]   = 1'b1;
        end
      end
    end
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    tcdm_bank #(.WORDS(WORDS)) i_bank (
      .clk_i, .req_i(b_req[b]), .we_i(b_we[b]), .addr_i(b_addr[b]), .be_i(b_be[b]),
      .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q        <= '{default: '0};
      rpend_q     <= '{default: 1'b0};
      bsel_q      <= '{default: '0};
      conflicts_o <= '0;
    end else begin
      int c;
      c = 0;
      for (int b = 0; b < int'(NB); b++)
        if (b_req[b]) rr_q[b] <= MW'((int'(b_win[b]) + 1) % int'(NM));
      for (int m = 0; m < int'(NM); m++) begin
        rpend_q[m] <= req_i[m] && gnt_o[m] && !m_i[m].we;
        bsel_q[m]  <= m_i[m].addr[3 +: BW];
        if (req_i[m] && !gnt_o[m]) c++;
      end
      conflicts_o <= conflicts_o + 32'(c);
    end
  end

  always_comb begin
    for (int m = 0; m < int'(NM); m++) begin
      rvalid_o[m] = rpend_q[m];
      rdata_o[m]  = b_rdata[bsel_q[m]];
    end
  end

endmodule
