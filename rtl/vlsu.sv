// Vector load/store unit (VLSU): moves register groups between the VRF and the L1 TCDM.
//
// Interface: start_i with instr_i (VLE or VSE, when busy_o is low). rs1 is the byte address of
// the first element (32-byte aligned); the group of LMUL registers (2*LMUL VRF words, or the
// register named by vd for VSE, which reads it as the store data) is moved one 256-bit VRF
// word at a time as four 64-bit TCDM accesses on the unit's four master ports, word w covering
// bytes rs1 + 32w .. rs1 + 32w + 31. A port that is refused by the interconnect keeps its request
// until granted; read data arrive with rvalid one cycle after the grant.
//   VLE: issue the four reads, collect the data, write the VRF word (VLSU write port, retried
//        while a higher-priority unit holds the bank), next word.
//   VSE: read the VRF word (VLSU VS2 read port, bank port 0 behind the VAU), issue the four
//        writes, next word.
// done_o pulses for one cycle at the end. en_i is the clock enable of the tensor CSR.
// Follows the paper: the VLSU has the second priority on bank read ports 0/2 and on the write
// port, and 4 x 64-bit TCDM ports (256 bit/cycle). Unit-stride accesses only; indexed and
// strided accesses of the paper are not implemented. Word-by-word operation (no overlap of the
// read and write phases of consecutive words) is this design's simplification.
module vlsu
  import maestro_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic        start_i,
  input  vinstr_t     instr_i,
  output logic        busy_o,
  output logic        done_o,
  // VRF
  output logic        rd_req_o,
  output vaddr_t      rd_addr_o,
  input  logic        rd_gnt_i,
  input  vword_t      rd_data_i,
  output logic        wr_req_o,
  output vaddr_t      wr_addr_o,
  output vword_t      wr_data_o,
  output logic [VRF_WORD_W/8-1:0] wr_be_o,
  input  logic        wr_gnt_i,
  // TCDM
  output logic        mem_req_o    [4],
  output tcdm_req_t   mem_o        [4],
  input  logic        mem_gnt_i    [4],
  input  logic        mem_rvalid_i [4],
  input  logic [63:0] mem_rdata_i  [4]
);

  typedef enum logic [1:0] { L_IDLE, L_VRD, L_MEM, L_VWR } lstate_e;
  lstate_e state_q;

  vinstr_t     ins_q;
  logic [4:0]  w_q, nw;
  logic [3:0]  sent_q, got_q;
  vword_t      buf_q;
  logic        store;

  assign store  = ins_q.op == VOP_VSE;
  assign nw     = (ins_q.lmul == 0) ? 5'd2 : 5'(2 * int'(ins_q.lmul));
  assign busy_o = state_q != L_IDLE;

  always_comb begin
    rd_req_o  = en_i && state_q == L_VRD;
    rd_addr_o = vrf_word(ins_q.vd, int'(w_q));
    wr_req_o  = en_i && state_q == L_VWR;
    wr_addr_o = vrf_word(ins_q.vd, int'(w_q));
    wr_data_o = buf_q;
    wr_be_o   = '1;
    for (int j = 0; j < 4; j++) begin
      mem_req_o[j]     = en_i && state_q == L_MEM && !sent_q[j];
      mem_o[j].addr    = ins_q.rs1 + 32'(32 * int'(w_q) + 8 * j);
      mem_o[j].we      = store;
      mem_o[j].be      = '1;
      mem_o[j].wdata   = buf_q[64*j +: 64];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= L_IDLE;
      ins_q   <= '0;
      w_q     <= '0;
      sent_q  <= '0;
      got_q   <= '0;
      buf_q   <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (en_i) begin
        // read data of granted loads (also in the cycle the last grant arrives)
        for (int j = 0; j < 4; j++)
          if (mem_rvalid_i[j] && !store && state_q == L_MEM) begin
            buf_q[64*j +: 64] <= mem_rdata_i[j];
          end
        unique case (state_q)
          L_IDLE: if (start_i) begin
            ins_q   <= instr_i;
            w_q     <= '0;
            sent_q  <= '0;
            got_q   <= '0;
            state_q <= (instr_i.op == VOP_VSE) ? L_VRD : L_MEM;
          end
          L_VRD: if (rd_gnt_i) begin
            buf_q   <= rd_data_i;
            state_q <= L_MEM;
          end
          L_MEM: begin
            logic [3:0] s, g;
            for (int j = 0; j < 4; j++) begin
              s[j] = sent_q[j] | mem_gnt_i[j];
              g[j] = got_q[j] | mem_rvalid_i[j];
            end
            sent_q <= s;
            got_q  <= g;
            if (store ? (s == 4'hf) : (g == 4'hf)) begin
              sent_q <= '0;
              got_q  <= '0;
              if (store) begin
                w_q <= w_q + 5'd1;
                if (w_q == nw - 5'd1) begin state_q <= L_IDLE; done_o <= 1'b1; end
                else                         state_q <= L_VRD;
              end else begin
                state_q <= L_VWR;
              end
            end
          end
          L_VWR: if (wr_gnt_i) begin
            w_q <= w_q + 5'd1;
            if (w_q == nw - 5'd1) begin state_q <= L_IDLE; done_o <= 1'b1; end
            else                         state_q <= L_MEM;
          end
          default: state_q <= L_IDLE;
        endcase
      end
    end
  end

endmodule
