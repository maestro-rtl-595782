// Vector arithmetic unit (VAU): four 64-bit floating-point units and an integer processing
// unit (IPU), processing one 256-bit VRF word per cycle.
//
// Interface: start_i with instr_i (when busy_o is low) starts an instruction over the register
// group of LMUL registers (2*LMUL VRF words). Each cycle the unit requests word w of vs2 (bank
// port 0), vs1 (port 1) and, for VFMACC, vd (port 2). When all needed reads are granted in the
// same cycle the result is computed combinationally and written through the VAU write port in
// that cycle, and w advances; otherwise the unit retries (a refused VS1 read happens while the
// tensor unit owns that path). done_o pulses for one cycle after the last word. en_i is the
// clock enable of the tensor CSR.
//
// Operations: VFADD (vs2 + vs1), VFMUL (vs2 * vs1), VFMACC (vd + vs1 * vs2) in FP16 (16 lanes)
// or FP32 (8 lanes), each lane a fused multiply-add with one rounding (RNE); VADD and VMUL
// (low half) on 8-, 16- and 32-bit integers. FP add is computed as vs2*1.0 + vs1 on the same
// fused core, so it is exactly rounded.
// Follows the paper: four FPUs of 64 bit each, an IPU for 8/16/32-bit integers, three read
// ports and one write port of 256 bit for the VAU. Not implemented (this design's reduction):
// FP64, BF16, FP8, the widening dot products, and the FPU pipeline (results are combinational).
module vau
  import maestro_pkg::*;
(
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    en_i,
  input  logic    start_i,
  input  vinstr_t instr_i,
  output logic    busy_o,
  output logic    done_o,
  output logic    vs2_req_o,
  output vaddr_t  vs2_addr_o,
  input  logic    vs2_gnt_i,
  input  vword_t  vs2_data_i,
  output logic    vs1_req_o,
  output vaddr_t  vs1_addr_o,
  input  logic    vs1_gnt_i,
  input  vword_t  vs1_data_i,
  output logic    vd_req_o,
  output vaddr_t  vd_addr_o,
  input  logic    vd_gnt_i,
  input  vword_t  vd_data_i,
  output logic    wr_req_o,
  output vaddr_t  wr_addr_o,
  output vword_t  wr_data_o,
  output logic [VRF_WORD_W/8-1:0] wr_be_o,
  input  logic    wr_gnt_i
);

  vinstr_t    ins_q;
  logic [4:0] w_q, nw;
  logic       busy_q, go;

  assign nw = (ins_q.lmul == 0) ? 5'd2 : 5'(2 * int'(ins_q.lmul));
  assign busy_o = busy_q;

  always_comb begin
    vs2_req_o  = busy_q;
    vs1_req_o  = busy_q;
    vd_req_o   = busy_q && ins_q.op == VOP_VFMACC;
    vs2_addr_o = vrf_word(ins_q.vs2, int'(w_q));
    vs1_addr_o = vrf_word(ins_q.vs1, int'(w_q));
    vd_addr_o  = vrf_word(ins_q.vd,  int'(w_q));
    wr_addr_o  = vrf_word(ins_q.vd,  int'(w_q));
    go         = en_i && busy_q && vs2_gnt_i && vs1_gnt_i && (vd_gnt_i || !vd_req_o);
    wr_req_o   = go;
    go         = go && wr_gnt_i;
    wr_be_o    = '1;
  end

  // ---------------- floating point: 4 FPUs x 4 FP16 lanes (or 2 FP32 lanes) ----------------
  logic        narrow;
  logic [31:0] fa [16], fb [16], fe [16], fr [16];
  vword_t      fp_res, int_res;
  assign narrow = ins_q.ew != EW32;

  always_comb begin
    for (int l = 0; l < 16; l++) begin
      if (narrow) begin
        fa[l] = {16'h0, vs2_data_i[16*l +: 16]};
        fe[l] = (ins_q.op == VOP_VFMACC) ? {16'h0, vd_data_i[16*l +: 16]} :
                (ins_q.op == VOP_VFADD)  ? {16'h0, vs1_data_i[16*l +: 16]} : 32'h0;
        fb[l] = (ins_q.op == VOP_VFADD) ? 32'h0000_3c00 : {16'h0, vs1_data_i[16*l +: 16]};
      end else begin
        fa[l] = vs2_data_i[32*(l%8) +: 32];
        fe[l] = (ins_q.op == VOP_VFMACC) ? vd_data_i[32*(l%8) +: 32] :
                (ins_q.op == VOP_VFADD)  ? vs1_data_i[32*(l%8) +: 32] : 32'h0;
        fb[l] = (ins_q.op == VOP_VFADD) ? 32'h3f80_0000 : vs1_data_i[32*(l%8) +: 32];
      end
    end
  end

  for (genvar l = 0; l < 16; l++) begin : g_lane
    fp_fused_sum #(.EW(8), .MW(23)) i_fma (
      .narrow_i(narrow), .a_i(fa[l]), .b_i(fb[l]), .c_i(32'h0), .d_i(32'h0), .e_i(fe[l]),
      .neg_ab_i(1'b0), .neg_cd_i(1'b0), .r_o(fr[l])
    );
  end

  always_comb begin
    fp_res = '0;
    for (int l = 0; l < 16; l++) begin
      if (narrow) fp_res[16*l +: 16] = fr[l][15:0];
      else if (l < 8) fp_res[32*l +: 32] = fr[l];
    end
  end

  // ---------------- integer processing unit ----------------
  always_comb begin
    int_res = '0;
    unique case (ins_q.ew)
      EW8:  for (int l = 0; l < 32; l++)
              int_res[8*l +: 8] = (ins_q.op == VOP_VMUL) ?
                  8'(vs2_data_i[8*l +: 8] * vs1_data_i[8*l +: 8]) :
                  vs2_data_i[8*l +: 8] + vs1_data_i[8*l +: 8];
      EW16: for (int l = 0; l < 16; l++)
              int_res[16*l +: 16] = (ins_q.op == VOP_VMUL) ?
                  16'(vs2_data_i[16*l +: 16] * vs1_data_i[16*l +: 16]) :
                  vs2_data_i[16*l +: 16] + vs1_data_i[16*l +: 16];
      default: for (int l = 0; l < 8; l++)
              int_res[32*l +: 32] = (ins_q.op == VOP_VMUL) ?
                  32'(vs2_data_i[32*l +: 32] * vs1_data_i[32*l +: 32]) :
                  vs2_data_i[32*l +: 32] + vs1_data_i[32*l +: 32];
    endcase
  end

  assign wr_data_o = (ins_q.op == VOP_VADD || ins_q.op == VOP_VMUL) ? int_res : fp_res;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ins_q  <= '0;
      w_q    <= '0;
      busy_q <= 1'b0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (!busy_q) begin
        if (start_i) begin
          ins_q  <= instr_i;
          w_q    <= '0;
          busy_q <= 1'b1;
        end
      end else if (go) begin
        w_q <= w_q + 5'd1;
        if (w_q == nw - 5'd1) begin
          busy_q <= 1'b0;
          done_o <= 1'b1;
        end
      end
    end
  end

endmodule
