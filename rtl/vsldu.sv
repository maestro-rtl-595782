// Vector slide unit (VSLDU): vector slide up, slide down and whole-group move.
//
// Interface: start_i with instr_i (VSLIDEUP, VSLIDEDOWN or VMV, when busy_o is low); the group
// has LMUL registers (2*LMUL VRF words), the element width is ew and rs1 is the slide amount in
// elements. The unit first reads the whole vs2 group into a buffer (one word per granted cycle
// on its read port, bank port 1 behind the VAU VS1 / tensor unit), then writes the vd group one
// word per granted cycle on its write port (lowest write priority):
//   VSLIDEUP   vd[i] = vs2[i - off] for i >= off; elements below off keep their value
//              (byte enables off)
//   VSLIDEDOWN vd[i] = vs2[i + off] when i + off < VLMAX, 0 otherwise
//   VMV        vd[i] = vs2[i]
// done_o pulses for one cycle at the end. en_i is the clock enable of the tensor CSR.
// The operations and port priorities are the paper's; the read-all-then-write buffering
// (up to 16 words, 512 B) is this design's choice.
module vsldu
  import maestro_pkg::*;
(
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    en_i,
  input  logic    start_i,
  input  vinstr_t instr_i,
  output logic    busy_o,
  output logic    done_o,
  output logic    rd_req_o,
  output vaddr_t  rd_addr_o,
  input  logic    rd_gnt_i,
  input  vword_t  rd_data_i,
  output logic    wr_req_o,
  output vaddr_t  wr_addr_o,
  output vword_t  wr_data_o,
  output logic [VRF_WORD_W/8-1:0] wr_be_o,
  input  logic    wr_gnt_i
);

  localparam int unsigned MAXW = 16;                  // words of an LMUL = 8 group
  localparam int unsigned BB   = MAXW * VRF_WORD_W / 8; // buffer bytes (512)

  typedef enum logic [1:0] { D_IDLE, D_RD, D_WR } dstate_e;
  dstate_e state_q;

  vinstr_t    ins_q;
  logic [4:0] w_q, nw;
  logic [MAXW*VRF_WORD_W-1:0] buf_q, shifted;
  logic [31:0] ob;        // slide amount in bytes (saturated)
  logic        up;

  assign nw     = (ins_q.lmul == 0) ? 5'd2 : 5'(2 * int'(ins_q.lmul));
  assign busy_o = state_q != D_IDLE;
  assign up     = ins_q.op == VOP_VSLIDEUP;

  always_comb begin
    logic [31:0] raw;
    raw = (ins_q.op == VOP_VMV) ? 32'd0 : (ins_q.rs1 << ins_q.ew);
    ob  = (raw > 32'(BB)) ? 32'(BB) : raw;
  end

  always_comb begin
    logic [12:0] sh;
    sh = 13'(8 * ob);
    shifted = up ? (buf_q << sh) : (buf_q >> sh);
    // slide down: bytes from beyond the group are zero
    if (!up) begin
      for (int i = 0; i < int'(BB); i++)
        if (32'(i) + ob >= 32'(32 * int'(nw))) shifted[8*i +: 8] = '0;
    end
  end

  always_comb begin
    rd_req_o  = en_i && state_q == D_RD;
    rd_addr_o = vrf_word(ins_q.vs2, int'(w_q));
    wr_req_o  = en_i && state_q == D_WR;
    wr_addr_o = vrf_word(ins_q.vd, int'(w_q));
    wr_data_o = shifted[VRF_WORD_W * w_q[3:0] +: VRF_WORD_W];
    for (int i = 0; i < int'(VRF_WORD_W / 8); i++)
      wr_be_o[i] = !up || (32'(32 * int'(w_q) + i) >= ob);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= D_IDLE;
      ins_q   <= '0;
      w_q     <= '0;
      buf_q   <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (en_i) begin
        unique case (state_q)
          D_IDLE: if (start_i) begin
            ins_q   <= instr_i;
            w_q     <= '0;
            buf_q   <= '0;
            state_q <= D_RD;
          end
          D_RD: if (rd_gnt_i) begin
            buf_q[VRF_WORD_W * w_q[3:0] +: VRF_WORD_W] <= rd_data_i;
            w_q <= w_q + 5'd1;
            if (w_q == nw - 5'd1) begin
              w_q     <= '0;
              state_q <= D_WR;
            end
          end
          D_WR: if (wr_gnt_i) begin
            w_q <= w_q + 5'd1;
            if (w_q == nw - 5'd1) begin
              state_q <= D_IDLE;
              done_o  <= 1'b1;
            end
          end
          default: state_q <= D_IDLE;
        endcase
      end
    end
  end

endmodule
