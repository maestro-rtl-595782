// MP-FFT: memory-coupled multi-precision radix-2 DIT FFT accelerator.
//
// Computes an N-point complex FFT (or inverse FFT without 1/N scaling) on data in L1, in C64
// format (FP32 real and imaginary parts, one sample per 64-bit word, N <= 512) or C32 format
// (FP16 parts, two samples per word, N <= 1024). The input at SRC is in natural order and is
// overwritten by the intermediate stages; the last stage writes the result to DST in natural
// order, by writing each output at its bit-reversed position.
//
// Structure (names follow the paper): the Controller holds the register file and sequences
// stages and butterfly groups; the Streamer drives two 64-bit read ports and two 64-bit write
// ports into L1; the Scatter places the streamed words into four 64-bit butterfly registers,
// first the left-wing words, in the next cycle the right-wing words; the butterfly unit
// (one C64 or two C32 butterflies per cycle) computes and its results are sampled back into the
// same registers; the Gather takes them out again for the Streamer to write. Twiddles come
// from one C64 LUT (65 entries) and two C32 LUTs (129 entries each).
//
// Stage s of log2(N) has span h = N >> (s+1); butterfly b pairs samples L = (b/h)*2h + b%h and
// L + h with twiddle W_N^(h * bitrev_s(b/h)): natural-order input, bit-reversed output.
// A group is 2 (C64) or 4 (C32) consecutive butterflies, all held in the four registers.
// In the last stage the outputs go to bit-reversed addresses one sample per write port and
// cycle, which stalls C32 groups (8 samples, 4 cycles) as the paper describes.
//
// This design runs one group at a time (read 2 cycles + data return, compute 2 cycles,
// write 2 or 4 cycles); the paper overlaps groups with a second register set. That, the
// register map and the in-place/out-of-place choice are this design's own.
//
// Register port (word offsets): 0 TRIGGER (write starts a job), 1 STATUS (bit 0 busy),
// 2 SRC byte address, 3 DST byte address, 4 CFG: [3:0] log2(N) (3..10), [4] C32, [5] inverse.
// done_o pulses when a job ends. L1 ports: request held until gnt; read data one cycle after
// the grant. clk_en_i is the cluster-level clock-gate enable; a job only runs while it is set.
module mp_fft
  import maestro_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        clk_en_i,
  // register port
  input  logic        reg_req_i,
  input  logic        reg_we_i,
  input  logic [2:0]  reg_addr_i,
  input  logic [31:0] reg_wdata_i,
  output logic [31:0] reg_rdata_o,
  output logic        done_o,
  output logic        busy_o,
  // streamer ports: 0,1 read; 2,3 write
  output logic        mem_req_o   [4],
  output tcdm_req_t   mem_o       [4],
  input  logic        mem_gnt_i   [4],
  input  logic        mem_rvalid_i[4],
  input  logic [63:0] mem_rdata_i [4],
  // event counters for observation
  output logic [31:0] stall_cycles_o     // cycles spent on bit-reversed write stalls
);

  // ---------------- controller: register file ----------------
  logic [31:0] src_q, dst_q;
  logic [3:0]  log2n_q;
  logic        c32_q, inv_q;
  logic        start;

  typedef enum logic [2:0] { S_IDLE, S_RD, S_RWAIT, S_CMP, S_WR, S_NEXT } state_e;
  state_e state_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q <= '0; dst_q <= '0; log2n_q <= 4'd3; c32_q <= 1'b0; inv_q <= 1'b0;
    end else if (reg_req_i && reg_we_i && state_q == S_IDLE) begin
      unique case (reg_addr_i)
        3'd2: src_q <= reg_wdata_i;
        3'd3: dst_q <= reg_wdata_i;
        3'd4: begin log2n_q <= reg_wdata_i[3:0]; c32_q <= reg_wdata_i[4]; inv_q <= reg_wdata_i[5]; end
        default: ;
      endcase
    end
  end
  assign start = reg_req_i && reg_we_i && reg_addr_i == 3'd0 && state_q == S_IDLE;
  assign busy_o = state_q != S_IDLE;

  always_comb begin
    unique case (reg_addr_i)
      3'd1: reg_rdata_o = {31'h0, busy_o};
      3'd2: reg_rdata_o = src_q;
      3'd3: reg_rdata_o = dst_q;
      3'd4: reg_rdata_o = {26'h0, inv_q, c32_q, log2n_q};
      default: reg_rdata_o = '0;
    endcase
  end

  // ---------------- sequencing ----------------
  logic [3:0]  stage_q;       // current stage
  logic [9:0]  group_q;       // butterfly group within the stage
  logic        pair_q;        // read / compute / write sub-step
  logic [2:0]  wstep_q;
  logic [1:0]  rd_gnt_q;      // read ports granted in the current sub-step
  logic [1:0]  wr_gnt_q;
  logic        rpend_q [2];   // read data expected next cycle
  logic [1:0]  rslot_q [2];
  logic [63:0] breg_q  [4];   // butterfly registers

  logic [10:0] n_pts;
  logic [9:0]  n_groups;
  logic [3:0]  log2h;
  logic        last_stage;
  assign n_pts      = 11'(1) << log2n_q;
  assign n_groups   = c32_q ? 10'(n_pts >> 3) : 10'(n_pts >> 2);
  assign log2h      = log2n_q - stage_q - 4'd1;
  assign last_stage = stage_q == log2n_q - 4'd1;

  function automatic logic [9:0] bitrev(input logic [9:0] x, input logic [3:0] nb);
    logic [9:0] r;
    r = '0;
    for (int i = 0; i < 10; i++) if (i < int'(nb)) r[int'(nb) - 1 - i] = x[i];
    return r;
  endfunction

  // sample index of the left wing of butterfly b in this stage
  function automatic logic [10:0] left_of(input logic [10:0] b, input logic [3:0] lh);
    logic [10:0] hmask;
    hmask = (11'(1) << lh) - 11'(1);
    return (((b >> lh) << (lh + 4'd1)) | (b & hmask));
  endfunction

  // first sample index of the word held by each butterfly register
  logic [10:0] slot_sample [4];
  always_comb begin
    logic [10:0] b0, hh;
    hh = 11'(1) << log2h;
    if (!c32_q) begin
      b0 = {group_q, 1'b0};
      slot_sample[0] = left_of(b0, log2h);
      slot_sample[1] = left_of(b0 + 11'd1, log2h);
      slot_sample[2] = slot_sample[0] + hh;
      slot_sample[3] = slot_sample[1] + hh;
    end else if (log2h != 0) begin
      b0 = {group_q[8:0], 2'b00};
      slot_sample[0] = left_of(b0, log2h);
      slot_sample[1] = left_of(b0 + 11'd2, log2h);
      slot_sample[2] = slot_sample[0] + hh;
      slot_sample[3] = slot_sample[1] + hh;
    end else begin
      b0 = {group_q[8:0], 2'b00};
      for (int j = 0; j < 4; j++) slot_sample[j] = (b0 + 11'(j)) << 1;
    end
  end

  function automatic logic [31:0] word_addr(input logic [31:0] base, input logic [10:0] smp,
                                            input logic c32);
    return c32 ? ((base + 32'(smp) * 4) & ~32'h7) : (base + 32'(smp) * 8);
  endfunction

  // ---------------- scatter / butterfly operands ----------------
  // compute sub-step p handles butterflies 2p, 2p+1 (C32) or p (C64)
  logic [63:0] xl [2], xr [2], tw [2], yl [2], yr [2];
  logic [9:0]  tw_k16 [2];
  logic [7:0]  tw_k32;
  logic [15:0] c16 [2], s16 [2];
  logic [31:0] c32v, s32v;

  always_comb begin
    logic [10:0] b;
    logic [9:0]  blk, e;
    int          i;
    b = '0; blk = '0; e = '0; i = 0;
    for (int l = 0; l < 2; l++) begin
      xl[l] = '0; xr[l] = '0; tw_k16[l] = '0;
    end
    tw_k32 = '0;
    if (!c32_q) begin
      xl[0] = breg_q[{1'b0, pair_q}];
      xr[0] = breg_q[2 + pair_q];
      b   = {group_q, pair_q};
      blk = 10'(b >> log2h);
      e   = 10'(bitrev(blk, stage_q) << log2h);     // exponent of W_N
      tw_k32 = 8'(e << (4'd9 - log2n_q));           // in units of W_512
    end else begin
      for (int l = 0; l < 2; l++) begin
        i = 2 * int'(pair_q) + l;                   // butterfly within the group
        if (log2h != 0) begin
          xl[l] = {32'h0, breg_q[i / 2][32 * (i % 2) +: 32]};
          xr[l] = {32'h0, breg_q[2 + i / 2][32 * (i % 2) +: 32]};
        end else begin
          xl[l] = {32'h0, breg_q[i][31:0]};
          xr[l] = {32'h0, breg_q[i][63:32]};
        end
        b   = {group_q[8:0], 2'b00} + 11'(i);
        blk = 10'(b >> log2h);
        e   = 10'(bitrev(blk, stage_q) << log2h);
        tw_k16[l] = 10'(e << (4'd10 - log2n_q));    // in units of W_1024
      end
    end
  end

  for (genvar l = 0; l < 2; l++) begin : g_lut16
    twiddle_lut #(.NMAX(1024), .FMT_W(16)) i_lut (.k_i(tw_k16[l][8:0]), .cos_o(c16[l]), .sin_o(s16[l]));
  end
  twiddle_lut #(.NMAX(512), .FMT_W(32)) i_lut32 (.k_i(tw_k32), .cos_o(c32v), .sin_o(s32v));

  // W = cos - j sin (forward), cos + j sin (inverse)
  always_comb begin
    if (c32_q) begin
      for (int l = 0; l < 2; l++) tw[l] = {32'h0, s16[l] ^ {!inv_q, 15'h0}, c16[l]};
    end else begin
      tw[0] = {s32v ^ {!inv_q, 31'h0}, c32v};
      tw[1] = '0;
    end
  end

  fft_butterfly_unit i_bfly (.c32_i(c32_q), .xl_i(xl), .xr_i(xr), .tw_i(tw), .yl_o(yl), .yr_o(yr));

  // ---------------- gather: write items ----------------
  // non-final stage: write step w writes registers 2w, 2w+1 back to their words
  // final stage: one sample per port, at DST + bitrev(index)
  logic [2:0] n_wsteps;
  assign n_wsteps = (last_stage && c32_q) ? 3'd4 : 3'd2;

  always_comb begin
    int          item;
    logic [10:0] smp;
    logic [9:0]  br;
    logic [31:0] a;
    item = 0; smp = '0; br = '0; a = '0;
    for (int j = 0; j < 4; j++) mem_req_o[j] = 1'b0;
    for (int j = 0; j < 2; j++) begin
      item = 2 * int'(wstep_q) + j;
      mem_o[2+j] = '0;
      mem_o[2+j].we = 1'b1;
      if (!last_stage) begin
        mem_o[2+j].addr  = word_addr(src_q, slot_sample[item], c32_q);
        mem_o[2+j].be    = 8'hff;
        mem_o[2+j].wdata = breg_q[item];
      end else if (!c32_q) begin
        smp = slot_sample[item];
        br  = bitrev(smp[9:0], log2n_q);
        mem_o[2+j].addr  = dst_q + 32'(br) * 8;
        mem_o[2+j].be    = 8'hff;
        mem_o[2+j].wdata = breg_q[item];
      end else begin
        // last C32 stage has span 1: register r holds samples 2 b_r (low) and 2 b_r + 1 (high)
        smp = slot_sample[item / 2] + 11'(item % 2);
        br  = bitrev(smp[9:0], log2n_q);
        a   = dst_q + 32'(br) * 4;
        mem_o[2+j].addr  = a & ~32'h7;
        mem_o[2+j].be    = a[2] ? 8'hf0 : 8'h0f;
        mem_o[2+j].wdata = {2{breg_q[item / 2][32 * (item % 2) +: 32]}};
      end
      mem_req_o[2+j] = (state_q == S_WR) && !wr_gnt_q[j] && clk_en_i;
    end
    for (int j = 0; j < 2; j++) begin
      mem_o[j] = '0;
      mem_o[j].addr = word_addr(src_q, slot_sample[2 * int'(pair_q) + j], c32_q);
      mem_o[j].be   = 8'hff;
      mem_req_o[j]  = (state_q == S_RD) && !rd_gnt_q[j] && clk_en_i;
    end
  end

  // ---------------- FSM ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= S_IDLE;
      stage_q  <= '0;
      group_q  <= '0;
      pair_q   <= 1'b0;
      wstep_q  <= '0;
      rd_gnt_q <= '0;
      wr_gnt_q <= '0;
      rpend_q  <= '{default: 1'b0};
      rslot_q  <= '{default: '0};
      breg_q   <= '{default: '0};
      done_o   <= 1'b0;
      stall_cycles_o <= '0;
    end else begin
      done_o <= 1'b0;
      // scatter: read data returns one cycle after its grant
      for (int j = 0; j < 2; j++) begin
        rpend_q[j] <= 1'b0;
        if (rpend_q[j] && mem_rvalid_i[j]) breg_q[rslot_q[j]] <= mem_rdata_i[j];
      end
      if (clk_en_i) begin
        unique case (state_q)
          S_IDLE: if (start) begin
            state_q <= S_RD;
            stage_q <= '0;
            group_q <= '0;
            pair_q  <= 1'b0;
          end
          S_RD: begin
            logic [1:0] g;
            g = rd_gnt_q;
            for (int j = 0; j < 2; j++) begin
              if (mem_req_o[j] && mem_gnt_i[j]) begin
                g[j]       = 1'b1;
                rpend_q[j] <= 1'b1;
                rslot_q[j] <= 2'(2 * int'(pair_q) + j);
              end
            end
            if (g == 2'b11) begin
              rd_gnt_q <= '0;
              pair_q   <= !pair_q;
              if (pair_q) state_q <= S_RWAIT;
            end else begin
              rd_gnt_q <= g;
            end
          end
          S_RWAIT: if (!rpend_q[0] && !rpend_q[1]) state_q <= S_CMP;
          S_CMP: begin
            if (!c32_q) begin
              breg_q[{1'b0, pair_q}] <= yl[0];
              breg_q[2 + pair_q] <= yr[0];
            end else begin
              for (int l = 0; l < 2; l++) begin
                int i;
                i = 2 * int'(pair_q) + l;
                if (log2h != 0) begin
                  breg_q[i / 2][32 * (i % 2) +: 32]     <= yl[l][31:0];
                  breg_q[2 + i / 2][32 * (i % 2) +: 32] <= yr[l][31:0];
                end else begin
                  breg_q[i] <= {yr[l][31:0], yl[l][31:0]};
                end
              end
            end
            pair_q <= !pair_q;
            if (pair_q) begin
              state_q <= S_WR;
              wstep_q <= '0;
            end
          end
          S_WR: begin
            logic [1:0] g;
            g = wr_gnt_q;
            for (int j = 0; j < 2; j++) if (mem_req_o[2+j] && mem_gnt_i[2+j]) g[j] = 1'b1;
            if (wstep_q >= 3'd2) stall_cycles_o <= stall_cycles_o + 1;
            if (g == 2'b11) begin
              wr_gnt_q <= '0;
              wstep_q  <= wstep_q + 3'd1;
              if (wstep_q + 3'd1 == n_wsteps) state_q <= S_NEXT;
            end else begin
              wr_gnt_q <= g;
            end
          end
          S_NEXT: begin
            if (group_q + 10'd1 == n_groups) begin
              group_q <= '0;
              if (last_stage) begin
                state_q <= S_IDLE;
                done_o  <= 1'b1;
              end else begin
                stage_q <= stage_q + 4'd1;
                state_q <= S_RD;
              end
            end else begin
              group_q <= group_q + 10'd1;
              state_q <= S_RD;
            end
          end
          default: state_q <= S_IDLE;
        endcase
      end
    end
  end

endmodule
