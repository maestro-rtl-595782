// Vector controller: accepts pre-decoded vector instructions from the scalar core and
// dispatches them to the functional units, with a scoreboard of register groups in flight.
//
// Interface: valid/ready handshake on instr_i (one instruction per cycle at most). Each unit
// (VAU, VLSU, VSLDU, VTU) gets a one-cycle start pulse with the instruction and reports busy
// and a done pulse. An instruction issues when its unit is free and its registers do not
// conflict with an instruction still in flight on another unit: it may not read a register
// group being written (RAW), nor write one being read or written (WAR, WAW). A TCSR write
// issues only when all units are idle, so a mode switch never cuts through a running
// instruction. For the tensor instruction rs2 holds {n_groups[22:20], Z[19:15], Y[14:10],
// W[9:5], X[4:0]}; it reads the X, W and Y groups and writes the Z group (8 registers each).
// Counters: instructions issued per unit and cycles in which a valid instruction waited on a
// hazard or busy unit.
// The paper's scalar core pre-decodes and dispatches over an accelerator interface; the
// register-mask scoreboard without chaining and the counters are this design's choices.
module vector_controller
  import maestro_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,
  input  vinstr_t     instr_i,
  output logic        ready_o,
  output logic        idle_o,
  // unit handshakes, indexed by fu_e
  output logic        start_o [4],
  output vinstr_t     instr_o,
  input  logic        busy_i  [4],
  input  logic        done_i  [4],
  // tensor CSR write
  output logic        tcsr_we_o,
  output logic [4:0]  tcsr_wdata_o,
  // statistics
  output logic [31:0] issued_o [4],
  output logic [31:0] hazard_cycles_o
);

  logic        inflight_q [4];
  logic [31:0] rmask_q [4];
  logic [31:0] wmask_q [4];

  function automatic logic [31:0] grp(input logic [4:0] base, input logic [3:0] lmul);
    logic [63:0] m;
    int unsigned n;
    n = (lmul == 0) ? 1 : int'(lmul);
    m = ((64'd1 << n) - 64'd1) << base;
    return m[31:0];
  endfunction

  fu_e         fu;
  logic        is_tcsr, fu_free, hazard, all_idle, issue;
  logic [31:0] rm, wm, orm, owm;

  always_comb begin
    is_tcsr = 1'b0;
    fu      = FU_VAU;
    rm      = '0;
    wm      = '0;
    unique case (instr_i.op)
      VOP_VFADD, VOP_VFMUL, VOP_VADD, VOP_VMUL: begin
        fu = FU_VAU;
        rm = grp(instr_i.vs1, instr_i.lmul) | grp(instr_i.vs2, instr_i.lmul);
        wm = grp(instr_i.vd, instr_i.lmul);
      end
      VOP_VFMACC: begin
        fu = FU_VAU;
        rm = grp(instr_i.vs1, instr_i.lmul) | grp(instr_i.vs2, instr_i.lmul) |
             grp(instr_i.vd, instr_i.lmul);
        wm = grp(instr_i.vd, instr_i.lmul);
      end
      VOP_VLE: begin fu = FU_VLSU; wm = grp(instr_i.vd, instr_i.lmul); end
      VOP_VSE: begin fu = FU_VLSU; rm = grp(instr_i.vd, instr_i.lmul); end
      VOP_VSLIDEUP, VOP_VSLIDEDOWN, VOP_VMV: begin
        fu = FU_VSLDU;
        rm = grp(instr_i.vs2, instr_i.lmul) | grp(instr_i.vd, instr_i.lmul);
        wm = grp(instr_i.vd, instr_i.lmul);
      end
      VOP_TENSOR: begin
        fu = FU_VTU;
        rm = grp(instr_i.rs2[4:0], 4'd8) | grp(instr_i.rs2[9:5], 4'd8) |
             grp(instr_i.rs2[14:10], 4'd8);
        wm = grp(instr_i.rs2[19:15], 4'd8);
      end
      VOP_TCSR: is_tcsr = 1'b1;
      default: ;
    endcase
    orm = '0;
    owm = '0;
    all_idle = 1'b1;
    for (int u = 0; u < 4; u++) begin
      if (inflight_q[u] || busy_i[u]) all_idle = 1'b0;
      if (inflight_q[u]) begin
        orm |= rmask_q[u];
        owm |= wmask_q[u];
      end
    end
    fu_free = !inflight_q[fu] && !busy_i[fu];
    hazard  = |(rm & owm) || |(wm & (owm | orm));
    issue   = valid_i && (is_tcsr ? all_idle : (fu_free && !hazard));
    ready_o = issue;
    idle_o  = all_idle;
    tcsr_we_o    = issue && is_tcsr;
    tcsr_wdata_o = instr_i.rs1[4:0];
    instr_o      = instr_i;
    for (int u = 0; u < 4; u++) start_o[u] = issue && !is_tcsr && fu == fu_e'(u);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      inflight_q      <= '{default: 1'b0};
      rmask_q         <= '{default: '0};
      wmask_q         <= '{default: '0};
      issued_o        <= '{default: '0};
      hazard_cycles_o <= '0;
    end else begin
      for (int u = 0; u < 4; u++) begin
        if (done_i[u]) inflight_q[u] <= 1'b0;
        if (start_o[u]) begin
          inflight_q[u] <= 1'b1;
          rmask_q[u]    <= rm;
          wmask_q[u]    <= wm;
          issued_o[u]   <= issued_o[u] + 32'd1;
        end
      end
      if (valid_i && !issue) hazard_cycles_o <= hazard_cycles_o + 32'd1;
    end
  end

endmodule
