// Tensor control and status register (TCSR) of the vector unit.
//
// Written by the controller when the scalar core issues a TCSR write, it holds the clock
// enables of the four functional units (VAU, VLSU, VSLDU, VTU) and the tensor-mode bit that
// routes the VAU's VS1 read path and shared write port to the tensor unit. A unit whose
// enable is clear is frozen; the enable of the VTU is forced on whenever tensor mode is set,
// and the VAU is frozen in tensor mode while the tensor unit holds its ports.
// The paper names the register and these two functions; the bit layout (maestro_pkg::tcsr_t),
// the reset value (all units enabled, tensor mode off) and the forcing rules are this design's.
// Clock gating is expressed as enables here; a gated-clock cell would take their place.
module tcsr
  import maestro_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        we_i,
  input  logic [4:0]  wdata_i,
  input  logic        vtu_busy_i,
  output tcsr_t       csr_o,
  output logic        vau_en_o,
  output logic        vlsu_en_o,
  output logic        vsldu_en_o,
  output logic        vtu_en_o,
  output logic        tensor_mode_o
);

  tcsr_t csr_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) csr_q <= '{tensor_en: 1'b0, vtu_cg_en: 1'b1, vsldu_cg_en: 1'b1,
                            vlsu_cg_en: 1'b1, vau_cg_en: 1'b1};
    else if (we_i) csr_q <= tcsr_t'(wdata_i);
  end

  assign csr_o         = csr_q;
  assign tensor_mode_o = csr_q.tensor_en;
  assign vtu_en_o      = csr_q.vtu_cg_en | csr_q.tensor_en;
  assign vau_en_o      = csr_q.vau_cg_en & !(csr_q.tensor_en & vtu_busy_i);
  assign vlsu_en_o     = csr_q.vlsu_cg_en;
  assign vsldu_en_o    = csr_q.vsldu_cg_en;

endmodule
