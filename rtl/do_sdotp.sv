// Dual-Output Sum of Dot Products (DO-SDOTP).
//
// A five-operand fused unit that returns both  E + (P0*P1 +/- P2*P3)  and  E - (P0*P1 +/- P2*P3),
// each rounded once, where the +/- is set by MOD: MOD = 1 inverts the sign of the third
// operand P2, as the paper describes. Ports P0..P4 follow the paper's butterfly figure; P4 is
// the accumulator input E. The unit is parametric in the format (EW, MW); with `narrow_i` the
// same datapath computes the narrow format (NEW, NMW) held in the low bits, which is how the
// FP32 unit also computes FP16 butterflies.
//
// The paper describes one shared datapath whose adder stage has an adder and a subtractor. Here
// the two outputs are two instances of the fused core with opposite term signs; the hardware
// sharing of the multipliers and the alignment stage is left to synthesis (this design's choice).
// Combinational.
module do_sdotp #(
  parameter int unsigned EW  = 8,
  parameter int unsigned MW  = 23,
  parameter int unsigned NEW = 5,
  parameter int unsigned NMW = 10
) (
  input  logic           narrow_i,
  input  logic           mod_i,      // 1: negate P2
  input  logic [EW+MW:0] p0_i,
  input  logic [EW+MW:0] p1_i,
  input  logic [EW+MW:0] p2_i,
  input  logic [EW+MW:0] p3_i,
  input  logic [EW+MW:0] p4_i,       // accumulator operand E
  output logic [EW+MW:0] sum_o,      // E + (P0*P1 +/- P2*P3)
  output logic [EW+MW:0] diff_o      // E - (P0*P1 +/- P2*P3)
);

  fp_fused_sum #(.EW(EW), .MW(MW), .NEW(NEW), .NMW(NMW)) i_add (
    .narrow_i, .a_i(p0_i), .b_i(p1_i), .c_i(p2_i), .d_i(p3_i), .e_i(p4_i),
    .neg_ab_i(1'b0), .neg_cd_i(mod_i), .r_o(sum_o)
  );

  fp_fused_sum #(.EW(EW), .MW(MW), .NEW(NEW), .NMW(NMW)) i_sub (
    .narrow_i, .a_i(p0_i), .b_i(p1_i), .c_i(p2_i), .d_i(p3_i), .e_i(p4_i),
    .neg_ab_i(1'b1), .neg_cd_i(!mod_i), .r_o(diff_o)
  );

endmodule
