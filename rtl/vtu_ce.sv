// Computing element (CE) of the tensor unit: acc_out = acc_in + x * w in FP16, fused (one
// rounding), with a latency of PIPE cycles.
//
// The FMA is evaluated on the inputs and its result passes through PIPE registers, so a
// result computed in cycle c is visible at the output in cycle c + PIPE. PIPE = 4 gives the
// 4/8/12-cycle stagger between CE columns the paper describes. en_i freezes the pipeline (stall).
// The paper's CEs are RedMulE FMA units; the retimable register chain is this design's choice.
module vtu_ce #(
  parameter int unsigned PIPE = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic [15:0] x_i,
  input  logic [15:0] w_i,
  input  logic [15:0] acc_i,
  output logic [15:0] acc_o
);

  logic [15:0] fma;
  logic [15:0] pipe_q [PIPE];

  fp_fused_sum #(.EW(5), .MW(10)) i_fma (
    .narrow_i(1'b0), .a_i(x_i), .b_i(w_i), .c_i(16'h0000), .d_i(16'h0000), .e_i(acc_i),
    .neg_ab_i(1'b0), .neg_cd_i(1'b0), .r_o(fma)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pipe_q <= '{default: '0};
    end else if (en_i) begin
      pipe_q[0] <= fma;
      for (int s = 1; s < int'(PIPE); s++) pipe_q[s] <= pipe_q[s-1];
    end
  end

  assign acc_o = pipe_q[PIPE-1];

endmodule
