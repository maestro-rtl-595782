// Floating-point butterfly unit of the MP-FFT: one FP16 engine (C32 samples) and one FP32
// engine (C64 samples).
//
// C64 mode (c32_i = 0): one butterfly per cycle on lane 0, 64-bit samples {im[63:32], re[31:0]},
// computed by the FP32 engine. C32 mode (c32_i = 1): two butterflies per cycle, 32-bit samples
// {im[31:16], re[15:0]} in the low half of each lane: lane 0 on the FP16 engine and lane 1 on
// the FP32 engine running in its narrow (FP16) mode. This is the reuse of the larger engine for
// the lower precision that the paper describes; the lane assignment is this design's choice.
// Outputs: YL = XL + TW*XR, YR = XL - TW*XR. Combinational.
module fft_butterfly_unit (
  input  logic        c32_i,
  input  logic [63:0] xl_i [2],
  input  logic [63:0] xr_i [2],
  input  logic [63:0] tw_i [2],
  output logic [63:0] yl_o [2],
  output logic [63:0] yr_o [2]
);

  // FP16 engine, C32 only
  logic [15:0] h_ylr, h_yli, h_yrr, h_yri;
  butterfly_engine #(.EW(5), .MW(10)) i_c32 (
    .narrow_i(1'b0),
    .a_i(xl_i[0][15:0]), .b_i(xl_i[0][31:16]),
    .c_i(xr_i[0][15:0]), .d_i(xr_i[0][31:16]),
    .e_i(tw_i[0][15:0]), .f_i(tw_i[0][31:16]),
    .yl_re_o(h_ylr), .yl_im_o(h_yli), .yr_re_o(h_yrr), .yr_im_o(h_yri)
  );

  // FP32 engine: C64 on lane 0, or narrow C32 on lane 1
  logic [31:0] a, b, c, d, e, f;
  logic [31:0] s_ylr, s_yli, s_yrr, s_yri;
  always_comb begin
    if (c32_i) begin
      a = {16'h0, xl_i[1][15:0]};  b = {16'h0, xl_i[1][31:16]};
      c = {16'h0, xr_i[1][15:0]};  d = {16'h0, xr_i[1][31:16]};
      e = {16'h0, tw_i[1][15:0]};  f = {16'h0, tw_i[1][31:16]};
    end else begin
      a = xl_i[0][31:0];  b = xl_i[0][63:32];
      c = xr_i[0][31:0];  d = xr_i[0][63:32];
      e = tw_i[0][31:0];  f = tw_i[0][63:32];
    end
  end
  butterfly_engine #(.EW(8), .MW(23)) i_c64 (
    .narrow_i(c32_i), .a_i(a), .b_i(b), .c_i(c), .d_i(d), .e_i(e), .f_i(f),
    .yl_re_o(s_ylr), .yl_im_o(s_yli), .yr_re_o(s_yrr), .yr_im_o(s_yri)
  );

  // Concatenate the results back into sample words.
  always_comb begin
    if (c32_i) begin
      yl_o[0] = {32'h0, h_yli, h_ylr};
      yr_o[0] = {32'h0, h_yri, h_yrr};
      yl_o[1] = {32'h0, s_yli[15:0], s_ylr[15:0]};
      yr_o[1] = {32'h0, s_yri[15:0], s_yrr[15:0]};
    end else begin
      yl_o[0] = {s_yli, s_ylr};
      yr_o[0] = {s_yri, s_yrr};
      yl_o[1] = '0;
      yr_o[1] = '0;
    end
  end

endmodule
