// Twiddle-factor lookup table of the MP-FFT.
//
// Returns cos(theta) and sin(theta), theta = 2*pi*k/NMAX, for k in [0, NMAX/2), in FP16
// (FMT_W = 16) or FP32 (FMT_W = 32). Only one eighth of the circle is stored, NMAX/8 + 1
// entries: with the paper's sizes that is 65 entries for the C64 LUT (NMAX = 512) and 129 for
// each C32 LUT (NMAX = 1024). The other octants follow from
//   [1/8,1/4): cos = sin(pi/2 - theta), sin = cos(pi/2 - theta)
//   [1/4,3/8): cos = -sin(theta - pi/2), sin = cos(theta - pi/2)
//   [3/8,1/2): cos = -cos(pi - theta),   sin = sin(pi - theta)
// The paper gives the entry counts; the octant folding is this design's reading of them.
//
// The entries are computed at elaboration: cos and sin by their Taylor series in `real`
// arithmetic, then rounded to nearest even into the target format. Combinational read.
module twiddle_lut #(
  parameter int unsigned NMAX  = 1024,
  parameter int unsigned FMT_W = 16
) (
  input  logic [$clog2(NMAX)-2:0] k_i,      // exponent of W_NMAX, 0 .. NMAX/2-1
  output logic [FMT_W-1:0]        cos_o,
  output logic [FMT_W-1:0]        sin_o
);

  localparam int unsigned Q  = NMAX / 8;
  localparam int unsigned EW = (FMT_W == 16) ? 5 : 8;
  localparam int unsigned MW = (FMT_W == 16) ? 10 : 23;
  localparam real         PI = 3.14159265358979323846;

  function automatic real taylor(input real x, input bit do_sin);
    real term, acc;
    int  n;
    acc  = do_sin ? x : 1.0;
    term = acc;
    n    = do_sin ? 1 : 0;
    for (int k = 0; k < 12; k++) begin
      term = -term * x * x / real'((n + 1) * (n + 2));
      n    = n + 2;
      acc  = acc + term;
    end
    return acc;
  endfunction

  // Round a non-negative real below 2 to the target format.
  function automatic logic [FMT_W-1:0] to_fp(input real r);
    logic [63:0] d;
    int          ue, bias, sh;
    longint unsigned m, kept, rem, half;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return '0;
    bias = (1 << (EW - 1)) - 1;
    m    = {12'h001, d[51:0]};
    ue   = int'(d[62:52]) - 1023;
    sh   = 52 - int'(MW);
    if (ue < 1 - bias) sh = sh + (1 - bias - ue);
    kept = m >> sh;
    rem  = m & ((64'd1 << sh) - 1);
    half = 64'd1 << (sh - 1);
    if (rem > half || (rem == half && kept[0])) kept = kept + 1;
    if (kept >= (64'd1 << (MW + 1))) begin
      kept = kept >> 1;
      ue   = ue + 1;
    end
    return {1'b0, EW'(ue + bias), MW'(kept)};
  endfunction

  logic [FMT_W-1:0] tab_c [Q+1];
  logic [FMT_W-1:0] tab_s [Q+1];

  for (genvar i = 0; i <= Q; i++) begin : g_tab
    localparam logic [FMT_W-1:0] C = to_fp(taylor(2.0 * PI * real'(i) / real'(NMAX), 1'b0));
    localparam logic [FMT_W-1:0] S = to_fp(taylor(2.0 * PI * real'(i) / real'(NMAX), 1'b1));
    assign tab_c[i] = C;
    assign tab_s[i] = S;
  end

  localparam int unsigned KW = $clog2(NMAX) - 1;
  localparam int unsigned IW = $clog2(Q + 1);

  always_comb begin
    logic [KW-1:0] k;
    logic [1:0]    oct;
    logic [IW-1:0] idx;
    logic          swap, neg_c;
    k   = k_i;
    oct = k[KW-1 -: 2];
    unique case (oct)
      2'd0: begin idx = IW'(k);               swap = 1'b0; neg_c = 1'b0; end
      2'd1: begin idx = IW'(2 * Q - int'(k)); swap = 1'b1; neg_c = 1'b0; end
      2'd2: begin idx = IW'(int'(k) - 2 * Q); swap = 1'b1; neg_c = 1'b1; end
      default: begin idx = IW'(4 * Q - int'(k)); swap = 1'b0; neg_c = 1'b1; end
    endcase
    cos_o = swap ? tab_s[idx] : tab_c[idx];
    sin_o = swap ? tab_c[idx] : tab_s[idx];
    cos_o[FMT_W-1] = neg_c;
  end

endmodule
