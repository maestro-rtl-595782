// Fused three-term floating-point sum  r = (+/-)A*B + (+/-)C*D + E  with a single rounding.
//
// This is the arithmetic core shared by the DO-SDOTP units of the FFT butterfly engines, the
// computing elements of the tensor unit and the vector FPUs. It follows the datapath the paper
// describes for the DO-SDOTP: the mantissas are multiplied exactly (double width), the
// products and the fifth operand are aligned by right shifts on the exponent difference to the
// largest exponent, summed in one adder, then normalised and rounded once (round to nearest,
// ties to even). Subnormal inputs and outputs are handled like any IEEE-754 operation.
//
// The datapath is sized for the wide format (EW, MW). When `narrow` is set, the operands and
// the result are the narrow format (NEW, NMW) in the low bits; narrow fields are placed into
// the wide datapath, as the paper does to reuse a wide unit for a lower precision.
//
// The aligned window keeps G = 2*(MW+1)+3 bits below the largest term and folds everything
// shifted out into a sticky bit. The result is correctly rounded unless the two larger terms
// cancel to far below a third term that was shifted out of the window: that case, rare in a
// butterfly or an FMA, may differ from the exact result in the last place (this design's
// choice of window). NaN results are the canonical quiet NaN; an exact zero sum is +0 unless
// every term is a negative zero.
//
// Purely combinational; registers are added by the users.
module fp_fused_sum #(
  parameter int unsigned EW  = 8,
  parameter int unsigned MW  = 23,
  parameter int unsigned NEW = 5,
  parameter int unsigned NMW = 10
) (
  input  logic             narrow_i,   // 1: operands and result in the narrow format
  input  logic [EW+MW:0]   a_i,
  input  logic [EW+MW:0]   b_i,
  input  logic [EW+MW:0]   c_i,
  input  logic [EW+MW:0]   d_i,
  input  logic [EW+MW:0]   e_i,
  input  logic             neg_ab_i,   // negate the A*B term
  input  logic             neg_cd_i,   // negate the C*D term
  output logic [EW+MW:0]   r_o
);

  localparam int unsigned W   = EW + MW + 1;
  localparam int unsigned PW  = 2 * (MW + 1);   // product mantissa width
  localparam int unsigned G   = PW + 3;         // guard bits of the aligned window
  localparam int unsigned AW  = PW + G;         // aligned term width
  localparam int unsigned SW  = AW + 3;         // signed sum width

  typedef struct packed {
    logic          s;
    logic          zero;
    logic          inf;
    logic          nan;
    logic [MW:0]   m;
  } unp_t;

  // Unpack one operand: value = (-1)^s * m * 2^ex.
  function automatic unp_t unpack(input logic [W-1:0] x, input logic nar, output int ex);
    unp_t u;
    int unsigned bias;
    logic [EW-1:0] ef;
    logic [MW-1:0] mf;
    u = '0;
    if (nar) begin
      bias = (1 << (NEW - 1)) - 1;
      u.s  = x[NEW+NMW];
      ef   = EW'(x[NEW+NMW-1:NMW]);
      mf   = MW'(x[NMW-1:0]) << (MW - NMW);
      u.inf = (ef == EW'((1 << NEW) - 1)) && (mf == '0);
      u.nan = (ef == EW'((1 << NEW) - 1)) && (mf != '0);
    end else begin
      bias = (1 << (EW - 1)) - 1;
      u.s  = x[EW+MW];
      ef   = x[EW+MW-1:MW];
      mf   = x[MW-1:0];
      u.inf = (ef == '1) && (mf == '0);
      u.nan = (ef == '1) && (mf != '0);
    end
    u.m    = {(ef != '0), mf};
    u.zero = (ef == '0) && (mf == '0);
    ex     = ((ef == '0) ? 1 : int'(ef)) - int'(bias) - int'(MW);
    return u;
  endfunction

  always_comb begin
    unp_t ua, ub, uc, ud, ue;
    int   exa, exb, exc, exd, exe;
    logic [PW-1:0] tm [3];
    int   tex [3];
    logic ts [3];
    logic tz [3];
    int   emax;
    logic any;
    logic [2*AW-1:0] sh_full;
    logic [AW-1:0]   al [3];
    logic signed [SW-1:0] sum;
    logic [SW-1:0]   mag;
    logic            rs;
    int              p, lsb, mw_t, bias_t, ew_t, be, eadj;
    logic [SW-1:0]   kept;
    logic            rnd, stk;
    logic            nan, inf_p, inf_n;
    logic [W-1:0]    res;
    logic            zs;
    int              sh;

    ua = unpack(a_i, narrow_i, exa);
    ub = unpack(b_i, narrow_i, exb);
    uc = unpack(c_i, narrow_i, exc);
    ud = unpack(d_i, narrow_i, exd);
    ue = unpack(e_i, narrow_i, exe);

    mw_t   = narrow_i ? int'(NMW) : int'(MW);
    ew_t   = narrow_i ? int'(NEW) : int'(EW);
    bias_t = (1 << (ew_t - 1)) - 1;

    // ---- special values ----
    nan   = ua.nan | ub.nan | uc.nan | ud.nan | ue.nan
          | (ua.inf & ub.zero) | (ua.zero & ub.inf)
          | (uc.inf & ud.zero) | (uc.zero & ud.inf);
    inf_p = 1'b0;
    inf_n = 1'b0;
    if (ua.inf | ub.inf) begin
      if (ua.s ^ ub.s ^ neg_ab_i) inf_n = 1'b1; else inf_p = 1'b1;
    end
    if (uc.inf | ud.inf) begin
      if (uc.s ^ ud.s ^ neg_cd_i) inf_n = 1'b1; else inf_p = 1'b1;
    end
    if (ue.inf) begin
      if (ue.s) inf_n = 1'b1; else inf_p = 1'b1;
    end
    if (inf_p & inf_n) nan = 1'b1;

    // ---- terms: two exact products and the fifth operand ----
    tm[0]  = PW'(ua.m) * PW'(ub.m);
    tex[0] = exa + exb;
    ts[0]  = ua.s ^ ub.s ^ neg_ab_i;
    tz[0]  = ua.zero | ub.zero;
    tm[1]  = PW'(uc.m) * PW'(ud.m);
    tex[1] = exc + exd;
    ts[1]  = uc.s ^ ud.s ^ neg_cd_i;
    tz[1]  = uc.zero | ud.zero;
    tm[2]  = PW'(ue.m) << (MW + 1);
    tex[2] = exe - int'(MW + 1);
    ts[2]  = ue.s;
    tz[2]  = ue.zero;

    // ---- align to the largest exponent, jam the shifted-out bits into a sticky LSB ----
    emax    = 0;
    any     = 1'b0;
    sh_full = '0;
    for (int i = 0; i < 3; i++) begin
      if (!tz[i] && (!any || tex[i] > emax)) begin
        emax = tex[i];
        any  = 1'b1;
      end
    end
    for (int i = 0; i < 3; i++) begin
      sh = emax - tex[i];
      if (tz[i]) begin
        al[i] = '0;
      end else if (sh >= int'(AW)) begin
        al[i] = AW'(1);                 // only the sticky bit survives
      end else begin
        sh_full = {tm[i], {G{1'b0}}, {AW{1'b0}}} >> sh;
        al[i]   = sh_full[2*AW-1:AW];
        al[i][0] = al[i][0] | (|sh_full[AW-1:0]);
      end
    end

    // ---- signed sum ----
    sum = '0;
    for (int i = 0; i < 3; i++) begin
      if (ts[i]) sum = sum - SW'(al[i]);
      else       sum = sum + SW'(al[i]);
    end
    rs  = sum[SW-1];
    mag = rs ? SW'(-sum) : SW'(sum);

    // ---- normalise and round to nearest even ----
    p = 0;
    for (int i = 0; i < int'(SW); i++) if (mag[i]) p = i;
    eadj = emax - int'(G);                 // weight of the window LSB
    lsb  = p - mw_t;
    if (lsb < (1 - bias_t - mw_t) - eadj) lsb = (1 - bias_t - mw_t) - eadj;
    rnd = 1'b0;
    stk = 1'b0;
    if (lsb <= 0) begin
      kept = mag << (-lsb);
    end else begin
      kept = mag >> lsb;
      rnd  = mag[lsb-1];
      for (int i = 0; i < int'(SW); i++) if (i < lsb - 1) stk = stk | mag[i];
    end
    if (rnd && (stk || kept[0])) kept = kept + 1'b1;
    if (kept[mw_t+1]) begin
      kept = kept >> 1;
      lsb  = lsb + 1;
    end
    if (kept[mw_t]) be = lsb + eadj + mw_t + bias_t;
    else            be = 0;

    zs  = (tz[0] & tz[1] & tz[2]) & ts[0] & ts[1] & ts[2];
    res = '0;
    if (nan) begin
      res = narrow_i ? W'({1'b0, {NEW{1'b1}}, 1'b1, {(NMW-1){1'b0}}})
                     : {1'b0, {EW{1'b1}}, 1'b1, {(MW-1){1'b0}}};
    end else if (inf_p | inf_n) begin
      res = narrow_i ? W'({inf_n, {NEW{1'b1}}, {NMW{1'b0}}}) : {inf_n, {EW{1'b1}}, {MW{1'b0}}};
    end else if (mag == '0) begin
      res = narrow_i ? W'({zs, {(NEW+NMW){1'b0}}}) : {zs, {(EW+MW){1'b0}}};
    end else if (be >= (1 << ew_t) - 1) begin
      res = narrow_i ? W'({rs, {NEW{1'b1}}, {NMW{1'b0}}}) : {rs, {EW{1'b1}}, {MW{1'b0}}};
    end else if (narrow_i) begin
      res = W'({rs, NEW'(be), kept[NMW-1:0]});
    end else begin
      res = {rs, EW'(be), kept[MW-1:0]};
    end
    r_o = res;
  end

endmodule
