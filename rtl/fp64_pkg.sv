// fp64_pkg: IEEE 754 binary64 addition, subtraction and multiplication as functions.
//
// These are the arithmetic behind the FPU pipeline (fpu_pipe). The design only states that
// the FPU executes fadd.d and fmul.d in three pipeline stages; the arithmetic itself is the
// standard one and is written here from the IEEE 754 rules: round to nearest, ties to even;
// subnormal inputs and outputs are handled exactly; overflow gives infinity; every NaN result
// is the RISC-V canonical NaN (0x7FF8000000000000). Exception flags (fflags) and the other
// rounding modes are not produced: nothing in this design reads them.
//
// Method. Both operations build an unrounded significand in a 110-bit word whose bit 109 has
// weight 2^(e-1023), then call round_pack, which normalises (leading-zero count), denormalises
// into the subnormal range when the exponent underflows, and rounds using a guard bit and a
// sticky bit. Addition aligns the smaller operand under the larger with 56 extra low bits and
// folds anything shifted further out into a sticky bit.
package fp64_pkg;

  localparam logic [63:0] CANON_NAN = 64'h7FF8_0000_0000_0000;
  localparam int unsigned MW = 110;   // width of the unrounded significand word

  function automatic logic is_nan(input logic [63:0] x);
    return (x[62:52] == 11'h7FF) && (x[51:0] != '0);
  endfunction

  function automatic logic is_inf(input logic [63:0] x);
    return (x[62:52] == 11'h7FF) && (x[51:0] == '0);
  endfunction

  function automatic logic is_zero(input logic [63:0] x);
    return x[62:0] == '0;
  endfunction

  // Normalise, round to nearest even and pack. m[109] has weight 2^(e-1023).
  function automatic logic [63:0] round_pack(input logic sign, input logic signed [13:0] e,
                                             input logic [MW-1:0] m);
    logic [MW-1:0]      mn;
    logic signed [13:0] en;
    int unsigned        lz;
    int unsigned        sh;
    logic               sticky;
    logic [62:0]        field;
    logic               rnd;
    if (m == '0) return {sign, 63'd0};
    lz = 0;
    for (int i = 0; i < MW; i++) if (m[i]) lz = MW - 1 - i;   // highest set bit wins
    mn = m << lz;
    en = e - 14'(lz);
    if (en >= 14'sd2047) return {sign, 11'h7FF, 52'd0};
    if (en <= 14'sd0) begin
      sh = 32'(1 - int'(en));
      if (sh >= MW) begin
        mn = {{(MW-1){1'b0}}, 1'b1};          // only the sticky bit survives
      end else begin
        sticky = |(mn & ((MW'(1) << sh) - MW'(1)));
        mn     = (mn >> sh) | {{(MW-1){1'b0}}, sticky};
      end
      en = 14'sd0;
    end
    field  = {en[10:0], mn[MW-2 -: 52]};
    sticky = |mn[MW-55:0];
    rnd    = mn[MW-54] & (sticky | mn[MW-53]);
    field  = field + 63'(rnd);                // carries into the exponent as IEEE requires
    return {sign, field};
  endfunction

  // a + b (sub = 0) or a - b (sub = 1).
  function automatic logic [63:0] fp_add(input logic [63:0] a, input logic [63:0] b,
                                         input logic sub);
    logic               sa, sb, sx, sy;
    logic [62:0]        ma_g, mb_g;
    logic [10:0]        ex, ey;
    logic [52:0]        mx, my;
    logic [MW-1:0]      xw, yw, s;
    int unsigned        d;
    logic               sticky;
    logic               eff_sub;
    sa = a[63];
    sb = b[63] ^ sub;
    if (is_nan(a) || is_nan(b)) return CANON_NAN;
    if (is_inf(a) && is_inf(b)) return (sa != sb) ? CANON_NAN : {sa, 11'h7FF, 52'd0};
    if (is_inf(a)) return {sa, 11'h7FF, 52'd0};
    if (is_inf(b)) return {sb, 11'h7FF, 52'd0};
    ma_g = a[62:0];
    mb_g = b[62:0];
    // x is the operand of larger magnitude
    if (ma_g >= mb_g) begin
      sx = sa; sy = sb;
      ex = a[62:52]; ey = b[62:52];
      mx = {a[62:52] != '0, a[51:0]}; my = {b[62:52] != '0, b[51:0]};
    end else begin
      sx = sb; sy = sa;
      ex = b[62:52]; ey = a[62:52];
      mx = {b[62:52] != '0, b[51:0]}; my = {a[62:52] != '0, a[51:0]};
    end
    if (ex == '0) ex = 11'd1;                 // subnormals use exponent 1
    if (ey == '0) ey = 11'd1;
    d  = 32'(ex - ey);
    xw = {1'b0, mx, 56'd0};
    yw = {1'b0, my, 56'd0};
    if (d >= MW) begin
      yw = {{(MW-1){1'b0}}, (yw != '0)};
    end else if (d != 0) begin
      sticky = |(yw & ((MW'(1) << d) - MW'(1)));
      yw     = (yw >> d) | {{(MW-1){1'b0}}, sticky};
    end
    eff_sub = sx ^ sy;
    s = eff_sub ? (xw - yw) : (xw + yw);
    if (s == '0) return {(eff_sub ? 1'b0 : sx), 63'd0};
    return round_pack(sx, 14'(ex) + 14'sd1, s);
  endfunction

  // a * b
  function automatic logic [63:0] fp_mul(input logic [63:0] a, input logic [63:0] b);
    logic               s;
    logic [10:0]        ea, eb;
    logic [52:0]        ma, mb;
    logic [105:0]       p;
    s = a[63] ^ b[63];
    if (is_nan(a) || is_nan(b)) return CANON_NAN;
    if ((is_inf(a) && is_zero(b)) || (is_zero(a) && is_inf(b))) return CANON_NAN;
    if (is_inf(a) || is_inf(b)) return {s, 11'h7FF, 52'd0};
    ea = (a[62:52] == '0) ? 11'd1 : a[62:52];
    eb = (b[62:52] == '0) ? 11'd1 : b[62:52];
    ma = {a[62:52] != '0, a[51:0]};
    mb = {b[62:52] != '0, b[51:0]};
    p  = 106'(ma) * 106'(mb);
    return round_pack(s, 14'(ea) + 14'(eb) - 14'sd1022, {p, 4'd0});
  endfunction

endpackage
