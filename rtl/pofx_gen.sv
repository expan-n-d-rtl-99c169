// pofx_gen -- general posit to fixed-point converter, Posit(N, ES) -> FxP(M, F).
//
// Converts a full N-bit posit (any magnitude) into signed fixed point with M
// bits in total, F of them fraction bits and M-1-F integer bits. This is the
// general form of the PoFx algorithm. The normalized converter (pofx) used in
// the MAC is its simplification for weights below 1.
//
// Stages:
//   A  sign S = POSIT[N-1]; two's complement of POSIT[N-2:0] for negative
//      numbers; inversion when the first regime bit is 0, so that the regime
//      run becomes a run of ones;
//   A3 leading-ones chain LZD[i] = LZD[i+1] & P[i];
//   B1 V = number of ones in LZD, K = -V for a run of zeros, V-1 for ones;
//   B2 EXT/ST silhouette and AND-OR selector left-align the bits after the
//      regime terminator; the first ES are the exponent E, the rest fraction;
//   C  SHIFT = 2^ES*K + E, signed;
//   D  MAG holds the hidden 1 at weight 2^0 with the fraction below it; it is
//      shifted left for SHIFT > 0 and right for SHIFT < 0;
//   E  sign-magnitude to two's complement.
//
// Choices of this design (the algorithm leaves them open): MAG carries N
// guard bits below the F output fraction bits, so fraction bits are not lost
// before a left shift; bits below 2^-F are truncated after the shift; a value
// of 2^(M-1-F) or more saturates to +-(2^(M-1)-1) and raises of_o; a nonzero
// value below 2^-F gives 0 and raises uf_o; zero gives 0; NaR gives the most
// negative code -2^(M-1) and raises nar_o. SHIFT is kept at its full signed
// width; the saturation and flush limits are decided on it.
//
// Purely combinational. Requires N >= 4 and F <= M-2 (room for the hidden 1).
// Not used by the accelerator top, which works with normalized weights.
module pofx_gen #(
  parameter int unsigned N  = 8,    // posit length
  parameter int unsigned ES = 2,    // exponent field size
  parameter int unsigned M  = 16,   // fixed-point width
  parameter int unsigned F  = 8     // fixed-point fraction bits
) (
  input  logic [N-1:0]        posit_i,
  output logic signed [M-1:0] fxp_o,
  output logic                of_o,    // saturated: |value| >= 2^(M-1-F)
  output logic                uf_o,    // flushed: 0 < |value| < 2^-F
  output logic                nar_o    // input was NaR
);
  localparam int G    = int'(N);                   // guard bits below 2^-F
  localparam int IW   = int'(M) - 1 + G;           // internal MAG width
  localparam int HB   = int'(F) + G;               // hidden-bit position
  localparam int KW   = $clog2(N) + 1;             // signed regime
  localparam int SW   = KW + int'(ES) + 2;         // signed SHIFT
  localparam int SWITCH = int'(N) - 4 - int'(ES);
  localparam int MAXL = int'(M) - 2 - int'(F);     // largest left shift

  logic               s;
  logic [N-2:0]       low;
  logic [N-2:0]       p;
  logic [N-2:0]       lzd;
  logic [N-4:0]       ext;
  logic [N-4:0]       st;
  logic [KW-1:0]      v;
  logic signed [KW-1:0] k;
  logic [(ES > 0 ? ES : 1)-1:0] e;
  logic [IW-1:0]      mag;
  logic [IW-1:0]      mag_sh;
  logic [M-2:0]       mag_out;
  logic signed [SW-1:0] shift;
  logic               is_zero;
  logic               set;

  always_comb begin
    // Stage A: sign, conditional two's complement, regime inversion.
    s   = posit_i[N-1];
    low = s ? (~posit_i[N-2:0] + 1'b1) : posit_i[N-2:0];
    p   = low[N-2] ? low : ~low;
    lzd[N-2] = p[N-2];
    for (int i = int'(N) - 3; i >= 0; i--) lzd[i] = lzd[i+1] & p[i];

    // All-zero remainder: zero (s = 0) or NaR (s = 1).
    is_zero = (low == '0);
    nar_o   = is_zero & s;

    // Stage B1: regime value.
    v = '0;
    for (int i = 0; i <= int'(N) - 2; i++) v = v + KW'(lzd[i]);
    k = low[N-2] ? $signed(v - KW'(1)) : -$signed(v);

    // Stage B2: silhouette-based extraction of exponent and fraction.
    for (int i = int'(N) - 4; i >= 0; i--) ext[i] = ~(lzd[i+1] | lzd[i]);
    st[N-4] = ext[N-4];
    for (int i = int'(N) - 5; i >= 0; i--) st[i] = ext[i+1] ^ ext[i];

    mag     = '0;
    mag[HB] = 1'b1;                  // hidden bit, weight 1
    e       = '0;
    for (int i = 0; i <= int'(N) - 4; i++) begin
      set = 1'b0;
      for (int j = 0; j <= i; j++) set = set | (st[int'(N) - 4 - i + j] & low[j]);
      if (i <= SWITCH) begin
        if (HB - 1 - SWITCH + i >= 0) mag[HB - 1 - SWITCH + i] = set;
      end else begin
        if (ES > 0) e[i - 1 - SWITCH] = set;
      end
    end

    // Stage C: SHIFT = 2^ES*K + E.
    shift = (SW'(k) <<< ES) + $signed(SW'(e));

    // Stage D: bidirectional shift, saturation and flush limits.
    of_o = ~is_zero & (shift > SW'(MAXL));
    uf_o = ~is_zero & (shift < -$signed(SW'(F)));
    if (is_zero || uf_o)     mag_sh = '0;
    else if (of_o)           mag_sh = '1;
    else if (shift >= 0)     mag_sh = mag << shift;
    else                     mag_sh = mag >> (-shift);

    // Drop the guard bits (truncation).
    mag_out = (M - 1)'(mag_sh >> G);

    // Stage E: sign-magnitude to two's complement.
    if (nar_o)
      fxp_o = {1'b1, {(M - 1){1'b0}}};
    else
      fxp_o = s ? -$signed({1'b0, mag_out}) : $signed({1'b0, mag_out});
  end

endmodule
