// pofx -- normalized posit to fixed-point converter (PoFx).
//
// Converts one normalized posit, Posit(N-1, ES), into signed fixed point
// FxP(M, F) with F = M-1. A normalized posit is an N-bit posit whose magnitude
// is below 1; such posits always start with two equal bits, so only the lower
// N-1 bits are stored and the leading bit is replicated here.
//
// The datapath follows the staged bit-level algorithm of the PoFx design:
//   A  replicate the dropped bit, take the sign S, two's-complement the
//      remaining N-1 bits of a negative number, and invert them if their top
//      bit is 0, so the regime run becomes a run of ones;
//   A3 a leading-ones chain LZD[i] = LZD[i+1] & P[i] marks that run;
//   B1 the regime magnitude K is the number of ones in LZD (K = -k);
//   B2 EXT marks the bits after the regime terminator, its one-hot edge ST (the
//      "silhouette") steers an AND-OR selector that left-aligns those bits; the
//      first ES of them are the exponent E, the rest the fraction;
//   C  SHIFT = 2^ES*K + ~E = 2^ES*K - E - 1: the magnitude field MAG holds the
//      hidden 1 in its top bit (weight 1/2), which saves one shift, and adding
//      the one's complement of E takes care of that;
//   D  a right shifter MAG >> SHIFT (normalized values only shift right); OF
//      is raised when SHIFT is at least the F-bit width of MAG, that is when
//      every bit would be shifted out, and the magnitude is then 0;
//   E  sign-magnitude to two's complement.
//
// Choices of this design where the algorithm says nothing: posit zero (a
// regime run without terminator) gives 0 and no OF; fraction bits below MAG[0]
// and bits shifted out are truncated, not rounded; the one normalized pattern
// that PoFx cannot extract, -1, gives the largest negative sign-magnitude
// value -(1 - 2^-F) and raises neg_one; SHIFT is carried in a register of
// ceil(log2 M) bits, OF being decided on the full-width sum.
//
// Purely combinational; the stages have no feedback and can be cut by
// registers outside. Requires N >= 4 and M >= 3.
module pofx #(
  parameter int unsigned N  = expannd_pkg::POSIT_N,   // full posit length
  parameter int unsigned ES = expannd_pkg::POSIT_ES,  // exponent field size
  parameter int unsigned M  = expannd_pkg::FXP_M      // fixed-point width
) (
  input  logic [N-2:0]        posit_i,   // normalized posit, N-1 bits
  output logic signed [M-1:0] fxp_o,     // FxP(M, M-1), two's complement
  output logic                of_o,      // shift exceeds MAG: value < 2^-F
  output logic                neg_one_o  // input was -1, output saturated
);
  localparam int unsigned F   = M - 1;
  localparam int unsigned SHW = $clog2(M);                // SHIFT register
  localparam int unsigned KW  = $clog2(N);                // holds K <= N-1
  localparam int unsigned SFW = KW + ES + 2;              // full SHIFT sum
  localparam int SWITCH = int'(N) - 4 - int'(ES);

  logic [N-1:0] full;
  logic         s;
  logic [N-2:0] low;      // magnitude bits after the conditional negation
  logic [N-2:0] p;        // low with the regime run turned into ones
  logic [N-2:0] lzd;
  logic [N-4:0] ext;
  logic [N-4:0] st;
  logic [KW-1:0] k;
  logic [F-1:0] mag;
  logic [(ES > 0 ? ES : 1)-1:0] e;
  logic [SFW-1:0] shift_full;
  logic [SHW-1:0] shift;
  logic           is_zero;
  logic [F-1:0]   mag_sh;
  logic           set;

  always_comb begin
    // Stage A1/A2: replicate the leading bit, sign, conditional negation.
    full = {posit_i[N-2], posit_i};
    s    = full[N-1];
    low  = s ? (~full[N-2:0] + 1'b1) : full[N-2:0];

    // Stage A3: invert so that the regime run is a run of ones.
    p = low[N-2] ? low : ~low;
    lzd[N-2] = p[N-2];
    for (int i = int'(N) - 3; i >= 0; i--) lzd[i] = lzd[i+1] & p[i];
    is_zero = lzd[0];

    // Stage B1: K = number of ones in LZD.
    k = '0;
    for (int i = 0; i <= int'(N) - 2; i++) k = k + KW'(lzd[i]);

    // Stage B2: silhouette of the bits that follow the regime terminator.
    for (int i = int'(N) - 4; i >= 0; i--) ext[i] = ~(lzd[i+1] | lzd[i]);
    st[N-4] = ext[N-4];
    for (int i = int'(N) - 5; i >= 0; i--) st[i] = ext[i+1] ^ ext[i];

    mag      = '0;
    mag[F-1] = 1'b1;                 // hidden bit, weight 1/2
    e        = '0;
    for (int i = 0; i <= int'(N) - 4; i++) begin
      set = 1'b0;
      for (int j = 0; j <= i; j++) set = set | (st[int'(N) - 4 - i + j] & low[j]);
      if (i <= SWITCH) begin
        // fraction bit: f1 lands just below the hidden bit
        if (int'(F) - 2 - SWITCH + i >= 0) mag[int'(F) - 2 - SWITCH + i] = set;
      end else begin
        if (ES > 0) e[i - 1 - SWITCH] = set;
      end
    end

    // Stage C: SHIFT = 2^ES*K + one's complement of E (sign-extended).
    if (ES > 0)
      shift_full = (SFW'(k) << ES) + ~SFW'(e);
    else
      shift_full = SFW'(k) - SFW'(1);
    shift = shift_full[SHW-1:0];

    // Stage D: right shift, overflow flag.
    neg_one_o = low[N-2];            // only -1 keeps a leading one here
    of_o      = ~is_zero & ~neg_one_o & (shift_full >= SFW'(F));
    if (is_zero || of_o)  mag_sh = '0;
    else if (neg_one_o)   mag_sh = '1;
    else                  mag_sh = mag >> shift;

    // Stage E: sign-magnitude to two's complement.
    fxp_o = s ? -$signed({1'b0, mag_sh}) : $signed({1'b0, mag_sh});
  end

endmodule
