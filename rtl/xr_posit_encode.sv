// xr_posit_encode: rounds a normalised magnitude into a Posit(N,ES) code.
//
// Input: sign, scaling factor sf, a 32-bit mantissa with its leading one at
// bit 31, a sticky bit, and zero / NaR flags. The scaling factor is split
// into regime k = sf >> ES and exponent e = sf mod 2^ES; the regime run
// (k+1 ones and a 0, or -k zeros and a 1), the exponent bits and the fraction
// are laid out in one long bit string, the top N-1 bits are kept and rounded
// to nearest, ties to even, with the next bit as guard and all lower bits as
// sticky. Magnitudes beyond maxpos or below minpos saturate to them, as posit
// rounding never gives zero or NaR. Negative results are two's complemented.
// Combinational. This is the standard posit encoding; the paper names the
// step (regime/exponent restructuring and mantissa rounding).
// Lint note: norm[31] is unused on purpose; it is the leading one of the
// normalised magnitude, always 1 for a non-zero input and implicit in the
// posit code.
module xr_posit_encode #(
  parameter int unsigned N  = 16,
  parameter int unsigned ES = 1
) (
  input  logic               sign,
  input  logic               zero,
  input  logic               nar,
  input  logic signed [7:0]  sf,
  input  logic [31:0]        norm,
  input  logic               sticky,
  output logic [N-1:0]       code
);
  localparam int MAXSC = (int'(N) - 2) << ES;
  always_comb begin
    int          sc, k;
    logic [1:0]  e;
    logic [30:0] frac;
    logic        st, g, rup;
    logic [63:0] ef;
    logic [127:0] body;
    logic [N-2:0] m;
    sc   = int'(sf);
    frac = norm[30:0];
    st   = sticky;
    if (sc > MAXSC) begin
      sc = MAXSC; frac = '0; st = 1'b0;
    end else if (sc < -MAXSC) begin
      sc = -MAXSC; frac = '0; st = 1'b0;
    end
    k  = sc >>> ES;
    e  = 2'(sc - (k << ES));
    // exponent bits then fraction, left-aligned in 64 bits
    ef = {e, frac, 31'b0} << (2 - ES);
    if (k >= 0)
      body = ({128{1'b1}} << (127 - k)) | ({ef, 64'b0} >> (k + 2));
    else
      body = (128'b1 << (127 + k)) | ({ef, 64'b0} >> (-k + 1));
    if (k >= 0) body[127 - (k + 1)] = 1'b0;
    m   = body[127 -: (N - 1)];
    g   = body[127 - (N - 1)];
    rup = g & (st | (|body[126 - (N - 1):0]) | m[0]);
    m   = m + (N - 1)'(rup);
    if (nar)       code = {1'b1, {(N-1){1'b0}}};
    else if (zero) code = '0;
    else           code = sign ? (~{1'b0, m} + 1'b1) : {1'b0, m};
  end
endmodule
