// xr_fp4_encode: rounds a normalised magnitude into an FP4 E2M1 code
// (1 sign, 2 exponent bits with bias 1, 1 mantissa bit).
//
// Rounding is to nearest, ties to even. Magnitudes of 6 and above saturate to
// 6 (E2M1 has no infinity); magnitudes that round below 0.5 give +0, 0.5 is
// the subnormal. Inputs as for xr_posit_encode. Combinational. The
// saturating overflow and the rounding mode are this design's own choices.
// Lint note: norm[31] is unused on purpose; it is the leading one of the
// normalised magnitude, which is always 1 for a non-zero input and is
// implicit in the code.
module xr_fp4_encode (
  input  logic               sign,
  input  logic               zero,
  input  logic signed [7:0]  sf,
  input  logic [31:0]        norm,
  input  logic               sticky,
  output logic [3:0]         code
);
  always_comb begin
    logic       m, g, st, rup;
    logic [2:0] mag;
    int         sc, e;
    sc  = int'(sf);
    mag = 3'b000;
    m   = 1'b0;
    g   = 1'b0;
    st  = 1'b0;
    rup = 1'b0;
    e   = 0;
    if (zero || sc <= -3) begin
      mag = 3'b000;
    end else if (sc >= 3) begin
      mag = 3'b111;
    end else if (sc == -2) begin
      // 0.25 <= x < 0.5: round to 0 or to 0.5 (tie goes to 0)
      st  = sticky | (|norm[30:0]);
      mag = st ? 3'b001 : 3'b000;
    end else if (sc == -1) begin
      // 0.5 <= x < 1: subnormal 0.5 or 1.0
      g   = norm[30];
      mag = g ? 3'b010 : 3'b001;
    end else begin
      m   = norm[30];
      g   = norm[29];
      st  = sticky | (|norm[28:0]);
      rup = g & (st | m);
      e   = sc + 1;
      if (rup && m) begin
        e = e + 1;
        m = 1'b0;
      end else if (rup) begin
        m = 1'b1;
      end
      mag = (e > 3) ? 3'b111 : {2'(e), m};
    end
    code = (mag == 3'b000) ? 4'b0000 : {sign, mag};
  end
endmodule
