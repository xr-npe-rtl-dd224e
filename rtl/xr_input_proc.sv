// xr_input_proc: FP/Posit input processing stage of the NPE.
//
// Decodes both 16-bit operand words A and B into SIMD lanes according to the
// 2-bit precision select (the encoding printed in the NPE block diagram:
// 00 FP4, 01 Posit(4,1), 10 Posit(8,0), 11 Posit(16,1)). Per lane and operand
// it gives the sign, the scaling factor (posit regime and exponent, or FP
// exponent minus bias), the mantissa with hidden bit on the packed 13-bit
// bus, and the zero and NaR flags (the exception checks of this stage; FP4
// E2M1 has no infinity or NaN). Combinational; the NPE registers its result
// after the multiplier. The lane decoders are separate per format in this
// design; the paper does not give their circuit.
module xr_input_proc
  import xr_npe_pkg::*;
(
  input  logic [15:0]      a,
  input  logic [15:0]      b,
  input  prec_e            prec,
  output logic [3:0]       sign_a,
  output logic [3:0]       sign_b,
  output logic [3:0]       zero_a,
  output logic [3:0]       zero_b,
  output logic [3:0]       nar_a,
  output logic [3:0]       nar_b,
  output logic [3:0][7:0]  sf_a,
  output logic [3:0][7:0]  sf_b,
  output logic [12:0]      mant_a,
  output logic [12:0]      mant_b
);
  xr_operand_decode u_dec_a (.word(a), .prec(prec), .sign(sign_a), .zero(zero_a),
                             .nar(nar_a), .sf(sf_a), .mant(mant_a));
  xr_operand_decode u_dec_b (.word(b), .prec(prec), .sign(sign_b), .zero(zero_b),
                             .nar(nar_b), .sf(sf_b), .mant(mant_b));
endmodule
