// xr_fp4_decode: combinational decoder for one FP4 E2M1 lane (1 sign,
// 2 exponent bits with bias 1, 1 mantissa bit; 0.5 is the only subnormal).
// The value is mant/2 * 2^sf with a 2-bit mantissa {hidden, m}: normal codes
// give sf = e-1 and hidden = 1, subnormal codes (e = 0) give sf = 0 and
// hidden = 0. E2M1 has no infinity or NaN, so only the zero flag is raised.
// The paper labels this format "HFP-4" in its block diagram and "FP4(E2M1)"
// in its VIO results; the E2M1 layout is taken from the latter.
module xr_fp4_decode (
  input  logic [3:0]        code,
  output logic              sign,
  output logic              zero,
  output logic signed [7:0] sf,
  output logic [1:0]        mant
);
  always_comb begin
    sign = code[3];
    zero = (code[2:0] == 3'b000);
    if (code[2:1] == 2'b00) begin
      sf   = 8'sd0;
      mant = {1'b0, code[0]};
    end else begin
      sf   = 8'(code[2:1]) - 8'sd1;
      mant = {1'b1, code[0]};
    end
  end
endmodule
