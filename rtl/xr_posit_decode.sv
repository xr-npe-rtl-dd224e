// xr_posit_decode: combinational decoder for one Posit(N,ES) lane.
//
// The value of a posit is (-1)^s * 2^(k*2^ES + e) * 1.f. The decoder takes the
// two's complement of negative codes, counts the regime run, then shifts the
// regime and its terminator out so that the exponent and fraction bits come
// out left-aligned. Exponent bits cut off by a long regime read as 0.
// Outputs: sign, zero and NaR flags (code 0 and code 100..0), the scaling
// factor k*2^ES+e and the mantissa with its hidden bit, MW = N-2-ES bits, so
// 13 bits for Posit(16,1), 6 for Posit(8,0) and 1 for Posit(4,1).
// Pure logic, no clock. The algorithm is the standard posit decoding; the
// paper names the function (input processing, regime processing, zero/NaR
// check) without giving its circuit.
// Lint note: mag[N-1], the top bit of the absolute value, is unused on
// purpose; it is 0 for every code except NaR, which is flagged separately,
// so regime decoding starts at the bit below it.
module xr_posit_decode #(
  parameter int unsigned N  = 16,
  parameter int unsigned ES = 1,
  parameter int unsigned MW = N - 2 - ES
) (
  input  logic [N-1:0]        code,
  output logic                sign,
  output logic                zero,
  output logic                nar,
  output logic signed [7:0]   sf,
  output logic [MW-1:0]       mant
);
  logic [N-1:0]  mag;
  logic [N-2:0]  body;
  logic [31:0]   ext;
  logic [32:0]   m33;
  logic [4:0]    run;
  logic          r0;
  logic          stop;
  int            k;
  int            e;

  always_comb begin
    sign = code[N-1];
    zero = (code == '0);
    nar  = (code == {1'b1, {(N-1){1'b0}}});
    mag  = sign ? (~code + 1'b1) : code;
    body = mag[N-2:0];
    r0   = body[N-2];
    // length of the regime run
    run  = '0;
    stop = 1'b0;
    for (int i = N - 2; i >= 0; i--) begin
      if (!stop && body[i] == r0) run = run + 5'd1;
      else stop = 1'b1;
    end
    k   = r0 ? int'(run) - 1 : -int'(run);
    // left-align the bits after the regime and its terminator
    ext = {body, {(32 - (N - 1)){1'b0}}} << (int'(run) + 1);
    e   = (ES == 0) ? 0 : int'(ext >> (32 - ES));
    m33 = {1'b1, ext << ES};
    mant = MW'(m33 >> (33 - MW));
    sf   = 8'((k << ES) + e);
    if (zero || nar) begin
      sf   = '0;
      mant = '0;
    end
  end
endmodule
