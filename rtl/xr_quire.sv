// xr_quire: quire accumulation register of the NPE.
//
// Holds the 128-bit fixed-point quire (4x32, 2x64 or 1x128-bit two's
// complement lanes) and a sticky NaR flag per lane. On a clock edge with
// valid high: clear starts a new accumulation (the quire is emptied before
// this cycle's addend is taken in); accumulate adds the addend (the sum comes
// from the SIMD adder, whose inputs are the quire and the addend). A NaR
// operand sets its lane's flag, which clear resets. Synchronous active-high
// reset empties everything.
module xr_quire
  import xr_npe_pkg::*;
(
  input  logic          clk,
  input  logic          rst,
  input  prec_e         prec,
  input  logic          valid,
  input  logic          accumulate,
  input  logic          clear,
  input  logic [127:0]  addend,
  input  logic [3:0]    nar_in,
  output logic [127:0]  q,
  output logic [3:0]    nar
);
  logic [127:0] base, sum;

  assign base = clear ? '0 : q;

  xr_simd_addsub u_add (.prec(prec), .a(base), .b(addend), .sum(sum));

  always_ff @(posedge clk) begin
    if (rst) begin
      q   <= '0;
      nar <= '0;
    end else if (valid) begin
      if (accumulate) begin
        q   <= sum;
        nar <= (clear ? 4'b0 : nar) | nar_in;
      end else if (clear) begin
        q   <= '0;
        nar <= '0;
      end
    end
  end
endmodule
