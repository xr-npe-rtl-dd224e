// xr_npe: the mixed-precision SIMD neural processing engine (one MAC unit).
//
// Per cycle it multiplies the lanes of two 16-bit operand words and adds the
// products into a quire: 4 lanes of FP4 E2M1 or Posit(4,1), 2 lanes of
// Posit(8,0) or 1 lane of Posit(16,1), chosen by prec. The stages are those
// of the paper's block diagram: input processing (lane split, decode,
// zero/NaR check), sign XOR and scaling-factor sum, the reconfigurable
// mantissa multiplier (RMMEC) built from 2-bit cells with zero-operand
// gating, the MUX-ed sign datapath, the precision-adaptive rearrangement into
// the quire, the SIMD adder and quire register, and output processing (sign,
// magnitude selection, leading-one detection, normalisation, rounding into
// the lane format, ReLU).
//
// Pipeline (this design's choice; the paper gives no stage boundaries):
//   edge 1: operands decoded and multiplied, registered (stage S1)
//   edge 2: S1 product aligned and added into the quire
//   edge 3: quire rounded to mac_out / pe_out, out_valid high
// so a result appears 3 cycles after in_valid and one MAC per lane is taken
// every cycle. accumulate adds the product; clear empties the quire first
// (clear with accumulate starts a new dot product with this product). The
// outputs always show the rounded current quire; out_valid marks the cycle
// in which the quire includes the operation issued 3 cycles before.
// Synchronous active-high reset.
module xr_npe
  import xr_npe_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  prec_e        prec,
  input  logic         accumulate,
  input  logic         clear,
  input  logic [15:0]  a,
  input  logic [15:0]  b,
  output logic         out_valid,
  output logic [15:0]  mac_out,
  output logic [15:0]  pe_out
);
  // ---------------- stage 0: input processing and multiplication ----------
  logic [3:0]       sign_a, sign_b, zero_a, zero_b, nar_a, nar_b;
  logic [3:0][7:0]  sf_a, sf_b, shamt;
  logic [12:0]      mant_a, mant_b;
  logic [3:0]       s_prod;
  logic [25:0]      p;
  logic [31:0]      p_2c, sprod;

  xr_input_proc u_in (.a(a), .b(b), .prec(prec), .sign_a(sign_a), .sign_b(sign_b),
                      .zero_a(zero_a), .zero_b(zero_b), .nar_a(nar_a), .nar_b(nar_b),
                      .sf_a(sf_a), .sf_b(sf_b), .mant_a(mant_a), .mant_b(mant_b));
  xr_sign_scale u_ss (.prec(prec), .sign_a(sign_a), .sign_b(sign_b), .sf_a(sf_a),
                      .sf_b(sf_b), .s_prod(s_prod), .shift_amt(shamt));
  xr_rmmec u_mul (.prec(prec), .mant_a(mant_a), .mant_b(mant_b),
                  .lane_en(~(zero_a | zero_b | nar_a | nar_b)), .p(p), .p_2c(p_2c));
  xr_mux_datapath u_mux (.prec(prec), .p(p), .p_2c(p_2c), .s_prod(s_prod), .sprod(sprod));

  // ---------------- S1 registers ------------------------------------------
  logic             s1_valid, s1_acc, s1_clr;
  prec_e            s1_prec;
  logic [31:0]      s1_sprod;
  logic [3:0][7:0]  s1_shamt;
  logic [3:0]       s1_nar;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid <= 1'b0;
      s1_acc   <= 1'b0;
      s1_clr   <= 1'b0;
      s1_prec  <= PREC_FP4;
      s1_sprod <= '0;
      s1_shamt <= '0;
      s1_nar   <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_acc   <= accumulate;
        s1_clr   <= clear;
        s1_prec  <= prec;
        s1_sprod <= sprod;
        s1_shamt <= shamt;
        s1_nar   <= nar_a | nar_b;
      end
    end
  end

  // ---------------- stage 1: rearrangement and quire accumulation ---------
  logic [127:0] addend, q;
  logic [3:0]   q_nar;
  prec_e        q_prec;
  logic         q_valid;

  xr_mant_rearrange u_ra (.prec(s1_prec), .sprod(s1_sprod), .shift_amt(s1_shamt),
                          .addend(addend));
  xr_quire u_q (.clk(clk), .rst(rst), .prec(s1_prec), .valid(s1_valid),
                .accumulate(s1_acc), .clear(s1_clr), .addend(addend),
                .nar_in(s1_nar), .q(q), .nar(q_nar));

  always_ff @(posedge clk) begin
    if (rst) begin
      q_prec  <= PREC_FP4;
      q_valid <= 1'b0;
    end else begin
      q_valid <= s1_valid;
      if (s1_valid) q_prec <= s1_prec;
    end
  end

  // ---------------- stage 2: output processing ----------------------------
  logic [3:0]       r_sign, r_zero, r_sticky;
  logic [127:0]     r_mag;
  logic [3:0][7:0]  r_sf;
  logic [3:0][31:0] r_norm;
  logic [15:0]      mac_d, pe_d;

  xr_quire_out_sel u_sel (.prec(q_prec), .ps(q), .sign(r_sign), .mag(r_mag));
  xr_out_norm u_norm (.prec(q_prec), .mag(r_mag), .zero(r_zero), .sf(r_sf),
                      .norm(r_norm), .sticky(r_sticky));
  xr_out_proc u_out (.prec(q_prec), .sign(r_sign), .zero(r_zero), .nar(q_nar),
                     .sf(r_sf), .norm(r_norm), .sticky(r_sticky),
                     .mac_out(mac_d), .pe_out(pe_d));

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      mac_out   <= '0;
      pe_out    <= '0;
    end else begin
      out_valid <= q_valid;
      mac_out   <= mac_d;
      pe_out    <= pe_d;
    end
  end
endmodule
