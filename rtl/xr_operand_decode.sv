// xr_operand_decode: decodes one 16-bit operand word into SIMD lanes.
//
// The word holds 4 FP4 or Posit(4,1) lanes (lane l in bits 4l+3:4l), 2
// Posit(8,0) lanes (bits 8l+7:8l) or 1 Posit(16,1) lane. All lane decoders
// run in parallel and prec selects their outputs. Mantissas are packed on the
// 13-bit bus in the layout the reconfigurable multiplier expects: lane l at
// bits 2l+1:2l (4-lane modes), 6l+5:6l (2 lanes) or 12:0 (1 lane). The single
// Posit(4,1) mantissa bit (always the hidden 1) is placed as 2'b10 so that all
// 4-lane formats share one 2-bit mantissa with one fraction bit.
// Lanes that prec leaves unused read as zero. Combinational.
module xr_operand_decode
  import xr_npe_pkg::*;
(
  input  logic [15:0]      word,
  input  prec_e            prec,
  output logic [3:0]       sign,
  output logic [3:0]       zero,
  output logic [3:0]       nar,
  output logic [3:0][7:0]  sf,
  output logic [12:0]      mant
);
  logic [3:0]       f4_s, f4_z, p4_s, p4_z, p4_n;
  logic [3:0][7:0]  f4_sf, p4_sf;
  logic [3:0][1:0]  f4_m;
  logic [3:0][0:0]  p4_m;
  logic [1:0]       p8_s, p8_z, p8_n;
  logic [1:0][7:0]  p8_sf;
  logic [1:0][5:0]  p8_m;
  logic             p16_s, p16_z, p16_n;
  logic [7:0]       p16_sf;
  logic [12:0]      p16_m;

  for (genvar l = 0; l < 4; l++) begin : g_q
    xr_fp4_decode u_fp4 (.code(word[4*l +: 4]), .sign(f4_s[l]), .zero(f4_z[l]),
                         .sf(f4_sf[l]), .mant(f4_m[l]));
    xr_posit_decode #(.N(4), .ES(1)) u_p4 (.code(word[4*l +: 4]), .sign(p4_s[l]),
                         .zero(p4_z[l]), .nar(p4_n[l]), .sf(p4_sf[l]), .mant(p4_m[l]));
  end
  for (genvar l = 0; l < 2; l++) begin : g_h
    xr_posit_decode #(.N(8), .ES(0)) u_p8 (.code(word[8*l +: 8]), .sign(p8_s[l]),
                         .zero(p8_z[l]), .nar(p8_n[l]), .sf(p8_sf[l]), .mant(p8_m[l]));
  end
  xr_posit_decode #(.N(16), .ES(1)) u_p16 (.code(word), .sign(p16_s), .zero(p16_z),
                         .nar(p16_n), .sf(p16_sf), .mant(p16_m));

  always_comb begin
    sign = '0;
    zero = 4'hF;
    nar  = '0;
    sf   = '0;
    mant = '0;
    case (prec)
      PREC_FP4: begin
        sign = f4_s;
        zero = f4_z;
        sf   = f4_sf;
        for (int l = 0; l < 4; l++) mant[2*l +: 2] = f4_m[l];
      end
      PREC_P4: begin
        sign = p4_s;
        zero = p4_z;
        nar  = p4_n;
        sf   = p4_sf;
        for (int l = 0; l < 4; l++) mant[2*l +: 2] = {p4_m[l], 1'b0};
      end
      PREC_P8: begin
        sign[1:0] = p8_s;
        zero[1:0] = p8_z;
        nar[1:0]  = p8_n;
        sf[0]     = p8_sf[0];
        sf[1]     = p8_sf[1];
        mant[11:0] = {p8_m[1], p8_m[0]};
      end
      default: begin
        sign[0] = p16_s;
        zero[0] = p16_z;
        nar[0]  = p16_n;
        sf[0]   = p16_sf;
        mant    = p16_m;
      end
    endcase
  end
endmodule
