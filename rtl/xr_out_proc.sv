// xr_out_proc: output processing (rounding and restructuring) with the ReLU
// pre-processing of the NPE output.
//
// Each lane's sign, resultant scaling factor and normalised mantissa are
// rounded to nearest-even and restructured into the lane format chosen by
// prec: FP4 E2M1, Posit(4,1), Posit(8,0) or Posit(16,1). A lane whose quire
// saw a NaR gives the NaR code (posit formats only). MAC_out is the packed
// rounded result word; PE_out is the same word after ReLU: negative lanes
// become 0. Combinational; the NPE registers both outputs.
module xr_out_proc
  import xr_npe_pkg::*;
(
  input  prec_e             prec,
  input  logic [3:0]        sign,
  input  logic [3:0]        zero,
  input  logic [3:0]        nar,
  input  logic [3:0][7:0]   sf,
  input  logic [3:0][31:0]  norm,
  input  logic [3:0]        sticky,
  output logic [15:0]       mac_out,
  output logic [15:0]       pe_out
);
  logic [3:0][3:0] c_fp4, c_p4;
  logic [1:0][7:0] c_p8;
  logic [15:0]     c_p16;

  for (genvar l = 0; l < 4; l++) begin : g_q
    xr_fp4_encode u_fp4 (.sign(sign[l]), .zero(zero[l]), .sf(sf[l]), .norm(norm[l]),
                         .sticky(sticky[l]), .code(c_fp4[l]));
    xr_posit_encode #(.N(4), .ES(1)) u_p4 (.sign(sign[l]), .zero(zero[l]), .nar(nar[l]),
                         .sf(sf[l]), .norm(norm[l]), .sticky(sticky[l]), .code(c_p4[l]));
  end
  for (genvar l = 0; l < 2; l++) begin : g_h
    xr_posit_encode #(.N(8), .ES(0)) u_p8 (.sign(sign[l]), .zero(zero[l]), .nar(nar[l]),
                         .sf(sf[l]), .norm(norm[l]), .sticky(sticky[l]), .code(c_p8[l]));
  end
  xr_posit_encode #(.N(16), .ES(1)) u_p16 (.sign(sign[0]), .zero(zero[0]), .nar(nar[0]),
                         .sf(sf[0]), .norm(norm[0]), .sticky(sticky[0]), .code(c_p16));

  always_comb begin
    case (prec)
      PREC_FP4: mac_out = c_fp4;
      PREC_P4:  mac_out = c_p4;
      PREC_P8:  mac_out = c_p8;
      default:  mac_out = c_p16;
    endcase
    pe_out = mac_out;
    case (prec)
      PREC_FP4, PREC_P4:
        for (int l = 0; l < 4; l++)
          if (sign[l] && !nar[l]) pe_out[4*l +: 4] = 4'h0;
      PREC_P8:
        for (int l = 0; l < 2; l++)
          if (sign[l] && !nar[l]) pe_out[8*l +: 8] = 8'h00;
      default:
        if (sign[0] && !nar[0]) pe_out = 16'h0000;
    endcase
  end
endmodule
