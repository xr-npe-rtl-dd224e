// xr_mux_datapath: reconfigurable MUX-ed datapath for multi-precision
// handling. Per lane it selects the unsigned product from P (zero-extended)
// or its two's complement from p_2c, by the lane's product sign s_prod, and
// packs the signed lane products into 8-bit (4 lanes), 16-bit (2 lanes) or
// 32-bit (1 lane) fields of a 32-bit bus. The diagram prints a 26-bit bus
// after this block; 32 bits are used here so that each lane keeps its sign.
// Combinational.
module xr_mux_datapath
  import xr_npe_pkg::*;
(
  input  prec_e        prec,
  input  logic [25:0]  p,
  input  logic [31:0]  p_2c,
  input  logic [3:0]   s_prod,
  output logic [31:0]  sprod
);
  always_comb begin
    case (prec)
      PREC_P8:
        for (int l = 0; l < 2; l++)
          sprod[16*l +: 16] = s_prod[l] ? p_2c[16*l +: 16] : {4'b0, p[12*l +: 12]};
      PREC_P16:
        sprod = s_prod[0] ? p_2c : {6'b0, p};
      default:
        for (int l = 0; l < 4; l++)
          sprod[8*l +: 8] = s_prod[l] ? p_2c[8*l +: 8] : {4'b0, p[4*l +: 4]};
    endcase
  end
endmodule
