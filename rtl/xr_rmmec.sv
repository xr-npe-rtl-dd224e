// xr_rmmec: Reconfigurable Mantissa Multiplication and Exponent processing
// Circuitry (RMMEC).
//
// The 13-bit packed mantissas are cut into seven 2-bit digits. A 7x7 grid of
// 2-bit K-map multiplier cells forms all digit products; prec selects which
// cells contribute: the diagonal cells (0,0)..(3,3) give four 2x2 products
// (FP4 / Posit(4,1)), the two 3x3-digit blocks on the diagonal give two 6x6
// products (Posit(8,0)), and the full grid gives one 13x13 product
// (Posit(16,1)). With operands packed on the diagonal, the shifted sum of the
// selected cells leaves each lane product in its own field of the 26-bit bus
// P: lane l at bits 4l+3:4l, 12l+11:12l or 25:0. Cells outside the selection,
// and all cells of a lane whose operand is zero (lane_en low), see zero
// operands: this models the selective power gating, and the lane then feeds
// zero to the accumulator.
// Also output: p_2c, the two's complement of each lane product, sign-extended
// into 8-bit (4 lanes), 16-bit (2 lanes) or 32-bit (1 lane) fields.
// Combinational. The 2-bit cell and the 2->6->12-bit composition follow the
// paper; the digit packing and cell selection are this design's own.
module xr_rmmec
  import xr_npe_pkg::*;
(
  input  prec_e        prec,
  input  logic [12:0]  mant_a,
  input  logic [12:0]  mant_b,
  input  logic [3:0]   lane_en,
  output logic [25:0]  p,
  output logic [31:0]  p_2c
);
  logic [13:0]          ga, gb;      // gated operands, padded to 7 digits
  logic [6:0][6:0][3:0] pp;
  logic [6:0][6:0]      sel;
  logic [27:0]          acc;

  // operand isolation: digits of lanes that are off are forced to zero
  always_comb begin
    ga = {1'b0, mant_a};
    gb = {1'b0, mant_b};
    for (int d = 0; d < 7; d++) begin
      logic on;
      case (prec)
        PREC_P8:  on = (d < 6) && lane_en[d / 3];
        PREC_P16: on = lane_en[0];
        default:  on = (d < 4) && lane_en[d];
      endcase
      if (!on) begin
        ga[2*d +: 2] = 2'b00;
        gb[2*d +: 2] = 2'b00;
      end
    end
  end

  for (genvar i = 0; i < 7; i++) begin : g_i
    for (genvar j = 0; j < 7; j++) begin : g_j
      xr_rmmec_cell u_cell (.a(ga[2*i +: 2]), .b(gb[2*j +: 2]), .p(pp[i][j]));
    end
  end

  always_comb begin
    for (int i = 0; i < 7; i++) begin
      for (int j = 0; j < 7; j++) begin
        case (prec)
          PREC_P8:  sel[i][j] = (i < 6) && (j < 6) && (i / 3 == j / 3);
          PREC_P16: sel[i][j] = 1'b1;
          default:  sel[i][j] = (i == j) && (i < 4);
        endcase
      end
    end
    acc = '0;
    for (int i = 0; i < 7; i++)
      for (int j = 0; j < 7; j++)
        if (sel[i][j]) acc = acc + (28'(pp[i][j]) << (2 * (i + j)));
    p = acc[25:0];

    case (prec)
      PREC_P8: for (int l = 0; l < 2; l++) p_2c[16*l +: 16] = -{4'b0, p[12*l +: 12]};
      PREC_P16: p_2c = -{6'b0, p};
      default: for (int l = 0; l < 4; l++) p_2c[8*l +: 8] = -{4'b0, p[4*l +: 4]};
    endcase
  end
endmodule
