// xr_npe_array: the matrix-multiplication array of NPEs with its bank
// registers.
//
// ROWS x COLS NPEs (8x8 by default, the 64-MAC configuration the paper
// evaluates; 16x16 is the other size it names). The IF bank registers hold
// one 16-bit input-feature word per row and the Wt bank registers one weight
// word per column; NPE (i,j) multiplies IF register i by Wt register j and
// accumulates in its own quire, so the array is output-stationary and each
// NPE computes one output word (4, 2 or 1 SIMD lanes) of the result tile.
// The paper's figure shows the grid and the three register sets but not the
// dataflow; row/column broadcast is this design's choice.
//
// Timing: with feed_valid high the bank words on if_data/wt_data are
// captured; the NPEs take them one cycle later (clear with feed_clear, the
// first word of a tile). feed_last tags the last word; 4 cycles after its
// capture the NPE results are copied into the OF bank registers (pe_out, the
// ReLU output, when relu_sel is high, mac_out otherwise) and of_valid pulses.
// of_rd[i] reads OF register (i, of_col). Synchronous active-high reset.
// Lint note: of the per-NPE out_valid vector ov only ov[0][0] is used, by
// the a_tag_valid assertion; all NPEs run in lock step and the OF capture is
// timed by the array's own tag pipeline, so the other bits are left unused.
module xr_npe_array
  import xr_npe_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8,
  parameter int unsigned CW   = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  prec_e                    prec,
  input  logic                     relu_sel,
  input  logic                     feed_valid,
  input  logic                     feed_clear,
  input  logic                     feed_last,
  input  logic [ROWS-1:0][15:0]    if_data,
  input  logic [COLS-1:0][15:0]    wt_data,
  input  logic [CW-1:0]            of_col,
  output logic                     of_valid,
  output logic [ROWS-1:0][15:0]    of_rd
);
  logic [ROWS-1:0][15:0]           if_reg;
  logic [COLS-1:0][15:0]           wt_reg;
  logic                            v_q, clr_q;
  logic [3:0]                      tag;
  logic [ROWS-1:0][COLS-1:0][15:0] mac, pe;
  logic [ROWS-1:0][COLS-1:0]       ov;
  logic [ROWS-1:0][COLS-1:0][15:0] of_reg;

  always_ff @(posedge clk) begin
    if (rst) begin
      if_reg <= '0;
      wt_reg <= '0;
      v_q    <= 1'b0;
      clr_q  <= 1'b0;
      tag    <= '0;
    end else begin
      v_q <= feed_valid;
      tag <= {tag[2:0], feed_valid & feed_last};
      if (feed_valid) begin
        if_reg <= if_data;
        wt_reg <= wt_data;
        clr_q  <= feed_clear;
      end
    end
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      xr_npe u_npe (.clk(clk), .rst(rst), .in_valid(v_q), .prec(prec),
                    .accumulate(1'b1), .clear(clr_q), .a(if_reg[i]), .b(wt_reg[j]),
                    .out_valid(ov[i][j]), .mac_out(mac[i][j]), .pe_out(pe[i][j]));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      of_reg   <= '0;
      of_valid <= 1'b0;
    end else begin
      of_valid <= tag[3];
      if (tag[3]) of_reg <= relu_sel ? pe : mac;
    end
  end

  always_comb
    for (int i = 0; i < ROWS; i++) of_rd[i] = of_reg[i][of_col];

  // the result tag and the NPE valid pipeline stay aligned
  a_tag_valid: assert property (@(posedge clk) disable iff (rst) tag[3] |-> ov[0][0]);
endmodule
