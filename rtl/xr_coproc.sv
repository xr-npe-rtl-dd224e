// xr_coproc: AXI-enabled mixed-precision matrix-multiplication co-processor.
//
// A host (a RISC-V core in the reference system) loads input features into
// the IF banks and weights into the Wt banks over the AXI4-Lite port, writes
// the configuration registers and starts a tile. The control FSM then streams
// k_len IF/Wt word pairs from the banks into the ROWS x COLS NPE array, each
// NPE accumulating one output word in its quire in the chosen precision, and
// writes the rounded (optionally ReLU-ed) results into the OF banks, where
// the host reads them. The signal interface between control unit and array
// is the set of wires below (precision, feed strobes, OF column select).
//
// Parameters: ROWS, COLS (8x8 = 64 NPEs by default), DEPTH words per bank
// (at most 256 with the address map of xr_addr_mapper). IF and OF have one
// bank per row, Wt one per column. While busy the FSM owns the bank ports and
// host bank accesses answer SLVERR. Synchronous active-high reset.
module xr_coproc
  import xr_npe_pkg::*;
#(
  parameter int unsigned ROWS  = 8,
  parameter int unsigned COLS  = 8,
  parameter int unsigned DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [15:0] s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [15:0] s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        busy,
  output logic        done
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = (COLS > 1) ? $clog2(COLS) : 1;

  // AXI slave -> address mapper
  logic        req_valid, req_we, rsp_err;
  logic [15:0] req_addr;
  logic [31:0] req_wdata, rsp_rdata;

  xr_axi_lite_slave #(.AW(16)) u_axi (
    .clk, .rst, .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr, .s_rvalid,
    .s_rready, .s_rdata, .s_rresp, .req_valid, .req_we, .req_addr, .req_wdata,
    .rsp_rdata, .rsp_err);

  // control unit
  logic        csr_we;
  logic [2:0]  csr_idx;
  logic [31:0] csr_wdata, csr_rdata, cycles;
  logic        host_en, host_we;
  logic [1:0]  host_region;
  logic [3:0]  host_bank;
  logic [7:0]  host_word;
  logic [15:0] host_wdata;
  logic [ROWS-1:0][15:0] if_rdata, of_rdata, of_rd;
  logic [COLS-1:0][15:0] wt_rdata;

  xr_addr_mapper #(.ROWS(ROWS), .COLS(COLS)) u_map (
    .clk, .rst, .busy, .req_valid, .req_we, .req_addr, .req_wdata, .rsp_rdata, .rsp_err,
    .csr_we, .csr_idx, .csr_wdata, .csr_rdata, .host_en, .host_we, .host_region,
    .host_bank, .host_word, .host_wdata, .if_rdata, .wt_rdata, .of_rdata);

  logic        start, relu_sel;
  prec_e       prec;
  logic [8:0]  k_len;
  logic [7:0]  if_base, wt_base, of_base;

  xr_csr u_csr (.clk, .rst, .csr_we, .csr_idx, .csr_wdata, .csr_rdata, .start, .prec,
                .relu_sel, .k_len, .if_base, .wt_base, .of_base, .busy, .done, .cycles);

  logic          rd_en, feed_valid, feed_clear, feed_last, of_valid, of_we;
  logic [7:0]    if_addr, wt_addr, of_addr;
  logic [CW-1:0] of_col;

  xr_ctrl_fsm #(.COLS(COLS)) u_fsm (
    .clk, .rst, .start, .k_len, .if_base, .wt_base, .of_base, .busy, .done, .cycles,
    .rd_en, .if_addr, .wt_addr, .feed_valid, .feed_clear, .feed_last, .of_valid, .of_col,
    .of_we, .of_addr);

  // array
  xr_npe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst, .prec, .relu_sel, .feed_valid, .feed_clear, .feed_last,
    .if_data(if_rdata), .wt_data(wt_rdata), .of_col, .of_valid, .of_rd);

  // memory banks with the host / FSM port multiplexers
  for (genvar i = 0; i < ROWS; i++) begin : g_ifof
    logic h_if, h_of;
    assign h_if = host_en && host_region == 2'd1 && 32'(host_bank) == i;
    assign h_of = host_en && host_region == 2'd3 && 32'(host_bank) == i;
    xr_sram_bank #(.DW(16), .DEPTH(DEPTH)) u_if (
      .clk, .en(busy ? rd_en : h_if), .we(busy ? 1'b0 : host_we),
      .addr(AW'(busy ? if_addr : host_word)), .wdata(host_wdata), .rdata(if_rdata[i]));
    xr_sram_bank #(.DW(16), .DEPTH(DEPTH)) u_of (
      .clk, .en(busy ? of_we : h_of), .we(busy ? of_we : host_we),
      .addr(AW'(busy ? of_addr : host_word)), .wdata(busy ? of_rd[i] : host_wdata),
      .rdata(of_rdata[i]));
  end
  for (genvar j = 0; j < COLS; j++) begin : g_wt
    logic h_wt;
    assign h_wt = host_en && host_region == 2'd2 && 32'(host_bank) == j;
    xr_sram_bank #(.DW(16), .DEPTH(DEPTH)) u_wt (
      .clk, .en(busy ? rd_en : h_wt), .we(busy ? 1'b0 : host_we),
      .addr(AW'(busy ? wt_addr : host_word)), .wdata(host_wdata), .rdata(wt_rdata[j]));
  end
endmodule
