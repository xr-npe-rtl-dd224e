// xr_csr: configuration and status registers of the control unit.
//
// Register index (byte offset), 32-bit:
//   0 (0x00) CTRL    write 1 to bit 0: start one tile (start pulse)
//   1 (0x04) CONFIG  [1:0] precision (00 FP4, 01 Posit(4,1), 10 Posit(8,0),
//                    11 Posit(16,1)), [2] store the ReLU output (PE_out)
//   2 (0x08) K       number of accumulation steps (IF/Wt words per bank)
//   3 (0x0C) IF_BASE first word of the IF banks
//   4 (0x10) WT_BASE first word of the Wt banks
//   5 (0x14) OF_BASE first word written in the OF banks
//   6 (0x18) STATUS  [0] busy, [1] done (set when a tile ends, cleared by
//                    start); read only
//   7 (0x1C) CYCLES  clock cycles the last tile took, read only
// Writes take effect at the clock edge; csr_rdata is combinational from the
// index. Configuration writes are ignored while busy. The paper names the
// config and status registers and lists what the scheduling depends on; the
// register set and layout are this design's choices.
// Lint note: csr_wdata[31:9] is unused on purpose; no register is wider
// than the 9-bit K field, and the upper write bits are ignored.
module xr_csr
  import xr_npe_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        csr_we,
  input  logic [2:0]  csr_idx,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  // to and from the control FSM
  output logic        start,
  output prec_e       prec,
  output logic        relu_sel,
  output logic [8:0]  k_len,
  output logic [7:0]  if_base,
  output logic [7:0]  wt_base,
  output logic [7:0]  of_base,
  input  logic        busy,
  input  logic        done,
  input  logic [31:0] cycles
);
  logic done_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      start    <= 1'b0;
      prec     <= PREC_FP4;
      relu_sel <= 1'b0;
      k_len    <= '0;
      if_base  <= '0;
      wt_base  <= '0;
      of_base  <= '0;
      done_q   <= 1'b0;
    end else begin
      start <= 1'b0;
      if (done) done_q <= 1'b1;
      if (csr_we && !busy) begin
        case (csr_idx)
          3'd0: if (csr_wdata[0]) begin start <= 1'b1; done_q <= 1'b0; end
          3'd1: begin prec <= prec_e'(csr_wdata[1:0]); relu_sel <= csr_wdata[2]; end
          3'd2: k_len   <= csr_wdata[8:0];
          3'd3: if_base <= csr_wdata[7:0];
          3'd4: wt_base <= csr_wdata[7:0];
          3'd5: of_base <= csr_wdata[7:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    case (csr_idx)
      3'd1:    csr_rdata = {29'b0, relu_sel, prec};
      3'd2:    csr_rdata = {23'b0, k_len};
      3'd3:    csr_rdata = {24'b0, if_base};
      3'd4:    csr_rdata = {24'b0, wt_base};
      3'd5:    csr_rdata = {24'b0, of_base};
      3'd6:    csr_rdata = {30'b0, done_q, busy};
      3'd7:    csr_rdata = cycles;
      default: csr_rdata = '0;
    endcase
  end
endmodule
