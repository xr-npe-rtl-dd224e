// xr_addr_mapper: address mapper of the co-processor's control unit.
//
// Decodes a request from the AXI slave (byte address, 32-bit words):
//   addr[15:14] region: 0 = control/status registers, 1 = IF banks,
//               2 = Wt banks, 3 = OF banks
//   addr[13:10] bank number (row for IF and OF, column for Wt)
//   addr[9:2]   word within the bank (256 words)
//   addr[4:2]   register index in region 0
// A register write becomes a one-cycle csr_we strobe; a bank access
// drives the host bank port (host_en, host_we, region, bank, word, low 16
// bits of wdata). The answer is ready one cycle after the request: rsp_rdata
// is the sampled register value or the addressed bank's read data (zero
// extended) and stays until the next request. rsp_err is raised for a bank
// access while the array is busy (the control FSM owns the bank ports then)
// or for a bank number beyond the array. The map is this design's choice;
// the paper only names the block.
// Lint note: req_addr[1:0] is unused on purpose; accesses are whole 32-bit
// words, so the byte offset inside a word carries no information.
module xr_addr_mapper #(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  busy,
  input  logic                  req_valid,
  input  logic                  req_we,
  input  logic [15:0]           req_addr,
  input  logic [31:0]           req_wdata,
  output logic [31:0]           rsp_rdata,
  output logic                  rsp_err,
  // control / status registers
  output logic                  csr_we,
  output logic [2:0]            csr_idx,
  output logic [31:0]           csr_wdata,
  input  logic [31:0]           csr_rdata,
  // host port of the banks
  output logic                  host_en,
  output logic                  host_we,
  output logic [1:0]            host_region,
  output logic [3:0]            host_bank,
  output logic [7:0]            host_word,
  output logic [15:0]           host_wdata,
  input  logic [ROWS-1:0][15:0] if_rdata,
  input  logic [COLS-1:0][15:0] wt_rdata,
  input  logic [ROWS-1:0][15:0] of_rdata
);
  logic [1:0]  region;
  logic [3:0]  bank;
  logic        bank_ok;
  logic [1:0]  rs_region;
  logic [3:0]  rs_bank;
  logic [31:0] rs_csr;

  always_comb begin
    region  = req_addr[15:14];
    bank    = req_addr[13:10];
    bank_ok = (region == 2'd2) ? (32'(bank) < COLS) : (32'(bank) < ROWS);
    csr_we    = req_valid && req_we && region == 2'd0;
    csr_idx   = req_addr[4:2];
    csr_wdata = req_wdata;
    host_en     = req_valid && region != 2'd0 && bank_ok && !busy;
    host_we     = req_we;
    host_region = region;
    host_bank   = bank;
    host_word   = req_addr[9:2];
    host_wdata  = req_wdata[15:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rsp_err   <= 1'b0;
      rs_region <= '0;
      rs_bank   <= '0;
      rs_csr    <= '0;
    end else if (req_valid) begin
      rsp_err   <= (region != 2'd0) && (busy || !bank_ok);
      rs_region <= region;
      rs_bank   <= bank;
      rs_csr    <= csr_rdata;
    end
  end

  always_comb begin
    case (rs_region)
      2'd0:    rsp_rdata = rs_csr;
      2'd1:    rsp_rdata = {16'h0, if_rdata[32'(rs_bank) % ROWS]};
      2'd2:    rsp_rdata = {16'h0, wt_rdata[32'(rs_bank) % COLS]};
      default: rsp_rdata = {16'h0, of_rdata[32'(rs_bank) % ROWS]};
    endcase
    if (rsp_err) rsp_rdata = '0;
  end
endmodule
