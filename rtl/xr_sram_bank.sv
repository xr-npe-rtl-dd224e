// xr_sram_bank: one memory bank of the co-processor (IF, Wt or OF banks).
//
// Single-port synchronous RAM written as an array so that synthesis can map
// it to an SRAM macro or block RAM: with en high, a write stores wdata at
// addr, a read returns mem[addr] on rdata one clock later. rdata holds its
// value when en is low. The contents are not reset. The paper shows the
// banks but gives neither their depth nor their port structure; the depth of
// 256 words and one port per bank are this design's choices.
module xr_sram_bank #(
  parameter int unsigned DW    = 16,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata <= mem[addr];
    end
  end
endmodule
