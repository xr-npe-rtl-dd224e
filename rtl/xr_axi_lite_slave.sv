// xr_axi_lite_slave: AXI4-Lite slave port of the co-processor.
//
// Accepts one transaction at a time. A write needs both the AW and the W
// beat (taken in the same or in different cycles); a read needs the AR beat.
// Each becomes a one-cycle request (req_valid, req_we, req_addr, req_wdata)
// to the address mapper, whose answer (rsp_rdata, rsp_err) comes in the next
// cycle; it is then returned on B (bresp) or R (rdata, rresp), OKAY or
// SLVERR, and held until the master takes it. Byte strobes are not
// supported: every write stores a full word. The paper says the array is
// AXI-enabled and attached to the host's AXI; the AXI4-Lite subset and this
// single-outstanding protocol engine are this design's choices.
module xr_axi_lite_slave #(
  parameter int unsigned AW = 16
) (
  input  logic          clk,
  input  logic          rst,
  // write address / data / response
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [AW-1:0] s_awaddr,
  input  logic          s_wvalid,
  output logic          s_wready,
  input  logic [31:0]   s_wdata,
  output logic          s_bvalid,
  input  logic          s_bready,
  output logic [1:0]    s_bresp,
  // read address / data
  input  logic          s_arvalid,
  output logic          s_arready,
  input  logic [AW-1:0] s_araddr,
  output logic          s_rvalid,
  input  logic          s_rready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  // request to the address mapper
  output logic          req_valid,
  output logic          req_we,
  output logic [AW-1:0] req_addr,
  output logic [31:0]   req_wdata,
  input  logic [31:0]   rsp_rdata,
  input  logic          rsp_err
);
  typedef enum logic [2:0] {S_IDLE, S_WREQ, S_WRSP, S_RREQ, S_RRSP} state_e;
  state_e        state;
  logic          aw_got, w_got;
  logic [AW-1:0] aw_q;
  logic [31:0]   w_q;

  assign s_awready = (state == S_IDLE) && !aw_got;
  assign s_wready  = (state == S_IDLE) && !w_got;
  assign s_arready = (state == S_IDLE) && !aw_got && !w_got && !s_awvalid && !s_wvalid;

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      aw_got    <= 1'b0;
      w_got     <= 1'b0;
      aw_q      <= '0;
      w_q       <= '0;
      req_valid <= 1'b0;
      req_we    <= 1'b0;
      req_addr  <= '0;
      req_wdata <= '0;
      s_bvalid  <= 1'b0;
      s_bresp   <= 2'b00;
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
      s_rresp   <= 2'b00;
    end else begin
      req_valid <= 1'b0;
      case (state)
        S_IDLE: begin
          if (s_awvalid && s_awready) begin aw_got <= 1'b1; aw_q <= s_awaddr; end
          if (s_wvalid && s_wready)   begin w_got  <= 1'b1; w_q  <= s_wdata;  end
          if ((aw_got || (s_awvalid && s_awready)) && (w_got || (s_wvalid && s_wready))) begin
            req_valid <= 1'b1;
            req_we    <= 1'b1;
            req_addr  <= aw_got ? aw_q : s_awaddr;
            req_wdata <= w_got ? w_q : s_wdata;
            aw_got    <= 1'b0;
            w_got     <= 1'b0;
            state     <= S_WREQ;
          end else if (s_arvalid && s_arready) begin
            req_valid <= 1'b1;
            req_we    <= 1'b0;
            req_addr  <= s_araddr;
            state     <= S_RREQ;
          end
        end
        S_WREQ: state <= S_WRSP;
        S_WRSP: begin
          if (!s_bvalid) begin
            s_bvalid <= 1'b1;
            s_bresp  <= rsp_err ? 2'b10 : 2'b00;
          end else if (s_bready) begin
            s_bvalid <= 1'b0;
            state    <= S_IDLE;
          end
        end
        S_RREQ: state <= S_RRSP;
        S_RRSP: begin
          if (!s_rvalid) begin
            s_rvalid <= 1'b1;
            s_rdata  <= rsp_rdata;
            s_rresp  <= rsp_err ? 2'b10 : 2'b00;
          end else if (s_rready) begin
            s_rvalid <= 1'b0;
            state    <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI rule: a response, once valid, stays valid and stable until taken
  a_b_hold: assert property (@(posedge clk) disable iff (rst)
                             s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp));
  a_r_hold: assert property (@(posedge clk) disable iff (rst)
                             s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
