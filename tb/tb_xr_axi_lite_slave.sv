// tb_xr_axi_lite_slave: the behavioural AXI4-Lite master performs random
// writes and reads through the slave into a small register-file model that
// answers each request one cycle later (SLVERR for addresses with bit 15
// set). Read data must match the model, responses must carry the right
// OKAY/SLVERR code, and a write whose W beat comes several cycles after its
// AW beat must still land.
module tb_xr_axi_lite_slave;
  logic clk = 0, rst = 1;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [15:0] awaddr, araddr;
  logic [31:0] wdata, rdata;
  logic [1:0] bresp, rresp;
  logic req_valid, req_we, rsp_err;
  logic [15:0] req_addr;
  logic [31:0] req_wdata, rsp_rdata;
  int checks = 0, failures = 0;
  logic [31:0] regs [64];
  logic [31:0] model [64];

  always #5 clk = ~clk;

  xr_axi_lite_slave #(.AW(16)) dut (.clk, .rst, .s_awvalid(awvalid), .s_awready(awready),
    .s_awaddr(awaddr), .s_wvalid(wvalid), .s_wready(wready), .s_wdata(wdata),
    .s_bvalid(bvalid), .s_bready(bready), .s_bresp(bresp), .s_arvalid(arvalid),
    .s_arready(arready), .s_araddr(araddr), .s_rvalid(rvalid), .s_rready(rready),
    .s_rdata(rdata), .s_rresp(rresp), .req_valid, .req_we, .req_addr, .req_wdata,
    .rsp_rdata, .rsp_err);
  xr_axi_master host (.clk, .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .bvalid,
                      .bready, .bresp, .arvalid, .arready, .araddr, .rvalid, .rready, .rdata,
                      .rresp);

  // request responder: answer one cycle after the request
  always @(posedge clk) begin
    if (req_valid) begin
      rsp_err <= req_addr[15];
      if (req_we && !req_addr[15]) regs[req_addr[7:2]] <= req_wdata;
      rsp_rdata <= req_addr[15] ? 32'h0 : regs[req_addr[7:2]];
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    int e0;
    for (int i = 0; i < 64; i++) begin regs[i] = '0; model[i] = '0; end
    rsp_err = 0;
    rsp_rdata = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 400; i++) begin
      logic [15:0] a;
      a = {($urandom % 8 == 0), 7'b0, 6'($urandom), 2'b00};
      e0 = host.slverr;
      if ($urandom % 2) begin
        logic [31:0] d;
        d = $urandom;
        host.write(a, d);
        if (!a[15]) model[a[7:2]] = d;
      end else begin
        host.read(a, r);
        checks++;
        if (!a[15] && r !== model[a[7:2]]) begin
          failures++;
          $display("read %h: %h expected %h", a, r, model[a[7:2]]);
        end
      end
      checks++;
      if ((host.slverr - e0) != int'(a[15])) begin failures++; $display("resp code wrong at %h", a); end
    end
    // AW first, W three cycles later
    @(negedge clk);
    awvalid = 1; awaddr = 16'h0010; bready = 1;
    #1;
    while (!awready) @(negedge clk);
    @(negedge clk);
    awvalid = 0;
    repeat (3) @(negedge clk);
    wvalid = 1; wdata = 32'hCAFE_F00D;
    @(negedge clk);
    wvalid = 0;
    wait (bvalid);
    @(posedge clk);
    @(negedge clk);
    bready = 0;
    host.read(16'h0010, r);
    checks++;
    if (r !== 32'hCAFE_F00D) begin failures++; $display("split write lost: %h", r); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
