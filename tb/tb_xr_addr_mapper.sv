// tb_xr_addr_mapper: random requests over all four regions. Checks the
// register strobe and index, the host bank port (region, bank, word, data,
// enable only when idle and the bank exists), and the answer one cycle
// later: the sampled register value or the addressed bank's read data, and
// SLVERR for bank accesses while busy or beyond the last bank.
module tb_xr_addr_mapper;
  localparam int R = 8, C = 8;
  logic clk = 0, rst = 1;
  logic busy = 0, req_valid = 0, req_we = 0;
  logic [15:0] req_addr = '0;
  logic [31:0] req_wdata = '0, rsp_rdata, csr_wdata, csr_rdata;
  logic rsp_err, csr_we, host_en, host_we;
  logic [2:0] csr_idx;
  logic [1:0] host_region;
  logic [3:0] host_bank;
  logic [7:0] host_word;
  logic [15:0] host_wdata;
  logic [R-1:0][15:0] if_rdata, of_rdata;
  logic [C-1:0][15:0] wt_rdata;
  int checks = 0, failures = 0;

  xr_addr_mapper #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;
  assign csr_rdata = {29'h1234567, csr_idx};

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 2000; i++) begin
      int region, bank;
      bit ok, err;
      logic [31:0] exp_d;
      region = $urandom % 4;
      bank = $urandom % 16;
      busy = ($urandom % 4 == 0);
      req_valid = 1;
      req_we = 1'($urandom);
      req_addr = 16'((region << 14) | (bank << 10) | (($urandom % 256) << 2));
      req_wdata = $urandom;
      for (int b = 0; b < R; b++) begin if_rdata[b] = 16'($urandom); of_rdata[b] = 16'($urandom); end
      for (int b = 0; b < C; b++) wt_rdata[b] = 16'($urandom);
      ok = (region == 2) ? bank < C : bank < R;
      err = region != 0 && (busy || !ok);
      #1;
      checks++;
      if (csr_we !== (region == 0 && req_we) || (region == 0 && csr_idx !== req_addr[4:2]) ||
          csr_wdata !== req_wdata ||
          host_en !== (region != 0 && ok && !busy) ||
          (host_en && (host_region !== 2'(region) || host_bank !== 4'(bank) ||
                       host_word !== req_addr[9:2] || host_wdata !== req_wdata[15:0] ||
                       host_we !== req_we))) begin
        failures++;
        $display("decode of %h wrong", req_addr);
      end
      exp_d = (region == 0) ? {29'h1234567, req_addr[4:2]} : 32'h0;
      @(negedge clk);
      req_valid = 0;
      if (!err && region == 1) exp_d = {16'h0, if_rdata[bank]};
      if (!err && region == 2) exp_d = {16'h0, wt_rdata[bank]};
      if (!err && region == 3) exp_d = {16'h0, of_rdata[bank]};
      checks++;
      if (rsp_err !== err || rsp_rdata !== exp_d) begin
        failures++;
        $display("answer to %h: %h err %b, expected %h err %b", req_addr, rsp_rdata, rsp_err, exp_d, err);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
