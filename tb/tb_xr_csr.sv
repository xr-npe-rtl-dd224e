// tb_xr_csr: random register writes and read-backs. Checks the configuration
// outputs and read data, the one-cycle start pulse, that configuration
// writes are ignored while busy, the sticky done bit (set by done, cleared
// by start) and the busy and cycle-count read-outs.
module tb_xr_csr;
  import xr_npe_pkg::*;
  logic clk = 0, rst = 1;
  logic csr_we = 0;
  logic [2:0] csr_idx = '0;
  logic [31:0] csr_wdata = '0, csr_rdata, cycles = '0;
  logic start, relu_sel, busy = 0, done = 0;
  prec_e prec;
  logic [8:0] k_len;
  logic [7:0] if_base, wt_base, of_base;
  int checks = 0, failures = 0;
  logic [31:0] m [8];
  logic mdone;

  xr_csr dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("%s", what); end
  endtask

  initial begin
    for (int i = 0; i < 8; i++) m[i] = '0;
    mdone = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 1500; i++) begin
      bit st;
      csr_idx = 3'($urandom);
      csr_we = 1'($urandom);
      csr_wdata = $urandom;
      busy = ($urandom % 5 == 0);
      done = ($urandom % 9 == 0);
      cycles = $urandom;
      st = csr_we && !busy && csr_idx == 0 && csr_wdata[0];
      if (csr_we && !busy) begin
        case (csr_idx)
          1: m[1] = {29'b0, csr_wdata[2:0]};
          2: m[2] = {23'b0, csr_wdata[8:0]};
          3: m[3] = {24'b0, csr_wdata[7:0]};
          4: m[4] = {24'b0, csr_wdata[7:0]};
          5: m[5] = {24'b0, csr_wdata[7:0]};
          default: ;
        endcase
      end
      if (done) mdone = 1;
      if (st) mdone = 0;
      @(negedge clk);
      csr_we = 0;
      done = 0;
      chk(start == st, "start pulse");
      chk({29'b0, relu_sel, prec} == m[1] && {23'b0, k_len} == m[2] && {24'b0, if_base} == m[3]
          && {24'b0, wt_base} == m[4] && {24'b0, of_base} == m[5], "config outputs");
      for (int r = 1; r < 8; r++) begin
        logic [31:0] e;
        csr_idx = 3'(r);
        #1;
        e = (r == 6) ? {30'b0, mdone, busy} : (r == 7) ? cycles : m[r];
        chk(csr_rdata == e, $sformatf("read %0d: %h expected %h", r, csr_rdata, e));
      end
      @(negedge clk);
      chk(start == 0, "start longer than one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
