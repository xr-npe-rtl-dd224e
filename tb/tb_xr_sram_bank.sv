// tb_xr_sram_bank: writes random words to random addresses of a bank,
// keeping a model array, and reads them back: read data must equal the last
// word written, one cycle after the read, and hold while en is low.
module tb_xr_sram_bank;
  logic clk = 0;
  logic en = 0, we = 0;
  logic [7:0] addr = '0;
  logic [15:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [15:0] model [256];
  bit valid [256];

  xr_sram_bank #(.DW(16), .DEPTH(256)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 8'(i); wdata = 16'($urandom);
      model[i] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      en = 1;
      we = ($urandom % 3 == 0);
      addr = 8'($urandom);
      wdata = 16'($urandom);
      if (we) model[addr] = wdata;
      else begin
        logic [15:0] e;
        e = model[addr];
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata !== e) begin failures++; $display("addr %0d: %h expected %h", addr, rdata, e); end
        @(negedge clk);
        checks++;
        if (rdata !== e) begin failures++; $display("rdata not held"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
