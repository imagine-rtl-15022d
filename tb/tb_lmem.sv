// tb_lmem: self-checking test of lmem. Writes random words at random
// addresses, reads them back, and checks the one-cycle read latency and that
// the read data hold while no new read is issued.
module tb_lmem;
  logic clk = 0, en = 0, we = 0;
  logic [10:0] addr;
  logic [127:0] wdata, rdata;
  logic [127:0] ref_mem [2048];
  logic [2047:0] written;
  int checks = 0, failures = 0;

  lmem dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    written = '0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 11'($urandom); wdata = {$urandom, $urandom, $urandom, $urandom};
      ref_mem[addr] = wdata; written[addr] = 1'b1;
    end
    @(negedge clk); en = 0; we = 0;
    for (int n = 0; n < 2048; n++) if (written[n]) begin
      @(negedge clk); en = 1; we = 0; addr = 11'(n);
      @(negedge clk); en = 0;
      chk(rdata == ref_mem[n], $sformatf("read %0d", n));
      @(negedge clk);
      chk(rdata == ref_mem[n], $sformatf("hold %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
