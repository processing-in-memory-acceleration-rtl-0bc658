// tb_mram_bank: writes random bytes to random addresses of a full-size bank
// and reads them back with the one-cycle read latency.
module tb_mram_bank;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, re = 0;
  logic [15:0] waddr, raddr;
  logic [7:0] wdata, rdata;
  logic [7:0] model [int];

  mram_bank dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addrs [200];
    waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      addrs[i] = (i == 0) ? 0 : (i == 1) ? 65535 : int'($urandom % 65536);
      we = 1; waddr = 16'(addrs[i]); wdata = 8'($urandom);
      model[addrs[i]] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 200; i++) begin
      re = 1; raddr = 16'(addrs[i]);
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== model[addrs[i]]) begin
        failures++; $display("FAIL addr %0d got %0h exp %0h", addrs[i], rdata, model[addrs[i]]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
