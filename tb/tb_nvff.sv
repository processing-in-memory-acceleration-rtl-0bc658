// tb_nvff: the NV flip-flop must behave as a register, lose its volatile
// content when power fails, keep the value last backed up and return it on
// restore.
module tb_nvff;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, pwr_good = 1, en = 0, backup = 0, restore = 0;
  logic [7:0] d, q;

  nvff #(.W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [7:0] e, input string what);
    checks++;
    if (q !== e) begin
      failures++;
      $display("FAIL %s q=%0h exp=%0h", what, q, e);
    end
  endtask

  initial begin
    d = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    d = 8'hA5; en = 1;
    @(negedge clk);
    en = 0;
    chk(8'hA5, "write");
    backup = 1;
    @(negedge clk);
    backup = 0;
    d = 8'h3C; en = 1;
    @(negedge clk);
    en = 0;
    chk(8'h3C, "write after backup");
    pwr_good = 0;
    repeat (3) @(negedge clk);
    chk(8'h00, "volatile content lost");
    pwr_good = 1;
    @(negedge clk);
    chk(8'h00, "still lost before restore");
    restore = 1;
    @(negedge clk);
    restore = 0;
    chk(8'hA5, "restored backup");
    // backup while power is down must not overwrite the NV element
    pwr_good = 0; backup = 1;
    @(negedge clk);
    backup = 0; pwr_good = 1;
    restore = 1;
    @(negedge clk);
    restore = 0;
    chk(8'hA5, "no backup without power");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
