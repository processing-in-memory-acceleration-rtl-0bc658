// tb_nv_fa: the NV-FA accumulator must add, clear, checkpoint, lose its
// volatile sum on power failure and restore the checkpointed sum.
module tb_nv_fa;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, pwr_good = 1, clear = 0, add = 0, backup = 0, restore = 0;
  logic [15:0] x, sum;
  logic cout;
  int unsigned model;

  nv_fa #(.W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int unsigned e, input string what);
    checks++;
    if (int'(sum) != int'(e[15:0])) begin
      failures++;
      $display("FAIL %s sum=%0d exp=%0d", what, sum, e[15:0]);
    end
  endtask

  initial begin
    int unsigned saved;
    x = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    model = 0;
    chk(0, "clear");
    for (int i = 0; i < 40; i++) begin
      x = 16'($urandom % 1000);
      add = 1;
      @(negedge clk);
      add = 0;
      model += x;
      chk(model, "add");
      if (i == 19) begin
        backup = 1;
        @(negedge clk);
        backup = 0;
        saved = model;
      end
    end
    checks++;
    if (cout !== 1'b0) begin failures++; $display("FAIL cout"); end
    pwr_good = 0;
    repeat (2) @(negedge clk);
    pwr_good = 1;
    @(negedge clk);
    chk(0, "lost");
    restore = 1;
    @(negedge clk);
    restore = 0;
    chk(saved, "restore");
    // overflow sets cout
    x = 16'hFFFF; add = 1;
    @(negedge clk);
    add = 0;
    checks++;
    if (cout !== 1'b1) begin failures++; $display("FAIL cout on overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
