// tb_adder_bias: random partial sums and signed biases against the integer
// sum, with the one-cycle register latency.
module tb_adder_bias;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [3:0][31:0] psum;
  logic signed [39:0] bias, y;

  adder_bias dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    psum = '0; bias = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      longint e;
      @(negedge clk);
      e = 0;
      for (int i = 0; i < 4; i++) begin
        psum[i] = (t == 0) ? 32'hFFFF_FFFF : $urandom;
        e += longint'(psum[i]);
      end
      bias = 40'(longint'($signed($urandom)) * 4);
      e += longint'(bias);
      en = 1;
      @(negedge clk);
      en = 0;
      checks++;
      if (longint'(y) != e) begin failures++; $display("FAIL y=%0d exp=%0d", y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
