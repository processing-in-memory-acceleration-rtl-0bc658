// tb_batch_norm: random inputs and constants against
// floor((x - mu) * scale / 2^8) + beta.
module tb_batch_norm;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [39:0] x, mu, beta, y;
  logic signed [15:0] scale;

  batch_norm dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = 0; mu = 0; beta = 0; scale = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      longint d, e;
      @(negedge clk);
      x = 40'(longint'($signed($urandom % 2000000)) - 1000000);
      mu = 40'(longint'($signed($urandom % 20000)) - 10000);
      beta = 40'(longint'($signed($urandom % 2000)) - 1000);
      scale = 16'($signed($urandom));
      d = (longint'(x) - longint'(mu)) * longint'(scale);
      // floor division by 256
      e = (d >= 0) ? d / 256 : -((-d + 255) / 256);
      e += longint'(beta);
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
