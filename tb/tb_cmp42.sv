// tb_cmp42: exhaustive check of the 4:2 compressor identity
// x1+x2+x3+x4+cin = sum + 2*(carry+cout) and of the cout equation.
module tb_cmp42;
  int checks = 0, failures = 0;
  logic x1, x2, x3, x4, cin, sum, carry, cout;

  cmp42 dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32; v++) begin
      {x1, x2, x3, x4, cin} = v[4:0];
      #1;
      checks++;
      if (int'(x1) + int'(x2) + int'(x3) + int'(x4) + int'(cin) !=
          int'(sum) + 2 * (int'(carry) + int'(cout))) begin
        failures++;
        $display("FAIL identity v=%05b sum=%0b carry=%0b cout=%0b", v[4:0], sum, carry, cout);
      end
      checks++;
      // cout is the majority of x1, x2, x3 and independent of cin
      if (cout != ((x1 & x2) | (x1 & x3) | (x2 & x3))) begin
        failures++;
        $display("FAIL cout v=%05b", v[4:0]);
      end
      checks++;
      if (sum != (x1 ^ x2 ^ x3 ^ x4 ^ cin)) begin
        failures++;
        $display("FAIL sum v=%05b", v[4:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
