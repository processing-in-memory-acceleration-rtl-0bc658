// tb_full_adder: exhaustive check of the one-bit full adder.
module tb_full_adder;
  int checks = 0, failures = 0;
  logic a, b, cin, s, cout;

  full_adder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = v[2:0];
      #1;
      checks++;
      if ({cout, s} != 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL %03b -> %0b%0b", v[2:0], cout, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
