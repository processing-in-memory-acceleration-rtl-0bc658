// tb_quantizer: all 256 raw inputs at every bit-width k = 1..8 against
// q = floor((2^k-1) * x/255 + 1/2) computed in floating point.
module tb_quantizer;
  int checks = 0, failures = 0;
  logic [7:0] x, q;
  logic [3:0] k;

  quantizer dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int kk = 1; kk <= 8; kk++) begin
      for (int v = 0; v < 256; v++) begin
        real r;
        int e;
        x = 8'(v); k = 4'(kk);
        #1;
        r = real'(v) / 255.0;
        e = int'($floor(real'((1 << kk) - 1) * r + 0.5));
        checks++;
        if (int'(q) != e) begin
          failures++; $display("FAIL k=%0d x=%0d q=%0d exp=%0d", kk, v, q, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
