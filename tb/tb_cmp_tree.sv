// tb_cmp_tree: the compressor unit must return the number of ones of a
// 512-bit row; checked for all-zero, all-one, single bits, the paper's
// 4-column example and random rows of varying density.
module tb_cmp_tree;
  localparam int N = 512;
  int checks = 0, failures = 0;
  logic [N-1:0] bits;
  logic [$clog2(N+1)-1:0] count;

  cmp_tree #(.NBITS(N)) dut (.bits(bits), .count(count));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_row(input logic [N-1:0] r);
    int ones = 0;
    bits = r;
    #1;
    for (int i = 0; i < N; i++) ones += int'(r[i]);
    checks++;
    if (int'(count) != ones) begin
      failures++;
      $display("FAIL count=%0d expected=%0d", count, ones);
    end
  endtask

  initial begin
    logic [N-1:0] r;
    check_row('0);
    check_row('1);
    for (int i = 0; i < N; i += 37) check_row(N'(1) << i);
    check_row(N'(4'b0101));   // Fig.-3-style row with two ones
    for (int t = 0; t < 300; t++) begin
      automatic int dens = t % 9;
      for (int i = 0; i < N; i++) r[i] = (($urandom % 8) < dens);
      check_row(r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
