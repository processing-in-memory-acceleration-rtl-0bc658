// tb_asr: the 4-bit adaptive shift register with shifts 0, 1, 2. Checks the
// paper's example (IN=1001, SHIFT=01 gives 010010), all 16 inputs with every
// shift, the one-cycle load latency and that the register holds when load
// is low.
module tb_asr;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0;
  logic [3:0] in;
  logic [1:0] shift;
  logic [5:0] out;

  asr dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [5:0] exp_o, input string what);
    checks++;
    if (out !== exp_o) begin
      failures++;
      $display("FAIL %s out=%06b exp=%06b", what, out, exp_o);
    end
  endtask

  initial begin
    in = 0; shift = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    in = 4'b1001; shift = 2'b01; load = 1;
    @(negedge clk);
    load = 0;
    chk(6'b010010, "paper example");
    in = 4'b1111; shift = 2'b10;
    @(negedge clk);
    chk(6'b010010, "hold without load");
    for (int s = 0; s < 3; s++) begin
      for (int v = 0; v < 16; v++) begin
        in = v[3:0]; shift = s[1:0]; load = 1;
        @(negedge clk);
        chk(6'(v << s), "sweep");
      end
    end
    load = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
