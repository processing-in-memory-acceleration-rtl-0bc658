// tb_bitplane_mapper: loads random values into random columns and checks
// that every plane row holds bit b of each column's value, and that clear
// empties all planes.
module tb_bitplane_mapper;
  localparam int COLS = 64, MB = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, load = 0;
  logic [5:0] col;
  logic [7:0] value;
  logic [2:0] plane;
  logic [COLS-1:0] row;
  int model [COLS];

  bitplane_mapper #(.COLS(COLS), .MAX_BITS(MB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input string what);
    for (int b = 0; b < MB; b++) begin
      plane = 3'(b);
      #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (row[c] !== model[c][b]) begin
          failures++; $display("FAIL %s plane %0d col %0d", what, b, c);
        end
      end
    end
  endtask

  initial begin
    col = 0; value = 0; plane = 0;
    for (int c = 0; c < COLS; c++) model[c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 150; i++) begin
      @(negedge clk);
      load = 1; col = 6'($urandom % COLS); value = 8'($urandom);
      model[col] = value;
    end
    @(negedge clk); load = 0;
    check_all("load");
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int c = 0; c < COLS; c++) model[c] = 0;
    check_all("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
