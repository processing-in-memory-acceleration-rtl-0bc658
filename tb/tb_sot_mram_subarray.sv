// tb_sot_mram_subarray: row write/read and two-row bulk logic with write-back
// on a small array, checked against a software copy of the array.
module tb_sot_mram_subarray;
  import pim_pkg::*;
  localparam int ROWS = 16, COLS = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  array_cmd_e cmd;
  sense_op_e sel;
  logic [3:0] ra, rb, rw;
  logic [COLS-1:0] wdata, rdata;
  logic [COLS-1:0] model [ROWS];

  sot_mram_subarray #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [COLS-1:0] f(input int s, input logic [COLS-1:0] a, input logic [COLS-1:0] b);
    case (s)
      0: return a;
      1: return a & b;
      2: return ~(a & b);
      3: return a | b;
      4: return ~(a | b);
      5: return a ^ b;
      default: return ~(a ^ b);
    endcase
  endfunction

  initial begin
    cmd = ARR_NOP; sel = SEL_READ; ra = 0; rb = 0; rw = 0; wdata = 0;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      cmd = ARR_WRITE; rw = 4'(r); wdata = $urandom;
      model[r] = wdata;
      @(negedge clk);
    end
    for (int r = 0; r < ROWS; r++) begin
      cmd = ARR_READ; ra = 4'(r); rb = 4'(ROWS - 1 - r);
      #1;
      checks++;
      if (rdata !== model[r]) begin failures++; $display("FAIL read row %0d", r); end
      @(negedge clk);
    end
    for (int t = 0; t < 60; t++) begin
      automatic int s = t % 7;
      cmd = ARR_COMPUTE; sel = sense_op_e'(s);
      ra = 4'($urandom % ROWS); rb = 4'($urandom % ROWS); rw = 4'($urandom % ROWS);
      #1;
      checks++;
      if (rdata !== f(s, model[ra], model[rb])) begin
        failures++; $display("FAIL compute sel=%0d", s);
      end
      model[rw] = f(s, model[ra], model[rb]);
      @(negedge clk);
      cmd = ARR_READ; ra = rw;
      #1;
      checks++;
      if (rdata !== model[rw]) begin failures++; $display("FAIL write-back row %0d", rw); end
      @(negedge clk);
    end
    // NOP writes nothing
    cmd = ARR_NOP; rw = 0; wdata = ~model[0];
    @(negedge clk);
    cmd = ARR_READ; ra = 0;
    #1;
    checks++;
    if (rdata !== model[0]) begin failures++; $display("FAIL nop wrote"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
