// tb_activation: every activation mode on random and edge-case inputs,
// against reference formulas (FRAC = 8, so 1.0 = 256).
module tb_activation;
  import pim_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  act_mode_e mode;
  logic signed [39:0] x, y;

  activation dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_act(input int md, input longint v);
    longint h;
    case (md)
      0: return v;
      1: return (v < 0) ? 0 : v;
      2: return (v < 0) ? 0 : 1;
      default: begin
        h = 128 + ((v >= 0) ? v / 2 : -((-v + 1) / 2));
        if (h < 0) h = 0;
        if (h > 256) h = 256;
        return h;
      end
    endcase
  endfunction

  initial begin
    longint vals [8] = '{0, -1, 1, 255, -255, 256, -600, 1000};
    mode = ACT_NONE; x = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int md = 0; md < 4; md++) begin
      for (int t = 0; t < 80; t++) begin
        automatic longint v = (t < 8) ? vals[t] : longint'($signed($urandom % 4000)) - 2000;
        @(negedge clk);
        mode = act_mode_e'(md); x = 40'(v); en = 1;
        @(negedge clk);
        en = 0;
        checks++;
        if (longint'(y) != ref_act(md, v)) begin
          failures++; $display("FAIL mode=%0d x=%0d y=%0d exp=%0d", md, v, y, ref_act(md, v));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
