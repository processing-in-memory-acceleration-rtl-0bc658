// tb_msa: exhaustive check of the sense-amplifier logic function for all
// two-cell inputs and all select codes against a truth table.
module tb_msa;
  import pim_pkg::*;
  int checks = 0, failures = 0;
  logic a, b, y, exp_y;
  sense_op_e sel;

  msa dut (.a_bit(a), .b_bit(b), .sel(sel), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 7; s++) begin
      for (int v = 0; v < 4; v++) begin
        sel = sense_op_e'(s);
        a = v[1]; b = v[0];
        #1;
        case (s)
          0: exp_y = a;
          1: exp_y = a && b;
          2: exp_y = !(a && b);
          3: exp_y = a || b;
          4: exp_y = !(a || b);
          5: exp_y = (a != b);
          default: exp_y = (a == b);
        endcase
        checks++;
        if (y !== exp_y) begin
          failures++;
          $display("FAIL sel=%0d a=%0b b=%0b y=%0b exp=%0b", s, a, b, y, exp_y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
