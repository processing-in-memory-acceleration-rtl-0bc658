// cmp_reduce: recursive 4:2 compressor reduction used by the CMP unit.
//
// Adds N_OPS operands of W bits modulo 2^W (the caller picks W large enough
// for the exact total). Each stage groups the operands by four; a row of W
// cmp42 cells turns each group into a sum word and a carry word (carry and
// cout both weigh 2, the cout of bit i feeding the cin of bit i+1). Up to
// three left-over operands pass to the next stage unchanged. The module
// instantiates itself until at most two operands remain, which one adder
// sums. Purely combinational.
// Lint note: when this module is linted on its own as the top, Verilator does
// not elaborate the recursive instance of itself and reports 'total' as
// undriven (and 'nxt' as unused). Under cmp_tree the recursion is
// elaborated and every stage is driven; the bit-count tests exercise it.
module cmp_reduce #(
  parameter int unsigned N_OPS = 4,
  parameter int unsigned W     = 3
) (
  input  logic [N_OPS-1:0][W-1:0] ops,
  output logic [W-1:0]            total
);
  localparam int unsigned G      = N_OPS / 4;   // groups of four
  localparam int unsigned R      = N_OPS % 4;   // pass-through operands
  localparam int unsigned N_NEXT = 2 * G + R;

  if (N_OPS == 1) begin : g_one
    assign total = ops[0];
  end else if (N_OPS == 2) begin : g_two
    assign total = ops[0] + ops[1];
  end else if (N_OPS == 3) begin : g_three
    assign total = ops[0] + ops[1] + ops[2];
  end else begin : g_stage
    logic [N_NEXT-1:0][W-1:0] nxt;

    for (genvar g = 0; g < int'(G); g++) begin : g_grp
      logic [W-1:0] s, c, co;
      for (genvar b = 0; b < int'(W); b++) begin : g_bit
        logic ci;
        if (b == 0) begin : g_c0
          assign ci = 1'b0;
        end else begin : g_cn
          assign ci = co[b-1];
        end
        cmp42 u_cmp (
          .x1(ops[4*g][b]), .x2(ops[4*g+1][b]), .x3(ops[4*g+2][b]), .x4(ops[4*g+3][b]),
          .cin(ci), .sum(s[b]), .carry(c[b]), .cout(co[b])
        );
      end
      // carry and cout of bit b both weigh 2^(b+1); cout already went to cin
      // of bit b+1, so only carry is shifted here (the top cout is overflow).
      assign nxt[2*g]   = s;
      assign nxt[2*g+1] = {c[W-2:0], 1'b0};
    end
    for (genvar r = 0; r < int'(R); r++) begin : g_pass
      assign nxt[2*G + r] = ops[4*G + r];
    end

    cmp_reduce #(.N_OPS(N_NEXT), .W(W)) u_next (.ops(nxt), .total(total));
  end
endmodule
