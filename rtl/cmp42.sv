// cmp42: one 4:2 compressor cell.
//
// Adds five bits of equal weight: x1 + x2 + x3 + x4 + cin = sum + 2*(carry + cout).
// The cell is written in the XOR/XNOR-plus-multiplexer form: the XOR of
// (x1,x2) and of (x3,x4) are formed first, all later XOR stages are replaced
// by 2:1 multiplexers steered by those XORs:
//   sum   = x1^x2^x3^x4^cin
//   carry = (x1^x2^x3^x4) ? cin : x4
//   cout  = (x1^x2)       ? x3  : x1
// cout does not depend on cin, so a row of cells whose cout feeds the next
// bit's cin has no carry ripple. Equations and structure follow the paper;
// the cell is combinational.
module cmp42 (
  input  logic x1,
  input  logic x2,
  input  logic x3,
  input  logic x4,
  input  logic cin,
  output logic sum,
  output logic carry,
  output logic cout
);
  logic x12, x34, x1234;

  assign x12   = x1 ^ x2;     // first-row XOR/XNOR module
  assign x34   = x3 ^ x4;     // first-row XOR/XNOR module
  assign x1234 = x12 ? ~x34 : x34;            // multiplexer replaces XOR
  assign sum   = x1234 ? ~cin : cin;          // multiplexer replaces XOR
  assign carry = x1234 ? cin  : x4;
  assign cout  = x12   ? x3   : x1;
endmodule
