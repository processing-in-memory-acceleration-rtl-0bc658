// msa: logic function of the reconfigurable (modified) sense amplifier of one
// bit-line of a SOT-MRAM computational sub-array.
//
// In the memory two cells of the same column can be sensed together; the
// sense voltage of the parallel pair is compared with selectable references
// so that one amplifier yields AND/NAND (reference R_AND) and a second one
// yields OR/NOR (reference R_OR). XOR is formed from the AND and NOR
// outputs by a NOR gate and XNOR by inverting that. A 3-bit SEL chooses the
// output. A plain read compares one cell with R_M.
//
// This module models only the digital result of that sensing; voltages,
// references and sense margins are not modelled. Purely combinational:
//   a_bit   first sensed cell (also the cell read in SEL_READ)
//   b_bit   second sensed cell (ignored in SEL_READ)
//   sel     pim_pkg::sense_op_e
//   y       sensed result
// The set of functions follows the sense-amplifier drawing of the paper; the
// numeric SEL codes are this design's choice (see pim_pkg).
module msa
  import pim_pkg::*;
(
  input  logic      a_bit,
  input  logic      b_bit,
  input  sense_op_e sel,
  output logic      y
);
  logic and_o, nand_o, or_o, nor_o, xor_o, xnor_o;

  // Two sense amplifiers: one against the AND reference, one against OR.
  assign and_o  = a_bit & b_bit;
  assign nand_o = ~and_o;
  assign or_o   = a_bit | b_bit;
  assign nor_o  = ~or_o;
  // XOR = NOR(AND, NOR); XNOR is its inverse.
  assign xor_o  = ~(and_o | nor_o);
  assign xnor_o = ~xor_o;

  always_comb begin
    unique case (sel)
      SEL_READ: y = a_bit;
      SEL_AND:  y = and_o;
      SEL_NAND: y = nand_o;
      SEL_OR:   y = or_o;
      SEL_NOR:  y = nor_o;
      SEL_XOR:  y = xor_o;
      SEL_XNOR: y = xnor_o;
      default:  y = a_bit;
    endcase
  end
endmodule
