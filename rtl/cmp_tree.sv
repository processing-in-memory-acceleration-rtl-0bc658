// cmp_tree: compressor (CMP) unit of a computational sub-array.
//
// Counts the '1's of one sensed row of NBITS bit-lines in a single clock
// cycle. Every bit is taken as a one-bit operand and the operands are reduced
// by rows of 4:2 compressors (cmp_reduce), four operands to two per stage,
// until two remain; one carry-propagate addition then gives the count.
// Combinational; the count is captured by the adaptive shift register that
// follows. The use of 4:2 compressors for the bit count is the paper's; the
// tree shape (greedy 4-to-2 stages, final adder) is this design's choice.
//   bits   sensed row (one bit per bit-line)
//   count  number of ones, $clog2(NBITS+1) bits
module cmp_tree #(
  parameter int unsigned NBITS = 512,
  localparam int unsigned CW   = $clog2(NBITS + 1)
) (
  input  logic [NBITS-1:0] bits,
  output logic [CW-1:0]    count
);
  logic [NBITS-1:0][CW-1:0] ops;

  always_comb begin
    for (int i = 0; i < int'(NBITS); i++) ops[i] = CW'(bits[i]);
  end

  cmp_reduce #(.N_OPS(NBITS), .W(CW)) u_reduce (.ops(ops), .total(count));
endmodule
