// quantizer: k-bit quantizer of the extra processing unit (EPU).
//
// Inputs must be quantized before they are mapped to the sub-arrays. A raw
// element x of IN_W bits stands for the real value r = x / (2^IN_W - 1) in
// [0, 1]; the quantizer returns the k-bit integer
//     q = round((2^k - 1) * r) = round((2^k - 1) * x / (2^IN_W - 1)),
// so that the quantized real value is q / (2^k - 1) (DoReFa-style uniform
// quantization, rounding halves up). k is chosen per use (1..MAX_K), as the
// weights and inputs have different bit-widths.
// The formula is the usual uniform quantizer of low bit-width networks, as
// the authors use it; the fixed-point input format and rounding are this design's
// choices. Combinational.
module quantizer #(
  parameter int unsigned IN_W  = 8,
  parameter int unsigned MAX_K = 8,
  localparam int unsigned KW   = $clog2(MAX_K + 1)
) (
  input  logic [IN_W-1:0]  x,
  input  logic [KW-1:0]    k,
  output logic [MAX_K-1:0] q
);
  localparam int unsigned PW = IN_W + MAX_K + 2;
  localparam logic [PW-1:0] FULL = PW'((1 << IN_W) - 1);

  logic [PW-1:0] levels, num, quo;

  always_comb begin
    levels = (PW'(1) << k) - PW'(1);
    num    = PW'(x) * levels;
    // round(num / FULL) = floor((2*num + FULL) / (2*FULL))
    quo    = ((num << 1) + FULL) / (FULL << 1);
    q      = MAX_K'(quo);
  end
endmodule
