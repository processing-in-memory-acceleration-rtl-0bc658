// adder_bias: sums the partial results of the computational sub-arrays and
// adds the bias.
//
// Each sub-array returns the dot product of its share of a window; the sum of
// all NUM_IN partial sums plus a signed bias is the pre-activation value of
// one output pixel. The paper draws this as an adder joining the sub-array
// outputs and a second one adding the bias; widths, signedness and the
// output register are this design's choices.
// Timing: y is registered, valid one cycle after 'en'.
module adder_bias #(
  parameter int unsigned NUM_IN = 4,
  parameter int unsigned IN_W   = 32,
  parameter int unsigned OUT_W  = 40
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  logic [NUM_IN-1:0][IN_W-1:0]   psum,
  input  logic signed [OUT_W-1:0]       bias,
  output logic signed [OUT_W-1:0]       y
);
  logic signed [OUT_W-1:0] acc;

  always_comb begin
    acc = bias;
    for (int i = 0; i < int'(NUM_IN); i++) acc = acc + OUT_W'($signed({1'b0, psum[i]}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= acc;
  end
endmodule
