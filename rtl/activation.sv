// activation: activation unit (Activate) of the extra processing unit.
//
// Applies the selected non-linearity to a signed fixed-point value with FRAC
// fraction bits (pim_pkg::act_mode_e):
//   ACT_NONE   y = x
//   ACT_RELU   y = max(x, 0)
//   ACT_SIGN   y = 1 (integer one) if x >= 0, else 0: binary activation
//   ACT_HTANH  y = (tanh(x)+1)/2 approximated by clamp(1/2 + x/2, 0, 1),
//              in the same fixed-point format
// The paper names the unit and mentions ReLU; (tanh(x)+1)/2 and sign(x)
// come from the authors' draft material on binarized networks. The
// piecewise-linear tanh and the output formats are this design's choices.
// Timing: y is registered, valid one cycle after 'en'.
module activation
  import pim_pkg::*;
#(
  parameter int unsigned X_W  = 40,
  parameter int unsigned FRAC = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  act_mode_e             mode,
  input  logic signed [X_W-1:0] x,
  output logic signed [X_W-1:0] y
);
  localparam logic signed [X_W-1:0] ONE  = X_W'(1) <<< FRAC;
  localparam logic signed [X_W-1:0] HALF = X_W'(1) <<< (FRAC - 1);

  logic signed [X_W-1:0] f, ht;

  always_comb begin
    ht = HALF + (x >>> 1);
    if (ht < 0)   ht = '0;
    if (ht > ONE) ht = ONE;
    unique case (mode)
      ACT_NONE:  f = x;
      ACT_RELU:  f = (x < 0) ? '0 : x;
      ACT_SIGN:  f = (x < 0) ? '0 : X_W'(1);
      ACT_HTANH: f = ht;
      default:   f = x;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= f;
  end
endmodule
