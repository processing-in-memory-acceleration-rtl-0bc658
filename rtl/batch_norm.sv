// batch_norm: batch-normalization unit (BN) of the extra processing unit.
//
// In inference, batch normalization is an affine map per output channel,
//     y = (x - mu) * gamma / sqrt(sigma^2 + eps) + beta,
// whose constants are known after training. The unit takes mu, the folded
// scale gamma/sqrt(sigma^2+eps) as a signed fixed-point number with FRAC
// fraction bits, and beta, and computes
//     y = ((x - mu) * scale) >>> FRAC + beta      (arithmetic shift, floor).
// The paper only names the BN unit; the formula is the usual folded batch
// normalisation. The fixed-point format and widths are this
// design's choices.
// Timing: y is registered, valid one cycle after 'en'.
module batch_norm #(
  parameter int unsigned X_W   = 40,
  parameter int unsigned S_W   = 16,
  parameter int unsigned FRAC  = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic signed [X_W-1:0] x,
  input  logic signed [X_W-1:0] mu,
  input  logic signed [S_W-1:0] scale,
  input  logic signed [X_W-1:0] beta,
  output logic signed [X_W-1:0] y
);
  localparam int unsigned PW = X_W + S_W + 1;
  logic signed [PW-1:0] diff, prod, shifted;

  always_comb begin
    diff    = PW'(x) - PW'(mu);
    prod    = diff * PW'(scale);
    shifted = prod >>> FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= X_W'(shifted) + beta;
  end
endmodule
