// asr: adaptive shift register.
//
// Loads IN shifted left by SHIFT places into IN_W+MAX_SHIFT flip-flops in one
// clock edge, so that a partial count can be weighted by 2^SHIFT without
// serial shifting. Flip-flops that receive no input bit take '0'. With the
// paper's example IN=4'b1001, SHIFT=1 the register holds 6'b010010.
// The paper builds it from multiplexers in front of the flip-flops and gives
// a 4-bit version with shifts 0, 1 and 2 (six flip-flops); those are the
// defaults here. Wider versions are used inside the compute tiles.
// A SHIFT above MAX_SHIFT has no meaning in the paper; here it loads zero
// and an assertion reports it.
// Timing: out is valid the cycle after load is high.
module asr #(
  parameter int unsigned IN_W      = 4,
  parameter int unsigned MAX_SHIFT = 2,
  localparam int unsigned SH_W     = (MAX_SHIFT < 1) ? 1 : $clog2(MAX_SHIFT + 1),
  localparam int unsigned OUT_W    = IN_W + MAX_SHIFT
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [IN_W-1:0]  in,
  input  logic [SH_W-1:0]  shift,
  output logic [OUT_W-1:0] out
);
  logic [OUT_W-1:0] nxt;

  // One multiplexer per flip-flop: FF#j takes in[j-shift] or '0'.
  always_comb begin
    for (int j = 0; j < int'(OUT_W); j++) begin
      nxt[j] = 1'b0;
      for (int s = 0; s <= int'(MAX_SHIFT); s++) begin
        if (int'(shift) == s && j >= s && j - s < int'(IN_W)) nxt[j] = in[j-s];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    out <= '0;
    else if (load) out <= nxt;
  end

  a_shift_range: assert property (@(posedge clk) disable iff (!rst_n)
    load |-> int'(shift) <= int'(MAX_SHIFT));
endmodule
