// nv_fa: non-volatile full adder (NV-FA) accumulator.
//
// Adds the shifted partial count x to the running sum of the current output
// pixel. The addition is a ripple chain of W full adders, so it completes in
// one clock cycle. Its results, the sum word and the final carry-out, are held
// in NV-FFs: ordinary volatile flip-flops during accumulation, copied into
// their non-volatile elements when 'backup' is pulsed and reloaded by
// 'restore' after a power failure.
// The paper's NV-FA is one full adder with two NV-FFs (sum and carry) whose
// output feeds back to its input; this design widens it to a W-bit word
// (one sum NV-FF per bit, one carry NV-FF for the last carry-out).
// Timing: with add high, sum becomes sum+x at the clock edge; clear zeroes it.
module nv_fa #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pwr_good,
  input  logic         clear,
  input  logic         add,
  input  logic [W-1:0] x,
  input  logic         backup,
  input  logic         restore,
  output logic [W-1:0] sum,
  output logic         cout
);
  logic [W-1:0] s_nxt;
  logic [W:0]   c;

  assign c[0] = 1'b0;
  for (genvar i = 0; i < int'(W); i++) begin : g_fa
    full_adder u_fa (.a(sum[i]), .b(x[i]), .cin(c[i]), .s(s_nxt[i]), .cout(c[i+1]));
  end

  nvff #(.W(W)) u_sum_ff (
    .clk, .rst_n, .pwr_good, .en(clear | add), .d(clear ? '0 : s_nxt),
    .backup, .restore, .q(sum)
  );
  nvff #(.W(1)) u_cout_ff (
    .clk, .rst_n, .pwr_good, .en(clear | add), .d(clear ? 1'b0 : c[W]),
    .backup, .restore, .q(cout)
  );
endmodule
