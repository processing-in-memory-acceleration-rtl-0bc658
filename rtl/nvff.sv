// nvff: non-volatile flip-flop (NV-FF), W bits wide.
//
// A volatile CMOS flip-flop paired with a non-volatile magnetic element. In
// normal operation q is an ordinary enabled register. A 'backup' pulse copies
// q into the non-volatile element (in silicon: a spin-Hall write of two
// complementary MTJs); 'restore' copies the element back into the volatile
// flip-flop once power has returned. While pwr_good is low the volatile part
// has no supply: here it is forced to zero to model the loss of its content,
// while the non-volatile part keeps its value. rst_n is the power-on reset of
// the whole chip and clears both parts.
// The volatile/non-volatile split and the backup/restore/active controls
// follow the paper; modelling the MTJ pair as a retention register and the
// loss of data as a clear are this design's choices.
// Timing: d is taken at a clock edge with en high; backup and restore act at
// the clock edge where they are high; restore has priority over en.
module nvff #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pwr_good,
  input  logic         en,
  input  logic [W-1:0] d,
  input  logic         backup,
  input  logic         restore,
  output logic [W-1:0] q
);
  logic [W-1:0] nv_q;   // content of the non-volatile element

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         q <= '0;
    else if (!pwr_good) q <= '0;
    else if (restore)   q <= nv_q;
    else if (en)        q <= d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   nv_q <= '0;
    else if (backup && pwr_good)  nv_q <= q;
  end

  a_no_backup_restore: assert property (@(posedge clk) disable iff (!rst_n)
    !(backup && restore));
endmodule
