// mram_bank: non-volatile storage bank for input feature maps (Image Bank) or
// kernels (Kernel Bank).
//
// A plain word-addressed memory of DEPTH words of WIDTH bits with one write
// port and one registered read port. The paper names the banks and gives the
// mat and bank sizes (256 x 512-bit mats, 2 x 2 mats per bank, i.e. 512 Kib
// per bank); organizing that capacity as 65536 bytes, one byte per raw
// element, and the port timing are this design's choices. Being MRAM, the
// contents need no reset and survive power loss.
// Timing: rdata holds mem[raddr] one cycle after re is high.
module mram_bank #(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
