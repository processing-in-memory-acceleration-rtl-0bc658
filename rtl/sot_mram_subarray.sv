// sot_mram_subarray: SOT-MRAM computational sub-array (memory mat) with its
// row decoder (MRD), column decoder (MCD) and one reconfigurable sense
// amplifier per bit-line.
//
// The array stores ROWS x COLS bits. Besides writing and reading a whole row,
// it can sense two rows of every column at once (the modified row decoder
// opens two read word lines) and, through the sense amplifiers, return a
// Boolean function of them for all COLS columns in parallel; in ARR_COMPUTE
// the result is written back into row rw in the same cycle. This is how the
// bit-wise AND of a weight bit-plane and an input bit-plane is computed.
// The cells are non-volatile, so the array is neither reset nor cleared by a
// power failure.
// Interface: cmd (pim_pkg::array_cmd_e), sel (sense function), ra/rb (rows
// sensed), rw (row written), wdata (row for ARR_WRITE).
// Timing: rdata is combinational from ra/rb/sel; writes happen at the clock
// edge. The paper's mat is 256 rows by 512 columns, the defaults here.
module sot_mram_subarray
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 512,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic            clk,
  input  array_cmd_e      cmd,
  input  sense_op_e       sel,
  input  logic [AW-1:0]   ra,
  input  logic [AW-1:0]   rb,
  input  logic [AW-1:0]   rw,
  input  logic [COLS-1:0] wdata,
  output logic [COLS-1:0] rdata
);
  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] row_a, row_b;
  sense_op_e       sel_eff;

  assign row_a   = mem[ra];
  assign row_b   = mem[rb];
  assign sel_eff = (cmd == ARR_COMPUTE) ? sel : SEL_READ;

  for (genvar c = 0; c < int'(COLS); c++) begin : g_sa
    msa u_sa (.a_bit(row_a[c]), .b_bit(row_b[c]), .sel(sel_eff), .y(rdata[c]));
  end

  always_ff @(posedge clk) begin
    if (cmd == ARR_WRITE)        mem[rw] <= wdata;
    else if (cmd == ARR_COMPUTE) mem[rw] <= rdata;
  end
endmodule
