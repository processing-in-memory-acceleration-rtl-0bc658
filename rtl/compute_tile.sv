// compute_tile: one computational sub-array with its accumulation chain.
//
// Holds a SOT-MRAM computational sub-array (ROWS x COLS), the compressor unit
// (CMP) on its sense-amplifier outputs, an adaptive shift register (ASR), the
// NV-FA accumulator and the sub-array controller (Ctrl). Before a window is
// computed, the mapping logic writes the weight bit-planes C_n(W) and input
// bit-planes C_m(I) as whole rows through the write port (MCD). A start pulse
// then makes the controller run the parallel-AND and accumulation phases; the
// result, the dot product of the stored I and W vectors, appears on psum
// while done is high. Power failure (pwr_good low) is survived through the
// NV-FFs of the NV-FA and controller.
// The block split (MCD/MRD, sense amplifiers, CMP, ASR, S-FA/NV-FA, Ctrl)
// follows the paper's architecture drawing.
// Timing: with P = m_bits*n_bits pairs, done rises 3 + 3*P + ceil(P/20)
// clock edges after the edge that samples start (3 cycles per pair, one per
// checkpoint, plus start and end); wr_en must stay low while busy.
module compute_tile
  import pim_pkg::*;
#(
  parameter int unsigned ROWS              = 256,
  parameter int unsigned COLS              = 512,
  parameter int unsigned MAX_BITS          = 8,
  parameter int unsigned ACC_W             = 32,
  parameter int unsigned FRAMES_PER_BACKUP = FRAMES_PER_BACKUP_DEFAULT,
  localparam int unsigned AW  = $clog2(ROWS),
  localparam int unsigned BW  = $clog2(MAX_BITS + 1),
  localparam int unsigned CW  = $clog2(COLS + 1),
  localparam int unsigned SHW = $clog2(2 * MAX_BITS - 1),
  localparam int unsigned MAXSH = 2 * MAX_BITS - 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pwr_good,
  // row write port (mapping)
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_row,
  input  logic [COLS-1:0]  wr_data,
  // window command
  input  logic             start,
  input  logic [BW-1:0]    m_bits,
  input  logic [BW-1:0]    n_bits,
  input  logic [AW-1:0]    w_base,
  input  logic [AW-1:0]    i_base,
  input  logic [AW-1:0]    res_row,
  output logic             busy,
  output logic             done,
  output logic [ACC_W-1:0] psum,
  // events, for observation
  output logic             ev_backup,
  output logic             ev_restore,
  output logic             ev_shift_load,
  output logic [SHW-1:0]   ev_shift
);
  array_cmd_e          c_cmd, a_cmd;
  sense_op_e           c_sel;
  logic [AW-1:0]       c_ra, c_rb, c_rw;
  logic [COLS-1:0]     rdata;
  logic [CW-1:0]       count;
  logic                asr_load;
  logic [SHW-1:0]      asr_shift;
  logic [CW+MAXSH-1:0] shifted;
  logic                fa_clear, fa_add, nv_backup, nv_restore;
  logic                fa_cout;

  subarray_ctrl #(.ROWS(ROWS), .MAX_BITS(MAX_BITS), .FRAMES_PER_BACKUP(FRAMES_PER_BACKUP)) u_ctrl (
    .clk, .rst_n, .pwr_good, .start, .m_bits, .n_bits, .w_base, .i_base, .res_row,
    .busy, .done,
    .arr_cmd(c_cmd), .arr_sel(c_sel), .arr_ra(c_ra), .arr_rb(c_rb), .arr_rw(c_rw),
    .asr_load, .asr_shift, .fa_clear, .fa_add, .nv_backup, .nv_restore
  );

  assign a_cmd = wr_en ? ARR_WRITE : c_cmd;

  sot_mram_subarray #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .cmd(a_cmd), .sel(c_sel), .ra(c_ra), .rb(c_rb),
    .rw(wr_en ? wr_row : c_rw), .wdata(wr_data), .rdata
  );

  cmp_tree #(.NBITS(COLS)) u_cmp (.bits(rdata), .count);

  asr #(.IN_W(CW), .MAX_SHIFT(MAXSH)) u_asr (
    .clk, .rst_n, .load(asr_load), .in(count), .shift(asr_shift), .out(shifted)
  );

  nv_fa #(.W(ACC_W)) u_fa (
    .clk, .rst_n, .pwr_good, .clear(fa_clear), .add(fa_add), .x(ACC_W'(shifted)),
    .backup(nv_backup), .restore(nv_restore), .sum(psum), .cout(fa_cout)
  );

  assign ev_backup     = nv_backup;
  assign ev_restore    = nv_restore;
  assign ev_shift_load = asr_load;
  assign ev_shift      = asr_shift;

  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !busy);
  a_no_overflow:   assert property (@(posedge clk) disable iff (!rst_n) !fa_cout);
endmodule
