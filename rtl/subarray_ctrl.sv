// subarray_ctrl: controller (Ctrl) of one computational sub-array.
//
// Computes the dot product of a window of input elements I and weights W
// that are stored in the sub-array as bit-planes: row w_base+n holds C_n(W),
// bit n of every weight, and row i_base+m holds C_m(I). It evaluates
//     I*W = sum_{n<n_bits} sum_{m<m_bits} 2^(m+n) * CMP(AND(C_n(W), C_m(I)))
// one bit-plane pair per "frame" of three cycles:
//   S_AND  sense rows C_n(W) and C_m(I) with the AND function and write the
//          result back into row res_row (all columns in parallel)
//   S_CMP  read res_row; the compressor counts its ones and the adaptive
//          shift register loads the count shifted by m+n
//   S_ADD  the NV-FA adds the shifted count to the running sum
// Every FRAMES_PER_BACKUP frames, and at the start and the end of a window,
// S_BACKUP copies the sum and the controller's progress (next pair, busy,
// done) into their NV-FFs. When pwr_good drops, all volatile state is lost
// and the controller waits in S_OFF; when power returns it restores the NV-FFs
// (S_RESTORE) and resumes from the last checkpoint (S_RESUME), so only the
// frames after that checkpoint are repeated.
// The equation, the AND/CMP/shift/add order, the NV-FA and the 20-frame
// backup period are the paper's. The three-cycle frame, treating one
// bit-plane pair as a frame, the extra checkpoints at start and end and the
// row layout are this design's choices.
// Interface: start (pulse, idle only) with m_bits/n_bits (1..MAX_BITS) and the
// row addresses; busy while working; done stays high from the end of a
// window until the next start. Array, ASR and NV-FA control outputs go to the
// compute tile.
module subarray_ctrl
  import pim_pkg::*;
#(
  parameter int unsigned ROWS              = 256,
  parameter int unsigned MAX_BITS          = 8,
  parameter int unsigned FRAMES_PER_BACKUP = FRAMES_PER_BACKUP_DEFAULT,
  localparam int unsigned AW  = $clog2(ROWS),
  localparam int unsigned BW  = $clog2(MAX_BITS + 1),
  localparam int unsigned IW  = (MAX_BITS > 1) ? $clog2(MAX_BITS) : 1,
  localparam int unsigned SHW = $clog2(2 * MAX_BITS - 1),
  localparam int unsigned FW  = $clog2(FRAMES_PER_BACKUP + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           pwr_good,
  input  logic           start,
  input  logic [BW-1:0]  m_bits,
  input  logic [BW-1:0]  n_bits,
  input  logic [AW-1:0]  w_base,
  input  logic [AW-1:0]  i_base,
  input  logic [AW-1:0]  res_row,
  output logic           busy,
  output logic           done,
  // sub-array
  output array_cmd_e     arr_cmd,
  output sense_op_e      arr_sel,
  output logic [AW-1:0]  arr_ra,
  output logic [AW-1:0]  arr_rb,
  output logic [AW-1:0]  arr_rw,
  // adaptive shift register
  output logic           asr_load,
  output logic [SHW-1:0] asr_shift,
  // NV-FA
  output logic           fa_clear,
  output logic           fa_add,
  output logic           nv_backup,
  output logic           nv_restore
);
  typedef enum logic [3:0] {
    S_IDLE, S_START, S_AND, S_CMP, S_ADD, S_BACKUP, S_DONE, S_OFF, S_RESTORE, S_RESUME
  } state_e;

  state_e         state, state_nxt;
  logic [IW-1:0]  n_idx, m_idx;       // next bit-plane pair (NV)
  logic [IW-1:0]  n_nxt, m_nxt;
  logic           busy_q, done_q;     // progress flags (NV)
  logic           prog_en;
  logic           busy_d, done_d;
  logic [FW-1:0]  frames;             // frames since last backup (volatile)
  logic           last_pair;

  // Progress registers are NV-FFs so that the window survives power loss.
  nvff #(.W(2*IW + 2)) u_prog (
    .clk, .rst_n, .pwr_good, .en(prog_en),
    .d({n_nxt, m_nxt, busy_d, done_d}),
    .backup(nv_backup), .restore(nv_restore),
    .q({n_idx, m_idx, busy_q, done_q})
  );

  assign last_pair = (32'(m_idx) == 32'(m_bits) - 1) && (32'(n_idx) == 32'(n_bits) - 1);

  // Next pair and flags.
  always_comb begin
    prog_en = 1'b0;
    n_nxt   = n_idx;
    m_nxt   = m_idx;
    busy_d  = busy_q;
    done_d  = done_q;
    if (state == S_IDLE && start) begin
      prog_en = 1'b1;
      n_nxt = '0; m_nxt = '0; busy_d = 1'b1; done_d = 1'b0;
    end else if (state == S_ADD) begin
      prog_en = 1'b1;
      if (last_pair) begin
        busy_d = 1'b0; done_d = 1'b1;
      end else if (32'(m_idx) == 32'(m_bits) - 1) begin
        m_nxt = '0; n_nxt = n_idx + 1'b1;
      end else begin
        m_nxt = m_idx + 1'b1;
      end
    end else if (state == S_DONE && start) begin
      prog_en = 1'b1;
      n_nxt = '0; m_nxt = '0; busy_d = 1'b1; done_d = 1'b0;
    end
  end

  always_comb begin
    state_nxt = state;
    unique case (state)
      S_IDLE:    if (start) state_nxt = S_START;
      S_START:   state_nxt = S_BACKUP;             // sum cleared, checkpoint it
      S_AND:     state_nxt = S_CMP;
      S_CMP:     state_nxt = S_ADD;
      S_ADD:     state_nxt = (last_pair || 32'(frames) + 1 >= FRAMES_PER_BACKUP)
                             ? S_BACKUP : S_AND;
      S_BACKUP:  state_nxt = done_q ? S_DONE : S_AND;
      S_DONE:    if (start) state_nxt = S_START;
      S_OFF:     state_nxt = S_RESTORE;
      S_RESTORE: state_nxt = S_RESUME;
      S_RESUME:  state_nxt = busy_q ? S_AND : (done_q ? S_DONE : S_IDLE);
      default:   state_nxt = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         state <= S_IDLE;
    else if (!pwr_good) state <= S_OFF;
    else                state <= state_nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                   frames <= '0;
    else if (!pwr_good)                           frames <= '0;
    else if (state == S_BACKUP || state == S_RESTORE) frames <= '0;
    else if (state == S_ADD)                      frames <= frames + 1'b1;
  end

  // Outputs.
  always_comb begin
    arr_cmd    = ARR_NOP;
    arr_sel    = SEL_READ;
    arr_ra     = res_row;
    arr_rb     = res_row;
    arr_rw     = res_row;
    asr_load   = 1'b0;
    asr_shift  = SHW'(32'(m_idx) + 32'(n_idx));
    fa_clear   = 1'b0;
    fa_add     = 1'b0;
    nv_backup  = 1'b0;
    nv_restore = 1'b0;
    unique case (state)
      S_START:   fa_clear = 1'b1;
      S_AND: begin
        arr_cmd = ARR_COMPUTE;
        arr_sel = SEL_AND;
        arr_ra  = w_base + AW'(n_idx);
        arr_rb  = i_base + AW'(m_idx);
      end
      S_CMP: begin
        arr_cmd  = ARR_READ;
        asr_load = 1'b1;
      end
      S_ADD:     fa_add = 1'b1;
      S_BACKUP:  nv_backup = pwr_good;
      S_RESTORE: nv_restore = 1'b1;
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE) && (state != S_DONE);
  assign done = (state == S_DONE);

  a_bits_range: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (m_bits >= 1 && 32'(m_bits) <= MAX_BITS &&
                                    n_bits >= 1 && 32'(n_bits) <= MAX_BITS));
endmodule
