// pim_pkg: types and constants shared by the SOT-MRAM processing-in-memory
// CNN accelerator.
//
// The sense-operation encoding (sense_op_e) selects what the reconfigurable
// sense amplifier of a bit-line returns: a plain memory read of one row, or a
// two-row Boolean function (AND/NAND/OR/NOR/XOR/XNOR) of two rows sensed at
// the same time. The sense amplifier's output multiplexer has a 3-bit select
// (SEL); which code selects which function is this design's own choice.
package pim_pkg;

  // 3-bit select of the sense amplifier output multiplexer.
  typedef enum logic [2:0] {
    SEL_READ = 3'd0,
    SEL_AND  = 3'd1,
    SEL_NAND = 3'd2,
    SEL_OR   = 3'd3,
    SEL_NOR  = 3'd4,
    SEL_XOR  = 3'd5,
    SEL_XNOR = 3'd6
  } sense_op_e;

  // Commands accepted by a computational sub-array.
  typedef enum logic [1:0] {
    ARR_NOP     = 2'd0,
    ARR_WRITE   = 2'd1,  // write one full row
    ARR_READ    = 2'd2,  // sense one row
    ARR_COMPUTE = 2'd3   // sense two rows with a Boolean function, write result back
  } array_cmd_e;

  // Activation functions of the extra processing unit.
  typedef enum logic [1:0] {
    ACT_NONE  = 2'd0,   // pass through
    ACT_RELU  = 2'd1,   // max(x, 0)
    ACT_SIGN  = 2'd2,   // 1 for x >= 0, else 0 (binary activation)
    ACT_HTANH = 2'd3    // (tanh(x)+1)/2, piecewise-linear approximation
  } act_mode_e;

  // Number of accumulation frames between two checkpoints of the NV-FA.
  localparam int unsigned FRAMES_PER_BACKUP_DEFAULT = 20;

endpackage
