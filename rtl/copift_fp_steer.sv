// copift_fp_steer: queue semantics of integer operands in the FP subsystem.
//
// With the EnCopiftQueues enable set, an FP instruction that reads an integer
// register (fcvt.d.w[u], fmv.w.x, and the base address of fld/fsd/flw/fsw)
// takes that value from the I2F queue instead of the integer register file,
// and one that writes an integer register (feq/flt/fle, fcvt.w[u].d,
// fmv.x.w, fclass) sends its result into the F2I queue instead of returning
// it to the integer core (rules from the paper). Because the value is taken
// at FP issue, FP instructions replayed by the FREP loop buffer can consume a
// fresh integer value on every iteration, which is what lets a whole FP loop
// body run decoupled from the integer thread.
//
// Issue side (combinational): fp_valid_i/fp_instr_i is the FP instruction in
// the FP issue stage, fp_int_op_i the integer operand that came with it over
// the offload interface (used when the enable is clear). int_op_o is the
// operand to use (an address base is still added to the instruction's
// immediate downstream, as in the unmodified core). fp_stall_o is raised
// while the needed I2F entry is missing; the entry is popped when the
// instruction leaves FP issue, fp_valid_i & fp_ready_i & ~fp_stall_o.
//
// Write-back side: the FP subsystem's integer-result port (res_valid_i,
// res_rd_i, res_data_i, res_ready_o) goes either to the integer core's
// write-back (int_wb_*) or, with the enable set, into F2I, stalling while F2I
// is full. The enable is sampled at write-back; software is expected not to
// toggle it while FP instructions are in flight (this design's assumption).
module copift_fp_steer
  import copift_pkg::*;
(
  input  logic            en_i,
  // FP issue
  input  logic            fp_valid_i,
  input  logic [31:0]     fp_instr_i,
  input  logic            fp_ready_i,
  input  logic [XLEN-1:0] fp_int_op_i,
  output logic [XLEN-1:0] int_op_o,
  output logic            fp_stall_o,
  // I2F queue, consumer side
  input  logic            i2f_valid_i,
  input  logic [XLEN-1:0] i2f_data_i,
  output logic            i2f_ready_o,
  // integer results of FP instructions
  input  logic            res_valid_i,
  input  logic [4:0]      res_rd_i,
  input  logic [XLEN-1:0] res_data_i,
  output logic            res_ready_o,
  // to the integer core's write-back (queues disabled)
  output logic            int_wb_valid_o,
  output logic [4:0]      int_wb_rd_o,
  output logic [XLEN-1:0] int_wb_data_o,
  input  logic            int_wb_ready_i,
  // F2I queue, producer side
  output logic            f2i_valid_o,
  output logic [XLEN-1:0] f2i_data_o,
  input  logic            f2i_ready_i
);

  instr_use_t u;
  logic       pop_needed;

  assign u          = decode_use(fp_instr_i);
  assign pop_needed = en_i & u.is_fp & u.rs1_used;

  assign int_op_o    = pop_needed ? i2f_data_i : fp_int_op_i;
  assign fp_stall_o  = fp_valid_i & pop_needed & ~i2f_valid_i;
  assign i2f_ready_o = fp_valid_i & pop_needed & fp_ready_i;

  assign f2i_valid_o = res_valid_i & en_i;
  assign f2i_data_o  = res_data_i;

  assign int_wb_valid_o = res_valid_i & ~en_i;
  assign int_wb_rd_o    = res_rd_i;
  assign int_wb_data_o  = res_data_i;

  assign res_ready_o = en_i ? f2i_ready_i : int_wb_ready_i;

endmodule
