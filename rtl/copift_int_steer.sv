// copift_int_steer: queue semantics of x31 in the integer core.
//
// With the EnCopiftQueues enable set, an integer instruction that names x31
// as a source takes that operand from the F2I queue instead of the register
// file, and one that names x31 as destination sends its result into the I2F
// queue instead of writing the register file (both rules from the paper).
// The blocking FIFO semantics give the synchronisation: the instruction stalls
// at issue while F2I is empty, and its write-back stalls while I2F is full.
//
// Issue side (combinational): the core presents the instruction in issue
// (iss_valid_i, iss_instr_i) with its register-file operands. The block
// returns the operands to execute with (rs1_o, rs2_o) and iss_stall_o when
// the needed F2I entry is not there yet. The F2I entry is popped in the cycle
// the instruction leaves issue, i.e. iss_valid_i & iss_ready_i & ~iss_stall_o,
// where iss_ready_i is the core's own "can advance" condition. For an
// instruction that completes in issue (a single-cycle ALU operation writing
// x31) that condition must include wb_ready_o, so that the pop of its
// operand and the push of its result happen in the same cycle. Which encodings
// have an rs1/rs2 is decided by copift_pkg::decode_use.
// If both rs1 and rs2 are x31, one entry is popped and feeds both operands:
// this design's choice, the paper does not cover the case.
// For an FP instruction being offloaded, off_rs_from_queue_o and
// off_rd_to_queue_o tell the core that its integer operand will be taken from
// I2F and its integer result sent to F2I by the FP side, so the core must
// neither read nor reserve those integer registers for it.
//
// Write-back side: the core's write-back port (wb_valid_i, wb_rd_i,
// wb_data_i, wb_ready_o) is split into the register-file write (rf_*) or an
// I2F push. wb_ready_o is low only while an x31 result waits for a full I2F.
// With the enable clear the block is transparent.
module copift_int_steer
  import copift_pkg::*;
(
  input  logic            en_i,
  // issue
  input  logic            iss_valid_i,
  input  logic [31:0]     iss_instr_i,
  input  logic            iss_ready_i,
  input  logic [XLEN-1:0] rs1_rf_i,
  input  logic [XLEN-1:0] rs2_rf_i,
  output logic [XLEN-1:0] rs1_o,
  output logic [XLEN-1:0] rs2_o,
  output logic            iss_stall_o,
  output logic            off_rs_from_queue_o,
  output logic            off_rd_to_queue_o,
  // F2I queue, consumer side
  input  logic            f2i_valid_i,
  input  logic [XLEN-1:0] f2i_data_i,
  output logic            f2i_ready_o,
  // write-back
  input  logic            wb_valid_i,
  input  logic [4:0]      wb_rd_i,
  input  logic [XLEN-1:0] wb_data_i,
  output logic            wb_ready_o,
  output logic            rf_we_o,
  output logic [4:0]      rf_waddr_o,
  output logic [XLEN-1:0] rf_wdata_o,
  // I2F queue, producer side
  output logic            i2f_valid_o,
  output logic [XLEN-1:0] i2f_data_o,
  input  logic            i2f_ready_i
);

  instr_use_t u;
  logic       rs1_q, rs2_q, pop_needed, wb_q;

  assign u = decode_use(iss_instr_i);

  // Source redirection.
  assign rs1_q      = en_i & ~u.is_fp & u.rs1_used & (u.rs1 == QUEUE_REG);
  assign rs2_q      = en_i & ~u.is_fp & u.rs2_used & (u.rs2 == QUEUE_REG);
  assign pop_needed = rs1_q | rs2_q;

  assign rs1_o = rs1_q ? f2i_data_i : rs1_rf_i;
  assign rs2_o = rs2_q ? f2i_data_i : rs2_rf_i;

  assign iss_stall_o = iss_valid_i & pop_needed & ~f2i_valid_i;
  assign f2i_ready_o = iss_valid_i & pop_needed & iss_ready_i;

  assign off_rs_from_queue_o = iss_valid_i & en_i & u.is_fp & u.rs1_used;
  assign off_rd_to_queue_o   = iss_valid_i & en_i & u.is_fp & u.rd_used;

  // Destination redirection.
  assign wb_q = en_i & (wb_rd_i == QUEUE_REG);

  assign i2f_valid_o = wb_valid_i & wb_q;
  assign i2f_data_o  = wb_data_i;
  assign wb_ready_o  = wb_q ? i2f_ready_i : 1'b1;

  assign rf_we_o    = wb_valid_i & ~wb_q;
  assign rf_waddr_o = wb_rd_i;
  assign rf_wdata_o = wb_data_i;

endmodule
