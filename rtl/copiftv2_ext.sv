// copiftv2_ext: the COPIFTv2 queue extension of a Snitch-style core.
//
// Snitch pairs a single-issue RV32 integer core with an FP64 subsystem (FPSS)
// that receives offloaded FP instructions and can replay a loop body from its
// FREP buffer while the integer core keeps running. This block adds what
// COPIFTv2 puts between the two: an I2F queue (integer -> FP), an F2I queue
// (FP -> integer), the EnCopiftQueues CSR, and the operand/result steering on
// each side. With the CSR bit set, x31 in integer instructions and every
// integer operand or result of FP instructions become queue accesses, so the
// two threads exchange values register-to-register and synchronise through
// the queues' blocking FIFO semantics instead of through memory.
//
// Connections (all from the paper's architecture figure and Sec. II):
//   integer core issue/write-back  <-> copift_int_steer
//   FPSS issue/integer results     <-> copift_fp_steer
//   int_steer --push--> I2F --pop--> fp_steer
//   fp_steer  --push--> F2I --pop--> int_steer
//   CSR enable -> both steering units
// The integer core, the FPSS, the offload interface and memories are not part
// of this block; their signals are the ports below. Port groups:
//   csr_*   : CSR access from the integer core (see copift_csr)
//   iss_*, rs*_*, off_*, wb_*, rf_* : integer core side (see copift_int_steer)
//   fp_*, res_*, int_wb_*           : FPSS side (see copift_fp_steer)
//   i2f_usage_o, f2i_usage_o        : queue occupancy, for observation
// Timing: all steering is combinational; each queue adds one cycle between a
// push and the earliest pop of that entry and sustains one transfer per cycle.
// Queue depth (QUEUE_DEPTH) is this design's choice; the paper gives none.
module copiftv2_ext
  import copift_pkg::*;
#(
  parameter int unsigned QUEUE_DEPTH = 4
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // CSR access
  input  logic            csr_valid_i,
  input  logic [11:0]     csr_addr_i,
  input  logic [1:0]      csr_op_i,
  input  logic            csr_write_i,
  input  logic [XLEN-1:0] csr_wdata_i,
  output logic            csr_hit_o,
  output logic [XLEN-1:0] csr_rdata_o,
  output logic            queues_en_o,
  // integer core: issue
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
  // integer core: write-back
  input  logic            wb_valid_i,
  input  logic [4:0]      wb_rd_i,
  input  logic [XLEN-1:0] wb_data_i,
  output logic            wb_ready_o,
  output logic            rf_we_o,
  output logic [4:0]      rf_waddr_o,
  output logic [XLEN-1:0] rf_wdata_o,
  // FPSS: issue
  input  logic            fp_valid_i,
  input  logic [31:0]     fp_instr_i,
  input  logic            fp_ready_i,
  input  logic [XLEN-1:0] fp_int_op_i,
  output logic [XLEN-1:0] fp_int_op_o,
  output logic            fp_stall_o,
  // FPSS: integer results
  input  logic            res_valid_i,
  input  logic [4:0]      res_rd_i,
  input  logic [XLEN-1:0] res_data_i,
  output logic            res_ready_o,
  output logic            int_wb_valid_o,
  output logic [4:0]      int_wb_rd_o,
  output logic [XLEN-1:0] int_wb_data_o,
  input  logic            int_wb_ready_i,
  // observation
  output logic [$clog2(QUEUE_DEPTH+1)-1:0] i2f_usage_o,
  output logic [$clog2(QUEUE_DEPTH+1)-1:0] f2i_usage_o
);

  logic            en;
  logic            i2f_push_valid, i2f_push_ready, i2f_pop_valid, i2f_pop_ready;
  logic            f2i_push_valid, f2i_push_ready, f2i_pop_valid, f2i_pop_ready;
  logic [XLEN-1:0] i2f_push_data, i2f_pop_data, f2i_push_data, f2i_pop_data;

  assign queues_en_o = en;

  copift_csr i_csr (
    .clk_i, .rst_ni,
    .csr_valid_i, .csr_addr_i, .csr_op_i, .csr_write_i, .csr_wdata_i,
    .csr_hit_o, .csr_rdata_o,
    .enable_o (en)
  );

  copift_queue #(.DATA_W(XLEN), .DEPTH(QUEUE_DEPTH)) i_i2f (
    .clk_i, .rst_ni,
    .push_valid_i (i2f_push_valid),
    .push_ready_o (i2f_push_ready),
    .push_data_i  (i2f_push_data),
    .pop_valid_o  (i2f_pop_valid),
    .pop_ready_i  (i2f_pop_ready),
    .pop_data_o   (i2f_pop_data),
    .usage_o      (i2f_usage_o)
  );

  copift_queue #(.DATA_W(XLEN), .DEPTH(QUEUE_DEPTH)) i_f2i (
    .clk_i, .rst_ni,
    .push_valid_i (f2i_push_valid),
    .push_ready_o (f2i_push_ready),
    .push_data_i  (f2i_push_data),
    .pop_valid_o  (f2i_pop_valid),
    .pop_ready_i  (f2i_pop_ready),
    .pop_data_o   (f2i_pop_data),
    .usage_o      (f2i_usage_o)
  );

  copift_int_steer i_int_steer (
    .en_i (en),
    .iss_valid_i, .iss_instr_i, .iss_ready_i, .rs1_rf_i, .rs2_rf_i,
    .rs1_o, .rs2_o, .iss_stall_o, .off_rs_from_queue_o, .off_rd_to_queue_o,
    .f2i_valid_i (f2i_pop_valid),
    .f2i_data_i  (f2i_pop_data),
    .f2i_ready_o (f2i_pop_ready),
    .wb_valid_i, .wb_rd_i, .wb_data_i, .wb_ready_o,
    .rf_we_o, .rf_waddr_o, .rf_wdata_o,
    .i2f_valid_o (i2f_push_valid),
    .i2f_data_o  (i2f_push_data),
    .i2f_ready_i (i2f_push_ready)
  );

  copift_fp_steer i_fp_steer (
    .en_i (en),
    .fp_valid_i, .fp_instr_i, .fp_ready_i, .fp_int_op_i,
    .int_op_o   (fp_int_op_o),
    .fp_stall_o,
    .i2f_valid_i (i2f_pop_valid),
    .i2f_data_i  (i2f_pop_data),
    .i2f_ready_o (i2f_pop_ready),
    .res_valid_i, .res_rd_i, .res_data_i, .res_ready_o,
    .int_wb_valid_o, .int_wb_rd_o, .int_wb_data_o, .int_wb_ready_i,
    .f2i_valid_o (f2i_push_valid),
    .f2i_data_o  (f2i_push_data),
    .f2i_ready_i (f2i_push_ready)
  );

endmodule
