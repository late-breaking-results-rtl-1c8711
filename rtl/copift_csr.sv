// copift_csr: the EnCopiftQueues control/status register.
//
// While its enable bit is set, the queue register semantics of COPIFTv2 are
// active in both threads (see copift_int_steer and copift_fp_steer); while it
// is clear, x31 is an ordinary register and FP instructions use the integer
// register file as in the unmodified core. The CSR's existence and purpose are
// from the paper; its address (copift_pkg::CSR_ENCOPIFTQUEUES), its single-bit
// layout (bit 0, other bits read as zero) and its reset value (0, queues off,
// so that unmodified software behaves as before) are this design's choices.
//
// Interface: one CSR access per cycle from the integer core's CSR stage.
//   csr_valid_i, csr_addr_i, csr_op_i, csr_wdata_i : access (Zicsr semantics:
//     write, set bits, clear bits; csr_write_i=0 means a read-only access,
//     as for csrrs/csrrc with rs1=x0)
//   csr_hit_o   : the address selects this CSR (combinational)
//   csr_rdata_o : value before the access (combinational)
//   enable_o    : current enable bit; an access changes it from the next cycle.
module copift_csr
  import copift_pkg::*;
(
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            csr_valid_i,
  input  logic [11:0]     csr_addr_i,
  input  logic [1:0]      csr_op_i,     // 01 write, 10 set, 11 clear
  input  logic            csr_write_i,
  input  logic [XLEN-1:0] csr_wdata_i,
  output logic            csr_hit_o,
  output logic [XLEN-1:0] csr_rdata_o,
  output logic            enable_o
);

  logic en_q, en_d;

  assign csr_hit_o   = csr_valid_i & (csr_addr_i == CSR_ENCOPIFTQUEUES);
  assign csr_rdata_o = {{(XLEN-1){1'b0}}, en_q};
  assign enable_o    = en_q;

  always_comb begin
    en_d = en_q;
    if (csr_hit_o && csr_write_i) begin
      unique case (csr_op_i)
        2'b01:   en_d = csr_wdata_i[0];
        2'b10:   en_d = en_q |  csr_wdata_i[0];
        2'b11:   en_d = en_q & ~csr_wdata_i[0];
        default: en_d = en_q;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) en_q <= 1'b0;
    else         en_q <= en_d;
  end

endmodule
