// copift_pkg: types, constants and decode helpers shared by the COPIFTv2
// queue extension of a Snitch-style RV32 core with an FP64 subsystem.
//
// The extension lets the integer thread and the FP thread of a dual-issue
// Snitch talk through two blocking FIFOs, I2F (integer -> FP) and F2I
// (FP -> integer). A custom CSR turns the new register semantics on:
//   * integer instruction, source register x31  -> pop F2I
//   * integer instruction, destination x31      -> push I2F
//   * FP instruction, integer source operand    -> pop I2F
//   * FP instruction, integer destination       -> push F2I
// The four rules, the register x31 and the two queue directions follow the
// paper. The CSR address, the instruction classification below (which RV32
// encodings count as "having" an rs1/rs2/rd, which FP encodings have an
// integer operand) and the 32-bit queue width are this design's own choices,
// derived from the RISC-V base and D-extension encodings.
package copift_pkg;

  localparam int unsigned XLEN = 32;

  // Register that is redirected to the queues in integer instructions.
  localparam logic [4:0] QUEUE_REG = 5'd31;

  // Address of the EnCopiftQueues CSR: taken from the custom read/write
  // machine range (0x7C0-0x7FF); the paper gives no address.
  localparam logic [11:0] CSR_ENCOPIFTQUEUES = 12'h7C3;

  // RV32 major opcodes (instr[6:0]).
  typedef enum logic [6:0] {
    OPC_LOAD     = 7'b0000011,
    OPC_LOAD_FP  = 7'b0000111,
    OPC_MISC_MEM = 7'b0001111,
    OPC_OP_IMM   = 7'b0010011,
    OPC_AUIPC    = 7'b0010111,
    OPC_STORE    = 7'b0100011,
    OPC_STORE_FP = 7'b0100111,
    OPC_OP       = 7'b0110011,
    OPC_LUI      = 7'b0110111,
    OPC_MADD     = 7'b1000011,
    OPC_MSUB     = 7'b1000111,
    OPC_NMSUB    = 7'b1001011,
    OPC_NMADD    = 7'b1001111,
    OPC_OP_FP    = 7'b1010011,
    OPC_BRANCH   = 7'b1100011,
    OPC_JALR     = 7'b1100111,
    OPC_JAL      = 7'b1101111,
    OPC_SYSTEM   = 7'b1110011
  } opcode_e;

  // OP-FP funct5 values (instr[31:27]) of the encodings that read or write
  // an integer register.
  localparam logic [4:0] F5_FCMP     = 5'b10100; // feq/flt/fle   -> int rd
  localparam logic [4:0] F5_FCVT_I_F = 5'b11000; // fcvt.w[u].*   -> int rd
  localparam logic [4:0] F5_FMV_X_F  = 5'b11100; // fmv.x.w/fclass-> int rd
  localparam logic [4:0] F5_FCVT_F_I = 5'b11010; // fcvt.*.w[u]   <- int rs1
  localparam logic [4:0] F5_FMV_F_X  = 5'b11110; // fmv.w.x       <- int rs1

  // Register usage of one instruction, as seen by the queue logic.
  typedef struct packed {
    logic       is_fp;    // offloaded to the FP subsystem
    logic       rs1_used; // integer rs1 is read
    logic       rs2_used; // integer rs2 is read
    logic       rd_used;  // integer rd is written
    logic [4:0] rs1;
    logic [4:0] rs2;
    logic [4:0] rd;
  } instr_use_t;

  // Classify an RV32IMAFD instruction word. For an FP instruction the *_used
  // flags describe its integer registers only (FP registers are ignored).
  function automatic instr_use_t decode_use(input logic [31:0] instr);
    instr_use_t u;
    u.rs1      = instr[19:15];
    u.rs2      = instr[24:20];
    u.rd       = instr[11:7];
    u.is_fp    = 1'b0;
    u.rs1_used = 1'b0;
    u.rs2_used = 1'b0;
    u.rd_used  = 1'b0;
    unique case (instr[6:0])
      OPC_OP: begin
        u.rs1_used = 1'b1; u.rs2_used = 1'b1; u.rd_used = 1'b1;
      end
      OPC_OP_IMM, OPC_LOAD, OPC_JALR: begin
        u.rs1_used = 1'b1; u.rd_used = 1'b1;
      end
      OPC_STORE, OPC_BRANCH: begin
        u.rs1_used = 1'b1; u.rs2_used = 1'b1;
      end
      OPC_LUI, OPC_AUIPC, OPC_JAL: begin
        u.rd_used = 1'b1;
      end
      OPC_SYSTEM: begin
        // CSR instructions; funct3[2] selects the immediate forms.
        if (instr[14:12] != 3'b000) begin
          u.rs1_used = ~instr[14];
          u.rd_used  = 1'b1;
        end
      end
      OPC_LOAD_FP, OPC_STORE_FP: begin
        // Base address comes from integer rs1.
        u.is_fp = 1'b1; u.rs1_used = 1'b1;
      end
      OPC_MADD, OPC_MSUB, OPC_NMSUB, OPC_NMADD: begin
        u.is_fp = 1'b1;
      end
      OPC_OP_FP: begin
        u.is_fp = 1'b1;
        unique case (instr[31:27])
          F5_FCMP, F5_FCVT_I_F, F5_FMV_X_F: u.rd_used  = 1'b1;
          F5_FCVT_F_I, F5_FMV_F_X:          u.rs1_used = 1'b1;
          default: ;
        endcase
      end
      default: ;
    endcase
    return u;
  endfunction

endpackage
