// tb_copift_int_steer: self-checking test of the x31 queue semantics in the
// integer core.
//
// A table of real RV32 instruction words, each with hand-written expectations
// (does it pop F2I through rs1 / rs2, is it an FP instruction with an integer
// source or destination), is applied with the enable clear and set, F2I full
// or empty, and the core ready or not. The test checks operand selection,
// stall, the pop handshake and the offload flags, then the write-back split:
// rd=x31 goes to I2F only when enabled, waits while I2F is full, and every
// other rd goes to the register file.
module tb_copift_int_steer;
  import copift_pkg::*;
  import tb_rv_enc_pkg::*;

  logic en, iss_valid, iss_ready, f2i_valid, wb_valid, i2f_ready;
  logic [31:0] instr;
  logic [XLEN-1:0] rs1_rf, rs2_rf, f2i_data, wb_data;
  logic [4:0] wb_rd;
  logic [XLEN-1:0] rs1, rs2, rf_wdata, i2f_data;
  logic iss_stall, off_rs, off_rd, f2i_ready, wb_ready, rf_we, i2f_valid;
  logic [4:0] rf_waddr;
  int checks = 0, failures = 0;

  copift_int_steer dut (
    .en_i(en), .iss_valid_i(iss_valid), .iss_instr_i(instr), .iss_ready_i(iss_ready),
    .rs1_rf_i(rs1_rf), .rs2_rf_i(rs2_rf), .rs1_o(rs1), .rs2_o(rs2),
    .iss_stall_o(iss_stall), .off_rs_from_queue_o(off_rs), .off_rd_to_queue_o(off_rd),
    .f2i_valid_i(f2i_valid), .f2i_data_i(f2i_data), .f2i_ready_o(f2i_ready),
    .wb_valid_i(wb_valid), .wb_rd_i(wb_rd), .wb_data_i(wb_data), .wb_ready_o(wb_ready),
    .rf_we_o(rf_we), .rf_waddr_o(rf_waddr), .rf_wdata_o(rf_wdata),
    .i2f_valid_o(i2f_valid), .i2f_data_o(i2f_data), .i2f_ready_i(i2f_ready)
  );

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %0t: %s (instr %h)", $time, what, instr); end
  endtask

  typedef struct {
    logic [31:0] word;
    logic q1, q2;      // pops F2I through rs1 / rs2 when enabled
    logic fp_rs, fp_rd; // FP instruction with integer source / destination
  } vec_t;

  vec_t vecs[$];

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // x31 = 5'd31, t0 = 5, t1 = 6
    vecs.push_back('{enc_add(5'd5, 5'd31, 5'd6),   1, 0, 0, 0});
    vecs.push_back('{enc_add(5'd5, 5'd6, 5'd31),   0, 1, 0, 0});
    vecs.push_back('{enc_add(5'd5, 5'd31, 5'd31),  1, 1, 0, 0});
    vecs.push_back('{enc_add(5'd31, 5'd5, 5'd6),   0, 0, 0, 0});
    vecs.push_back('{enc_addi(5'd5, 5'd31, 12'd8), 1, 0, 0, 0});
    // addi with imm whose bits [24:20] read as 31: no rs2, must not pop
    vecs.push_back('{enc_addi(5'd5, 5'd6, 12'h01F), 0, 0, 0, 0});
    vecs.push_back('{enc_lw(5'd5, 5'd31, 12'd4),   1, 0, 0, 0});
    vecs.push_back('{enc_sw(5'd31, 5'd5, 12'd8),   0, 1, 0, 0});
    vecs.push_back('{enc_beq(5'd31, 5'd0),         1, 0, 0, 0});
    // lui with immediate bits that alias rs1/rs2 = 31: no source registers
    vecs.push_back('{enc_lui(5'd5, 20'hFFFFF),     0, 0, 0, 0});
    vecs.push_back('{enc_csrrw(5'd0, 5'd31, 12'h7C3), 1, 0, 0, 0});
    vecs.push_back('{enc_csrrwi(5'd0, 5'd31, 12'h7C3), 0, 0, 0, 0});
    // FP instructions never pop F2I on the integer side
    vecs.push_back('{enc_fcvt_d_wu(5'd0, 5'd31),   0, 0, 1, 0});
    vecs.push_back('{enc_fld(5'd0, 5'd31, 12'd0),  0, 0, 1, 0});
    vecs.push_back('{enc_fsd(5'd31, 5'd31, 12'd0), 0, 0, 1, 0});
    vecs.push_back('{enc_fmv_x_w(5'd31, 5'd1),     0, 0, 0, 1});
    vecs.push_back('{enc_flt_d(5'd5, 5'd31, 5'd31), 0, 0, 0, 1});
    vecs.push_back('{enc_fcvt_w_d(5'd5, 5'd2),     0, 0, 0, 1});
    vecs.push_back('{enc_fmul_d(5'd31, 5'd31, 5'd31), 0, 0, 0, 0});
    vecs.push_back('{enc_fmadd_d(5'd31, 5'd31, 5'd31, 5'd31), 0, 0, 0, 0});

    wb_valid = 1'b0; wb_rd = '0; wb_data = '0; i2f_ready = 1'b1;
    foreach (vecs[k]) begin
      for (int c = 0; c < 16; c++) begin
        logic pop, qq1, qq2;
        en = c[0]; iss_valid = c[1]; f2i_valid = c[2]; iss_ready = c[3];
        instr = vecs[k].word;
        rs1_rf = $urandom; rs2_rf = $urandom; f2i_data = $urandom;
        #1;
        qq1 = en & vecs[k].q1;
        qq2 = en & vecs[k].q2;
        pop = qq1 | qq2;
        check(rs1 == (qq1 ? f2i_data : rs1_rf), "rs1 operand");
        check(rs2 == (qq2 ? f2i_data : rs2_rf), "rs2 operand");
        check(iss_stall == (iss_valid & pop & ~f2i_valid), "issue stall");
        check((f2i_ready & f2i_valid) == (iss_valid & pop & iss_ready & f2i_valid), "pop");
        check(off_rs == (iss_valid & en & vecs[k].fp_rs), "offload rs flag");
        check(off_rd == (iss_valid & en & vecs[k].fp_rd), "offload rd flag");
      end
    end

    // write-back
    iss_valid = 1'b0;
    for (int i = 0; i < 400; i++) begin
      logic toq;
      en = 1'($urandom); wb_valid = 1'($urandom); i2f_ready = 1'($urandom);
      wb_rd = ($urandom % 2) ? 5'd31 : 5'($urandom); wb_data = $urandom;
      #1;
      toq = en && (wb_rd == 5'd31);
      check(i2f_valid == (wb_valid & toq), "push to I2F");
      check(!i2f_valid || i2f_data == wb_data, "I2F data");
      check(rf_we == (wb_valid & ~toq), "register-file write");
      check(!rf_we || (rf_waddr == wb_rd && rf_wdata == wb_data), "RF address/data");
      check(wb_ready == (toq ? i2f_ready : 1'b1), "write-back stall on full I2F");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
