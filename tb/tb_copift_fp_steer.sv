// tb_copift_fp_steer: self-checking test of the queue semantics of integer
// operands and results of FP instructions.
//
// A table of RV32D instruction words with hand-written expectations (does the
// instruction read an integer register) is applied with the enable clear and
// set, I2F empty or not and the FP issue stage ready or not; the test checks
// operand selection (I2F head or offloaded operand), stall and pop. Then
// random integer results of FP instructions check the split between the
// integer core's write-back (disabled) and the F2I queue (enabled), with
// back-pressure from either side.
module tb_copift_fp_steer;
  import copift_pkg::*;
  import tb_rv_enc_pkg::*;

  logic en, fp_valid, fp_ready, i2f_valid, res_valid, int_wb_ready, f2i_ready;
  logic [31:0] instr;
  logic [XLEN-1:0] fp_int_op, i2f_data, res_data, int_op, int_wb_data, f2i_data;
  logic [4:0] res_rd, int_wb_rd;
  logic fp_stall, i2f_ready, res_ready, int_wb_valid, f2i_valid;
  int checks = 0, failures = 0;

  copift_fp_steer dut (
    .en_i(en), .fp_valid_i(fp_valid), .fp_instr_i(instr), .fp_ready_i(fp_ready),
    .fp_int_op_i(fp_int_op), .int_op_o(int_op), .fp_stall_o(fp_stall),
    .i2f_valid_i(i2f_valid), .i2f_data_i(i2f_data), .i2f_ready_o(i2f_ready),
    .res_valid_i(res_valid), .res_rd_i(res_rd), .res_data_i(res_data), .res_ready_o(res_ready),
    .int_wb_valid_o(int_wb_valid), .int_wb_rd_o(int_wb_rd), .int_wb_data_o(int_wb_data),
    .int_wb_ready_i(int_wb_ready),
    .f2i_valid_o(f2i_valid), .f2i_data_o(f2i_data), .f2i_ready_i(f2i_ready)
  );

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %0t: %s (instr %h)", $time, what, instr); end
  endtask

  typedef struct { logic [31:0] word; logic int_src; } vec_t;
  vec_t vecs[$];

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vecs.push_back('{enc_fcvt_d_wu(5'd0, 5'd5),      1});
    vecs.push_back('{enc_fld(5'd0, 5'd5, 12'd0),     1});
    vecs.push_back('{enc_fsd(5'd2, 5'd5, 12'd8),     1});
    vecs.push_back('{{5'b11110, 2'b00, 5'd0, 5'd7, 3'b000, 5'd3, 7'b1010011}, 1}); // fmv.w.x
    vecs.push_back('{enc_fmul_d(5'd2, 5'd0, 5'd1),   0});
    vecs.push_back('{enc_fadd_d(5'd2, 5'd0, 5'd1),   0});
    vecs.push_back('{enc_fmadd_d(5'd2, 5'd0, 5'd1, 5'd3), 0});
    vecs.push_back('{enc_fmv_x_w(5'd5, 5'd1),        0});
    vecs.push_back('{enc_flt_d(5'd5, 5'd1, 5'd2),    0});
    vecs.push_back('{enc_fcvt_w_d(5'd5, 5'd2),       0});
    // integer instructions reaching the port are not FP: never pop
    vecs.push_back('{enc_add(5'd5, 5'd31, 5'd31),    0});

    res_valid = 1'b0; res_rd = '0; res_data = '0; int_wb_ready = 1'b1; f2i_ready = 1'b1;
    foreach (vecs[k]) begin
      for (int c = 0; c < 16; c++) begin
        logic pop;
        en = c[0]; fp_valid = c[1]; i2f_valid = c[2]; fp_ready = c[3];
        instr = vecs[k].word;
        fp_int_op = $urandom; i2f_data = $urandom;
        #1;
        pop = en & vecs[k].int_src;
        check(int_op == (pop ? i2f_data : fp_int_op), "integer operand");
        check(fp_stall == (fp_valid & pop & ~i2f_valid), "FP issue stall");
        check((i2f_ready & i2f_valid) == (fp_valid & pop & fp_ready & i2f_valid), "pop");
      end
    end

    fp_valid = 1'b0;
    for (int i = 0; i < 400; i++) begin
      en = 1'($urandom); res_valid = 1'($urandom);
      int_wb_ready = 1'($urandom); f2i_ready = 1'($urandom);
      res_rd = 5'($urandom); res_data = $urandom;
      #1;
      check(f2i_valid == (res_valid & en), "push to F2I");
      check(!f2i_valid || f2i_data == res_data, "F2I data");
      check(int_wb_valid == (res_valid & ~en), "integer write-back");
      check(!int_wb_valid || (int_wb_rd == res_rd && int_wb_data == res_data),
            "integer write-back rd/data");
      check(res_ready == (en ? f2i_ready : int_wb_ready), "result back-pressure");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
