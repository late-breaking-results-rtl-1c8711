// tb_copiftv2_ext: end-to-end test of the COPIFTv2 queue extension.
//
// The extension is driven by two behavioural models written here:
//   * an in-order, one-instruction-per-cycle RV32 integer thread (add, sub,
//     mul, shifts, and/or/xor and their immediate forms, lui, lw, sw,
//     csrrw/csrrwi) that offloads FP instructions, keeps a
//     scoreboard for integer results still owed by the FP side, and writes
//     back through the extension's write-back port;
//   * an FP thread executing one instruction per cycle from an instruction
//     stream (fld, fsd, fadd.d, fsub.d, fmul.d, fmadd.d, fcvt.d.wu, fcvt.w.d,
//     fmv.x.w, flt.d). The stream is fed either by the integer thread's
//     offloads or, to model an FREP hardware loop, by a loop body replayed
//     N times without the integer thread issuing it.
// A shared word-addressed memory model stands in for the L1 memory.
//
// Phases (the extension stays at its default parameters throughout):
//   1 queues off: x31 is an ordinary register; an FP result with integer rd
//     returns to the integer register file; FP operands come from the offload.
//   2 csrrwi turns the queues on.
//   3 register- and memory-carried dependencies rewritten for the queues
//     (the two examples of the transform: add x31 / fcvt.d.wu, and
//     sw; sw; addi x31 / fld; fmul.d).
//   4 Monte-Carlo pi with an LCG: the integer thread generates random
//     numbers and pushes them, an FREP-style FP loop converts and tests
//     x^2+y^2<1 and pushes the flag, the integer thread pops and counts.
//   5 slow FP consumer, so I2F fills and integer write-back stalls.
//   6 slow integer consumer, so F2I fills and FP write-back stalls; an
//     instruction with rs1 = rs2 = x31.
//   8 the exp kernel in three phases (FP -> integer -> FP): the FP thread
//     computes the table index bits and sends them over F2I, the integer
//     thread turns them into a table address and sends it over I2F, the FP
//     thread loads the table entry with it; input and output addresses also
//     travel over I2F. Results are compared with $exp.
//   9 Monte-Carlo pi with xoshiro128+ as the integer random generator.
//   7 queues off again, x31 ordinary again (run last).
// Each mechanism (both stalls on both queues, baseline write-back, the mode
// switch, an address passed through I2F, a double x31 source) is counted and
// must occur at least once. Architectural results are compared with values
// computed in this testbench.
module tb_copiftv2_ext;
  import copift_pkg::*;
  import tb_rv_enc_pkg::*;

  localparam int unsigned N_PI = 200;          // samples of the pi workload
  localparam logic [31:0] LCG_A = 32'd1664525;
  localparam logic [31:0] LCG_C = 32'd1013904223;
  localparam int unsigned N_EXP   = 64;           // elements of the exp workload
  localparam int unsigned EXP_TBL = 32;           // entries of its 2^(j/N) table
  localparam logic [31:0] EXP_IN  = 32'h1000;     // input, table and output arrays
  localparam logic [31:0] EXP_T   = 32'h2000;
  localparam logic [31:0] EXP_OUT = 32'h3000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // DUT signals
  logic csr_valid, csr_write, csr_hit, queues_en;
  logic [11:0] csr_addr;
  logic [1:0] csr_op;
  logic [31:0] csr_wdata, csr_rdata;
  logic iss_valid, iss_ready, iss_stall, off_rs, off_rd;
  logic [31:0] iss_instr, rs1_rf, rs2_rf, rs1_op, rs2_op;
  logic wb_valid, wb_ready, rf_we;
  logic [4:0] wb_rd, rf_waddr;
  logic [31:0] wb_data, rf_wdata;
  logic fp_valid, fp_ready, fp_stall;
  logic [31:0] fp_instr, fp_int_op, fp_int_op_sel;
  logic res_valid, res_ready, int_wb_valid, int_wb_ready;
  logic [4:0] res_rd, int_wb_rd;
  logic [31:0] res_data, int_wb_data;
  logic [2:0] i2f_usage, f2i_usage;

  copiftv2_ext dut (
    .clk_i(clk), .rst_ni(rst_n),
    .csr_valid_i(csr_valid), .csr_addr_i(csr_addr), .csr_op_i(csr_op),
    .csr_write_i(csr_write), .csr_wdata_i(csr_wdata),
    .csr_hit_o(csr_hit), .csr_rdata_o(csr_rdata), .queues_en_o(queues_en),
    .iss_valid_i(iss_valid), .iss_instr_i(iss_instr), .iss_ready_i(iss_ready),
    .rs1_rf_i(rs1_rf), .rs2_rf_i(rs2_rf), .rs1_o(rs1_op), .rs2_o(rs2_op),
    .iss_stall_o(iss_stall), .off_rs_from_queue_o(off_rs), .off_rd_to_queue_o(off_rd),
    .wb_valid_i(wb_valid), .wb_rd_i(wb_rd), .wb_data_i(wb_data), .wb_ready_o(wb_ready),
    .rf_we_o(rf_we), .rf_waddr_o(rf_waddr), .rf_wdata_o(rf_wdata),
    .fp_valid_i(fp_valid), .fp_instr_i(fp_instr), .fp_ready_i(fp_ready),
    .fp_int_op_i(fp_int_op), .fp_int_op_o(fp_int_op_sel), .fp_stall_o(fp_stall),
    .res_valid_i(res_valid), .res_rd_i(res_rd), .res_data_i(res_data), .res_ready_o(res_ready),
    .int_wb_valid_o(int_wb_valid), .int_wb_rd_o(int_wb_rd), .int_wb_data_o(int_wb_data),
    .int_wb_ready_i(int_wb_ready),
    .i2f_usage_o(i2f_usage), .f2i_usage_o(f2i_usage)
  );

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  // ---------------------------------------------------------------- state
  logic [31:0] rf [32];
  logic        busy [32];
  logic [63:0] frf [32];
  logic [31:0] mem [int unsigned];
  logic [31:0] prog [$];
  int unsigned pc;
  typedef struct { logic [31:0] instr; logic [31:0] op; } fp_item_t;
  fp_item_t    fpq [$];
  int unsigned fp_hold;          // cycles the FP thread waits before starting
  longint unsigned cycles, int_retired, fp_retired;

  // mechanism counters
  int n_f2i_empty, n_i2f_full, n_i2f_empty, n_f2i_full, n_base_wb, n_csr_switch,
      n_addr_queue, n_double_pop;

  function automatic real f(input logic [63:0] b); return $bitstoreal(b); endfunction
  function automatic logic [63:0] b(input real r); return $realtobits(r); endfunction

  // ------------------------------------------------------ integer thread
  initial begin : int_thread
    iss_valid = 0; iss_instr = '0; iss_ready = 0; rs1_rf = '0; rs2_rf = '0;
    wb_valid = 0; wb_rd = '0; wb_data = '0;
    csr_valid = 0; csr_addr = '0; csr_op = '0; csr_write = 0; csr_wdata = '0;
    forever begin
      logic fire, is_store, do_off, l_rf_we, l_int_wb;
      logic [4:0] l_waddr, l_iwb_rd;
      logic [31:0] l_wdata, l_iwb_data, st_addr, st_data;
      instr_use_t u;
      @(negedge clk);
      iss_valid = 0; wb_valid = 0; csr_valid = 0; iss_ready = 0;
      fire = 0; is_store = 0; do_off = 0;
      if (rst_n && pc < prog.size()) begin
        logic [31:0] in;
        in = prog[pc];
        u = decode_use(in);
        if ((u.rs1_used && busy[u.rs1] && !(queues_en && u.rs1 == 5'd31 && !u.is_fp)) ||
            (u.rs2_used && busy[u.rs2] && !u.is_fp)) begin
          // waiting for an integer result of the FP side (queues off)
        end else begin
          logic [31:0] res;
          logic        wr;
          iss_valid = 1; iss_instr = in; iss_ready = 1;
          rs1_rf = rf[u.rs1]; rs2_rf = rf[u.rs2];
          #1;
          if (iss_stall) begin
            n_f2i_empty++;
            iss_ready = 0;
          end else begin
            wr = u.rd_used && !u.is_fp && u.rd != 0;
            res = '0;
            unique case (in[6:0])
              7'b0110011: unique case (in[14:12])
                3'b000:  res = in[25] ? rs1_op * rs2_op :
                               in[30] ? rs1_op - rs2_op : rs1_op + rs2_op;
                3'b001:  res = rs1_op << rs2_op[4:0];
                3'b100:  res = rs1_op ^ rs2_op;
                3'b101:  res = rs1_op >> rs2_op[4:0];
                3'b110:  res = rs1_op | rs2_op;
                3'b111:  res = rs1_op & rs2_op;
                default: $display("integer model: unsupported %h", in);
              endcase
              7'b0010011: begin
                logic [31:0] imm;
                imm = {{20{in[31]}}, in[31:20]};
                unique case (in[14:12])
                  3'b000:  res = rs1_op + imm;
                  3'b001:  res = rs1_op << imm[4:0];
                  3'b100:  res = rs1_op ^ imm;
                  3'b101:  res = rs1_op >> imm[4:0];
                  3'b110:  res = rs1_op | imm;
                  3'b111:  res = rs1_op & imm;
                  default: $display("integer model: unsupported %h", in);
                endcase
              end
              7'b0110111: res = {in[31:12], 12'b0};
              7'b0000011: res = mem[(rs1_op + {{20{in[31]}}, in[31:20]}) >> 2];
              7'b0100011: begin
                is_store = 1;
                st_addr = rs1_op + {{20{in[31]}}, in[31:25], in[11:7]};
                st_data = rs2_op;
              end
              7'b1110011: begin
                csr_valid = 1; csr_addr = in[31:20]; csr_op = 2'b01; csr_write = 1;
                csr_wdata = in[14] ? {27'b0, in[19:15]} : rs1_op;
                #1 res = csr_rdata;
                if (csr_hit) n_csr_switch++;
              end
              default: if (u.is_fp) do_off = 1;
            endcase
            if (wr) begin
              wb_valid = 1; wb_rd = u.rd; wb_data = res;
            end
            #1;
            if (wb_valid && !wb_ready) begin
              n_i2f_full++;
              iss_ready = 0;
            end else begin
              fire = 1;
            end
          end
          #1;
          l_rf_we = rf_we; l_waddr = rf_waddr; l_wdata = rf_wdata;
        end
      end
      l_int_wb = int_wb_valid; l_iwb_rd = int_wb_rd; l_iwb_data = int_wb_data;
      @(posedge clk);
      if (l_int_wb) begin
        if (l_iwb_rd != 0) rf[l_iwb_rd] = l_iwb_data;
        busy[l_iwb_rd] = 0;
        n_base_wb++;
      end
      if (fire) begin
        if (l_rf_we && l_waddr != 0) rf[l_waddr] = l_wdata;
        if (is_store) mem[st_addr >> 2] = st_data;
        if (do_off) begin
          fpq.push_back('{iss_instr, rs1_op});
          if (u.rd_used && !off_rd && u.rd != 0) busy[u.rd] = 1;
        end
        if (u.rs1_used && u.rs2_used && !u.is_fp && queues_en &&
            u.rs1 == 5'd31 && u.rs2 == 5'd31) n_double_pop++;
        pc++;
        int_retired++;
      end
    end
  end

  // ------------------------------------------------------------ FP thread
  initial begin : fp_thread
    fp_valid = 0; fp_instr = '0; fp_ready = 0; fp_int_op = '0;
    res_valid = 0; res_rd = '0; res_data = '0;
    forever begin
      logic fire;
      logic [31:0] in, addr;
      logic [63:0] wval;
      logic        fwr, st;
      @(negedge clk);
      fp_valid = 0; res_valid = 0; fp_ready = 0; fire = 0; fwr = 0; st = 0;
      if (fp_hold > 0) begin
        fp_hold--;
      end else if (rst_n && fpq.size() > 0) begin
        real a, c, d;
        in = fpq[0].instr;
        fp_valid = 1; fp_instr = in; fp_int_op = fpq[0].op; fp_ready = 1;
        #1;
        if (fp_stall) begin
          n_i2f_empty++;
          fp_ready = 0;
        end else begin
          a = f(frf[in[19:15]]); c = f(frf[in[24:20]]); d = f(frf[in[31:27]]);
          unique case (in[6:0])
            7'b0000111: begin
              addr = fp_int_op_sel + {{20{in[31]}}, in[31:20]};
              wval = {mem[(addr >> 2) + 1], mem[addr >> 2]}; fwr = 1;
              if (queues_en) n_addr_queue++;
            end
            7'b0100111: begin
              addr = fp_int_op_sel + {{20{in[31]}}, in[31:25], in[11:7]};
              st = 1;
              if (queues_en) n_addr_queue++;
            end
            7'b1000011: begin wval = b(a * c + d); fwr = 1; end
            default: unique case (in[31:27])
              5'b00000: begin wval = b(a + c); fwr = 1; end
              5'b00001: begin wval = b(a - c); fwr = 1; end
              5'b00010: begin wval = b(a * c); fwr = 1; end
              5'b11010: begin wval = b(real'(longint'({32'b0, fp_int_op_sel}))); fwr = 1; end
              5'b11000: begin res_valid = 1; res_data = $rtoi(a); end
              5'b11100: begin res_valid = 1; res_data = frf[in[19:15]][31:0]; end
              5'b10100: begin res_valid = 1; res_data = {31'b0, a < c}; end
              default: $display("FP model: unsupported %h", in);
            endcase
          endcase
          res_rd = in[11:7];
          #1;
          if (res_valid && !res_ready) begin
            if (queues_en) n_f2i_full++;
            fp_ready = 0;
          end else begin
            fire = 1;
          end
        end
      end
      #1;
      @(posedge clk);
      if (fire) begin
        if (fwr) frf[in[11:7]] = wval;
        if (st) begin
          mem[addr >> 2] = frf[in[24:20]][31:0];
          mem[(addr >> 2) + 1] = frf[in[24:20]][63:32];
        end
        void'(fpq.pop_front());
        fp_retired++;
      end
    end
  end

  // ------------------------------------------------------------- phases
  always @(posedge clk) cycles++;
  assign int_wb_ready = 1'b1;

  task automatic run_until_idle(input string name);
    int unsigned guard = 0;
    longint unsigned c0 = cycles;
    while (!(pc >= prog.size() && fpq.size() == 0 && fp_hold == 0)) begin
      @(posedge clk);
      guard++;
      if (guard > 100000) begin
        failures++;
        $display("FAIL: phase %s did not finish (pc=%0d/%0d, fpq=%0d)", name, pc,
                 prog.size(), fpq.size());
        break;
      end
    end
    repeat (3) @(posedge clk);
    $display("phase %s: %0d cycles", name, cycles - c0);
  endtask

  task automatic load(input logic [31:0] p [$]);
    prog = p; pc = 0;
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    logic [31:0] p [$];
    logic [31:0] x, y;
    int hits;
    longint unsigned c_start, i_start, f_start;
    foreach (rf[i]) begin rf[i] = '0; busy[i] = 0; frf[i] = '0; end
    pc = 0; fp_hold = 0; cycles = 0; int_retired = 0; fp_retired = 0;
    n_f2i_empty = 0; n_i2f_full = 0; n_i2f_empty = 0; n_f2i_full = 0;
    n_base_wb = 0; n_csr_switch = 0; n_addr_queue = 0; n_double_pop = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1: queues off
    rf[5] = 5; rf[6] = 7;
    p = {};
    p.push_back(enc_add(5'd5, 5'd5, 5'd6));        // t0 = 12
    p.push_back(enc_fcvt_d_wu(5'd0, 5'd5));        // ft0 = 12.0 (operand from offload)
    p.push_back(enc_fcvt_w_d(5'd7, 5'd0));         // t2 = 12 via integer write-back
    p.push_back(enc_add(5'd28, 5'd7, 5'd7));       // t3 = 24 (waits on scoreboard)
    p.push_back(enc_addi(5'd31, 5'd0, 12'd99));    // x31 = 99, ordinary register
    p.push_back(enc_add(5'd21, 5'd31, 5'd31));     // x21 = 198
    load(p); run_until_idle("1 queues off");
    check(f(frf[0]) == 12.0, "phase 1: fcvt.d.wu read integer RF");
    check(rf[28] == 24, "phase 1: FP integer result written back");
    check(rf[31] == 99 && rf[21] == 198, "phase 1: x31 ordinary");
    check(i2f_usage == 0 && f2i_usage == 0, "phase 1: queues untouched");

    // 2: enable
    load('{enc_csrrwi(5'd0, 5'd1, CSR_ENCOPIFTQUEUES)});
    run_until_idle("2 enable");
    check(queues_en, "phase 2: queues enabled");

    // 3: the two transform examples
    rf[5] = 5; rf[6] = 7; rf[7] = 777;
    frf[1] = b(2.0);
    p = {};
    p.push_back(enc_add(5'd31, 5'd5, 5'd6));       // add x31, t0, t1  -> I2F
    p.push_back(enc_fcvt_d_wu(5'd0, 5'd5));        // fcvt.d.wu ft0, t0 <- I2F
    p.push_back(enc_fcvt_w_d(5'd7, 5'd0));         // fcvt.w.d t2, ft0 -> F2I
    p.push_back(enc_add(5'd28, 5'd31, 5'd0));      // add t3, x31, x0  <- F2I
    p.push_back(enc_addi(5'd5, 5'd0, 12'h100));    // t0 = 0x100
    p.push_back(enc_lui(5'd7, 20'h3FF80));         // t2 = hi(1.5)
    p.push_back(enc_addi(5'd6, 5'd0, 12'd0));      // t1 = lo(1.5)
    p.push_back(enc_sw(5'd6, 5'd5, 12'd8));        // sw t1, 8(t0)
    p.push_back(enc_sw(5'd7, 5'd5, 12'd12));       // sw t2, 12(t0)
    p.push_back(enc_addi(5'd31, 5'd5, 12'd8));     // addi x31, t0, 8 -> I2F
    p.push_back(enc_fld(5'd0, 5'd5, 12'd0));       // fld ft0, 0(t0) <- I2F
    p.push_back(enc_fmul_d(5'd2, 5'd0, 5'd1));     // fmul.d ft2, ft0, ft1
    p.push_back(enc_addi(5'd31, 5'd5, 12'd16));    // addi x31, t0, 16 -> I2F
    p.push_back(enc_fsd(5'd2, 5'd5, 12'd0));       // fsd ft2, 0(t0) <- I2F
    p.push_back(enc_flt_d(5'd7, 5'd1, 5'd2));      // flt.d t2, ft1, ft2 -> F2I
    p.push_back(enc_add(5'd29, 5'd31, 5'd0));      // add t4, x31, x0 <- F2I
    load(p); run_until_idle("3 transform examples");
    check(rf[28] == 12, "phase 3: register dependency through both queues");
    check(f(frf[0]) == 1.5, "phase 3: fld through address from I2F");
    check(f(frf[2]) == 3.0, "phase 3: fmul.d result");
    check({mem[(32'h110 >> 2) + 1], mem[32'h110 >> 2]} == b(3.0), "phase 3: fsd address from I2F");
    check(rf[29] == 1, "phase 3: flt.d result through F2I");
    check(rf[7] == 32'h3FF8_0000, "phase 3: FP integer rd did not write the RF");

    // 4: Monte-Carlo pi with an LCG, FP body replayed as an FREP loop
    rf[5] = 32'd12345; rf[9] = LCG_A; rf[18] = LCG_C; rf[19] = 0;
    frf[3] = b(1.0 / 4294967296.0); frf[4] = b(1.0);
    p = {};
    for (int i = 0; i < N_PI; i++) begin
      p.push_back({7'b0000001, 5'd9, 5'd5, 3'b000, 5'd5, 7'b0110011}); // mul t0, t0, s1
      p.push_back(enc_add(5'd5, 5'd5, 5'd18));                          // add t0, t0, s2
      p.push_back(enc_addi(5'd31, 5'd5, 12'd0));                        // x -> I2F
      p.push_back({7'b0000001, 5'd9, 5'd5, 3'b000, 5'd5, 7'b0110011});
      p.push_back(enc_add(5'd5, 5'd5, 5'd18));
      p.push_back(enc_addi(5'd31, 5'd5, 12'd0));                        // y -> I2F
      p.push_back(enc_add(5'd19, 5'd19, 5'd31));                        // hits += F2I
    end
    for (int i = 0; i < N_PI; i++) begin
      fpq.push_back('{enc_fcvt_d_wu(5'd0, 5'd0), '0});
      fpq.push_back('{enc_fcvt_d_wu(5'd1, 5'd0), '0});
      fpq.push_back('{enc_fmul_d(5'd0, 5'd0, 5'd3), '0});
      fpq.push_back('{enc_fmul_d(5'd1, 5'd1, 5'd3), '0});
      fpq.push_back('{enc_fmul_d(5'd0, 5'd0, 5'd0), '0});
      fpq.push_back('{enc_fmadd_d(5'd0, 5'd1, 5'd1, 5'd0), '0});
      fpq.push_back('{enc_flt_d(5'd0, 5'd0, 5'd4), '0});
    end
    c_start = cycles; i_start = int_retired; f_start = fp_retired;
    load(p); run_until_idle("4 pi_lcg");
    x = 32'd12345; hits = 0;
    for (int i = 0; i < N_PI; i++) begin
      real xf, yf;
      x = x * LCG_A + LCG_C; y = x * LCG_A + LCG_C;
      xf = real'(longint'({32'b0, x})) * (1.0 / 4294967296.0);
      yf = real'(longint'({32'b0, y})) * (1.0 / 4294967296.0);
      if (yf * yf + xf * xf < 1.0) hits++;
      x = y;
    end
    check(rf[19] == hits, "phase 4: hit count");
    check(rf[5] == x, "phase 4: LCG state");
    $display("pi_lcg: %0d samples, %0d hits, pi ~ %f, IPC %f", N_PI, hits,
             4.0 * hits / N_PI,
             real'((int_retired - i_start) + (fp_retired - f_start)) / real'(cycles - c_start));

    // 5: slow FP consumer, I2F fills
    frf[5] = b(0.0); frf[6] = b(0.0);
    p = {};
    for (int i = 1; i <= 12; i++) p.push_back(enc_addi(5'd31, 5'd0, 12'(i)));
    for (int i = 0; i < 12; i++) begin
      fpq.push_back('{enc_fcvt_d_wu(5'd0, 5'd0), '0});
      fpq.push_back('{enc_fadd_d(5'd5, 5'd5, 5'd0), '0});
      fpq.push_back('{enc_fadd_d(5'd6, 5'd6, 5'd6), '0});
    end
    fp_hold = 4;
    load(p); run_until_idle("5 I2F full");
    check(f(frf[5]) == 78.0, "phase 5: sum of values through a full I2F");

    // 6: slow integer consumer, F2I fills; rs1 = rs2 = x31
    for (int i = 0; i < 10; i++) frf[8 + i] = b(real'(i + 1));
    rf[20] = 0; rf[30] = 0;
    p = {};
    for (int i = 0; i < 12; i++) p.push_back(enc_addi(5'd30, 5'd30, 12'd1));
    for (int i = 0; i < 9; i++) p.push_back(enc_add(5'd20, 5'd20, 5'd31));
    p.push_back(enc_add(5'd21, 5'd31, 5'd31));
    for (int i = 0; i < 10; i++) fpq.push_back('{enc_fcvt_w_d(5'd0, 5'(8 + i)), '0});
    load(p); run_until_idle("6 F2I full");
    check(rf[20] == 45, "phase 6: sum of values through a full F2I");
    check(rf[21] == 20, "phase 6: one pop feeds rs1 and rs2");

    // 8: exp kernel in the three-phase form of the transform (FP A -> int B -> FP C)
    //    A: kd = x*N/ln2 + Shift; ki = low word of kd  (fmv.x.w -> F2I)
    //    B: idx = ki & (N-1); table address -> I2F
    //    C: T[idx] (fld, address from I2F) times a cubic in r = x - k*ln2/N
    //    Input range [0, 0.67) keeps k below N, so no exponent scaling is needed.
    begin
      real xin [N_EXP];
      for (int j = 0; j < EXP_TBL; j++) begin
        logic [63:0] t;
        t = b(2.0 ** (real'(j) / real'(EXP_TBL)));
        mem[(EXP_T >> 2) + 2 * j] = t[31:0]; mem[(EXP_T >> 2) + 2 * j + 1] = t[63:32];
      end
      for (int i = 0; i < N_EXP; i++) begin
        logic [63:0] t;
        xin[i] = real'($urandom % 1000000) / 1000000.0 * 0.67;
        t = b(xin[i]);
        mem[(EXP_IN >> 2) + 2 * i] = t[31:0]; mem[(EXP_IN >> 2) + 2 * i + 1] = t[63:32];
      end
      frf[10] = b(real'(EXP_TBL) / $ln(2.0)); frf[11] = b(6755399441055744.0);
      frf[12] = b(-$ln(2.0) / real'(EXP_TBL)); frf[13] = b(1.0 / 6.0);
      frf[14] = b(0.5); frf[15] = b(1.0);
      rf[22] = EXP_IN; rf[24] = EXP_T; rf[25] = EXP_OUT;
      p = {};
      for (int i = 0; i < N_EXP; i++) begin
        p.push_back(enc_addi(5'd31, 5'd22, 12'd0));               // input address -> I2F
        p.push_back(enc_addi(5'd22, 5'd22, 12'd8));
        p.push_back(enc_opimm(3'b111, 5'd23, 5'd31, 12'(EXP_TBL - 1))); // idx = F2I & (N-1)
        p.push_back(enc_opimm(3'b001, 5'd23, 5'd23, 12'd3));
        p.push_back(enc_add(5'd31, 5'd23, 5'd24));                 // table address -> I2F
        p.push_back(enc_addi(5'd31, 5'd25, 12'd0));               // output address -> I2F
        p.push_back(enc_addi(5'd25, 5'd25, 12'd8));
      end
      for (int i = 0; i < N_EXP; i++) begin
        fpq.push_back('{enc_fld(5'd0, 5'd0, 12'd0), '0});                 // x
        fpq.push_back('{enc_fmadd_d(5'd1, 5'd0, 5'd10, 5'd11), '0});      // kd
        fpq.push_back('{enc_fmv_x_w(5'd0, 5'd1), '0});                    // ki -> F2I
        fpq.push_back('{enc_fsub_d(5'd1, 5'd1, 5'd11), '0});              // k
        fpq.push_back('{enc_fmadd_d(5'd2, 5'd1, 5'd12, 5'd0), '0});       // r
        fpq.push_back('{enc_fmadd_d(5'd3, 5'd2, 5'd13, 5'd14), '0});      // r/6 + 1/2
        fpq.push_back('{enc_fmadd_d(5'd3, 5'd3, 5'd2, 5'd15), '0});       // *r + 1
        fpq.push_back('{enc_fmadd_d(5'd3, 5'd3, 5'd2, 5'd15), '0});       // *r + 1
        fpq.push_back('{enc_fld(5'd4, 5'd0, 12'd0), '0});                 // T[idx]
        fpq.push_back('{enc_fmul_d(5'd5, 5'd4, 5'd3), '0});
        fpq.push_back('{enc_fsd(5'd5, 5'd0, 12'd0), '0});                 // y
      end
      c_start = cycles; i_start = int_retired; f_start = fp_retired;
      load(p); run_until_idle("8 exp");
      begin
        int bad = 0;
        real maxerr = 0.0;
        for (int i = 0; i < N_EXP; i++) begin
          real y, e, err;
          y = f({mem[(EXP_OUT >> 2) + 2 * i + 1], mem[(EXP_OUT >> 2) + 2 * i]});
          e = $exp(xin[i]);
          err = (y > e ? y - e : e - y) / e;
          if (err > maxerr) maxerr = err;
          if (err > 1e-8) bad++;
        end
        check(bad == 0, "phase 8: exp results within 1e-8 relative error");
        $display("exp: %0d elements, max relative error %e, IPC %f", N_EXP, maxerr,
                 real'((int_retired - i_start) + (fp_retired - f_start)) / real'(cycles - c_start));
      end
    end

    // 9: Monte-Carlo pi with xoshiro128+ in the integer thread
    begin
      logic [31:0] s [4];
      logic [31:0] r0, r1, t;
      rf[10] = 32'h1234_5678; rf[11] = 32'h9ABC_DEF0; rf[12] = 32'h0F1E_2D3C; rf[13] = 32'h4B5A_6978;
      for (int k = 0; k < 4; k++) s[k] = rf[10 + k];
      rf[19] = 0;
      frf[3] = b(1.0 / 4294967296.0); frf[4] = b(1.0);   // phase 8 reused f3/f4
      p = {};
      for (int i = 0; i < N_PI; i++) begin
        for (int h = 0; h < 2; h++) begin
          p.push_back(enc_add(5'd31, 5'd10, 5'd13));                      // s0+s3 -> I2F
          p.push_back(enc_opimm(3'b001, 5'd14, 5'd11, 12'd9));            // t = s1 << 9
          p.push_back(enc_op(7'b0, 3'b100, 5'd12, 5'd12, 5'd10));         // s2 ^= s0
          p.push_back(enc_op(7'b0, 3'b100, 5'd13, 5'd13, 5'd11));         // s3 ^= s1
          p.push_back(enc_op(7'b0, 3'b100, 5'd11, 5'd11, 5'd12));         // s1 ^= s2
          p.push_back(enc_op(7'b0, 3'b100, 5'd10, 5'd10, 5'd13));         // s0 ^= s3
          p.push_back(enc_op(7'b0, 3'b100, 5'd12, 5'd12, 5'd14));         // s2 ^= t
          p.push_back(enc_opimm(3'b001, 5'd15, 5'd13, 12'd11));           // s3 = rotl(s3, 11)
          p.push_back(enc_opimm(3'b101, 5'd13, 5'd13, 12'd21));
          p.push_back(enc_op(7'b0, 3'b110, 5'd13, 5'd13, 5'd15));
        end
        p.push_back(enc_add(5'd19, 5'd19, 5'd31));                        // hits += F2I
      end
      for (int i = 0; i < N_PI; i++) begin
        fpq.push_back('{enc_fcvt_d_wu(5'd0, 5'd0), '0});
        fpq.push_back('{enc_fcvt_d_wu(5'd1, 5'd0), '0});
        fpq.push_back('{enc_fmul_d(5'd0, 5'd0, 5'd3), '0});
        fpq.push_back('{enc_fmul_d(5'd1, 5'd1, 5'd3), '0});
        fpq.push_back('{enc_fmul_d(5'd0, 5'd0, 5'd0), '0});
        fpq.push_back('{enc_fmadd_d(5'd0, 5'd1, 5'd1, 5'd0), '0});
        fpq.push_back('{enc_flt_d(5'd0, 5'd0, 5'd4), '0});
      end
      c_start = cycles; i_start = int_retired; f_start = fp_retired;
      load(p); run_until_idle("9 pi_xoshiro128p");
      hits = 0;
      for (int i = 0; i < N_PI; i++) begin
        real xf, yf;
        for (int h = 0; h < 2; h++) begin
          if (h == 0) r0 = s[0] + s[3]; else r1 = s[0] + s[3];
          t = s[1] << 9;
          s[2] ^= s[0]; s[3] ^= s[1]; s[1] ^= s[2]; s[0] ^= s[3]; s[2] ^= t;
          s[3] = (s[3] << 11) | (s[3] >> 21);
        end
        xf = real'(longint'({32'b0, r0})) * (1.0 / 4294967296.0);
        yf = real'(longint'({32'b0, r1})) * (1.0 / 4294967296.0);
        if (yf * yf + xf * xf < 1.0) hits++;
      end
      check(rf[19] == hits, "phase 9: hit count");
      check(rf[10] == s[0] && rf[11] == s[1] && rf[12] == s[2] && rf[13] == s[3],
            "phase 9: xoshiro128+ state");
      $display("pi_xoshiro128p: %0d samples, %0d hits, pi ~ %f, IPC %f", N_PI, hits,
               4.0 * hits / N_PI,
               real'((int_retired - i_start) + (fp_retired - f_start)) / real'(cycles - c_start));
    end

    // 7: disable again
    p = {};
    p.push_back(enc_csrrwi(5'd0, 5'd0, CSR_ENCOPIFTQUEUES));
    p.push_back(enc_addi(5'd31, 5'd0, 12'd5));
    p.push_back(enc_add(5'd22, 5'd31, 5'd31));
    load(p); run_until_idle("7 disable");
    check(!queues_en && rf[31] == 5 && rf[22] == 10, "phase 7: x31 ordinary again");
    check(i2f_usage == 0 && f2i_usage == 0, "queues drained");

    $display("mechanisms: f2i_empty_stall=%0d i2f_full_stall=%0d i2f_empty_stall=%0d f2i_full_stall=%0d baseline_int_wb=%0d csr_switch=%0d addr_via_i2f=%0d double_pop=%0d",
             n_f2i_empty, n_i2f_full, n_i2f_empty, n_f2i_full, n_base_wb, n_csr_switch,
             n_addr_queue, n_double_pop);
    check(n_f2i_empty > 0, "mechanism: integer stall on empty F2I");
    check(n_i2f_full > 0, "mechanism: integer stall on full I2F");
    check(n_i2f_empty > 0, "mechanism: FP stall on empty I2F");
    check(n_f2i_full > 0, "mechanism: FP stall on full F2I");
    check(n_base_wb > 0, "mechanism: baseline integer write-back");
    check(n_csr_switch >= 2, "mechanism: mode switch both ways");
    check(n_addr_queue > 0, "mechanism: address through I2F");
    check(n_double_pop > 0, "mechanism: x31 as both sources");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
