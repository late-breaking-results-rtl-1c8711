// tb_copift_csr: self-checking test of the EnCopiftQueues CSR.
//
// Checks the reset value (disabled), address decoding (other CSR addresses
// neither hit nor change the bit), write / set / clear operations, read-only
// accesses, that the read data is the value before the access, and that a
// write takes effect in the next cycle.
module tb_copift_csr;
  import copift_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic csr_valid = 1'b0, csr_write = 1'b0;
  logic [11:0] csr_addr = '0;
  logic [1:0] csr_op = '0;
  logic [XLEN-1:0] csr_wdata = '0;
  logic csr_hit, en;
  logic [XLEN-1:0] csr_rdata;
  int checks = 0, failures = 0;
  logic model;

  copift_csr dut (
    .clk_i(clk), .rst_ni(rst_n),
    .csr_valid_i(csr_valid), .csr_addr_i(csr_addr), .csr_op_i(csr_op),
    .csr_write_i(csr_write), .csr_wdata_i(csr_wdata),
    .csr_hit_o(csr_hit), .csr_rdata_o(csr_rdata), .enable_o(en)
  );

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  task automatic access(input logic [11:0] a, input logic [1:0] op, input logic wr,
                        input logic [XLEN-1:0] d);
    logic hit;
    csr_valid = 1'b1; csr_addr = a; csr_op = op; csr_write = wr; csr_wdata = d;
    hit = (a == 12'h7C3);
    #1;
    check(csr_hit == hit, "hit");
    check(csr_rdata == {31'b0, model}, "read data is old value");
    check(en == model, "enable before edge");
    @(posedge clk);
    if (hit && wr) begin
      case (op)
        2'b01: model = d[0];
        2'b10: model = model | d[0];
        2'b11: model = model & ~d[0];
        default: ;
      endcase
    end
    @(negedge clk);
    csr_valid = 1'b0;
    #1 check(en == model, "enable after edge");
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    #1 check(en == 1'b0, "reset disables queues");
    access(12'h7C3, 2'b01, 1'b1, 32'h1);   // write 1
    check(en, "enabled by write");
    access(12'h7C2, 2'b01, 1'b1, 32'h0);   // other CSR: no effect
    check(en, "other address ignored");
    access(12'h7C3, 2'b10, 1'b0, 32'h0);   // read only
    access(12'h7C3, 2'b11, 1'b1, 32'h1);   // clear
    check(!en, "cleared");
    access(12'h7C3, 2'b10, 1'b1, 32'h1);   // set
    check(en, "set");
    access(12'h7C3, 2'b01, 1'b1, 32'hFFFF_FFFE); // write 0 (bit 0 only)
    check(!en, "bit 0 only");
    for (int i = 0; i < 200; i++)
      access(($urandom % 2) ? 12'h7C3 : 12'(($urandom % 4096)), 2'($urandom),
             1'($urandom), $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
