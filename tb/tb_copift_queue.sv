// tb_copift_queue: self-checking test of the blocking FIFO used for I2F/F2I.
//
// A reference model (a SystemVerilog queue) predicts occupancy, ready/valid
// and the popped data. Phases: fill to full (push_ready must drop at DEPTH),
// check that nothing is lost or reordered, drain to empty, check that an entry
// is not visible in the cycle it is pushed (one cycle push-to-pop latency),
// check one push plus one pop per cycle at full rate, then random traffic.
module tb_copift_queue;
  localparam int unsigned W = 32;   // must match the defaults of copift_queue
  localparam int unsigned D = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic push_valid = 1'b0, pop_ready = 1'b0;
  logic [W-1:0] push_data = '0;
  logic push_ready, pop_valid;
  logic [W-1:0] pop_data;
  logic [$clog2(D+1)-1:0] usage;

  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  copift_queue dut (  // default parameters: DATA_W = 32, DEPTH = 4
    .clk_i(clk), .rst_ni(rst_n),
    .push_valid_i(push_valid), .push_ready_o(push_ready), .push_data_i(push_data),
    .pop_valid_o(pop_valid), .pop_ready_i(pop_ready), .pop_data_o(pop_data),
    .usage_o(usage)
  );

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %0t: %s", $time, what);
    end
  endtask

  // Compare outputs with the model just before the clock edge, then update it.
  task automatic step(input logic pv, input logic [W-1:0] pd, input logic pr);
    push_valid = pv; push_data = pd; pop_ready = pr;
    #1;
    check(push_ready == (model.size() < D), "push_ready");
    check(pop_valid == (model.size() > 0), "pop_valid");
    check(usage == model.size(), "usage");
    if (model.size() > 0) check(pop_data == model[0], "pop_data order");
    @(posedge clk);
    if (pr && model.size() > 0) void'(model.pop_front());
    if (pv && push_ready) model.push_back(pd);
    @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned n;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // Fill beyond full: the extra pushes must be refused.
    for (int i = 0; i < D + 2; i++) step(1'b1, 32'hA000_0000 + i, 1'b0);
    check(model.size() == D, "model full");
    check(!push_ready, "full queue refuses push");
    // Drain beyond empty.
    for (int i = 0; i < D + 2; i++) step(1'b0, '0, 1'b1);
    check(!pop_valid, "empty after drain");
    // Latency: pushed entry not visible in the same cycle, visible next cycle.
    push_valid = 1'b1; push_data = 32'h1234_5678; pop_ready = 1'b1;
    #1 check(!pop_valid, "no fall-through");
    @(posedge clk); model.push_back(32'h1234_5678); @(negedge clk);
    push_valid = 1'b0;
    #1 check(pop_valid && pop_data == 32'h1234_5678, "visible one cycle after push");
    @(posedge clk); void'(model.pop_front()); @(negedge clk);
    // Full rate: simultaneous push and pop every cycle, occupancy stays at 1.
    step(1'b1, 32'h0000_0100, 1'b0);
    n = 0;
    for (int i = 0; i < 20; i++) begin
      if (pop_valid && push_ready) n++;
      step(1'b1, 32'h0000_0200 + i, 1'b1);
    end
    check(n == 20, "one push and one pop per cycle");
    for (int i = 0; i < D; i++) step(1'b0, '0, 1'b1);
    // Random traffic.
    for (int i = 0; i < 2000; i++)
      step(($urandom % 3) != 0, $urandom, ($urandom % 2) == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
