// copift_queue: blocking FIFO between the integer thread and the FP thread.
//
// Both COPIFTv2 queues are instances of this module: I2F carries integer
// results to FP instructions, F2I carries FP results (compare flags,
// conversions, moves) to integer instructions. Their only semantics, per the
// paper, are those of a blocking FIFO: a pop must follow the matching push
// and stalls while the queue is empty, a push stalls while it is full. The
// stall is expressed as a valid/ready handshake on each side.
//
// Interface
//   push_valid/push_ready/push_data : producer side; an entry is written in a
//                                     cycle with push_valid & push_ready.
//   pop_valid/pop_ready/pop_data    : consumer side; pop_data is the oldest
//                                     entry, removed when pop_valid & pop_ready.
//   usage                           : number of entries held.
// Timing: registered storage without fall-through, so an entry pushed in
// cycle t can be popped from cycle t+1 on. One push and one pop may happen in
// the same cycle, giving one transfer per cycle. push_ready is simply "not
// full" (a push into a full queue waits even if a pop happens that cycle).
// Depth and the no-fall-through choice are this design's: the paper gives
// neither. Reset empties the queue.
module copift_queue #(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned DEPTH  = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // producer
  input  logic                     push_valid_i,
  output logic                     push_ready_o,
  input  logic [DATA_W-1:0]        push_data_i,
  // consumer
  output logic                     pop_valid_o,
  input  logic                     pop_ready_i,
  output logic [DATA_W-1:0]        pop_data_o,
  // status
  output logic [$clog2(DEPTH+1)-1:0] usage_o
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH+1);

  logic [DATA_W-1:0] mem_q [DEPTH];
  logic [PTR_W-1:0]  wr_ptr_q, rd_ptr_q;
  logic [CNT_W-1:0]  cnt_q;
  logic              push, pop;

  assign push_ready_o = (cnt_q != CNT_W'(DEPTH));
  assign pop_valid_o  = (cnt_q != '0);
  assign pop_data_o   = mem_q[rd_ptr_q];
  assign usage_o      = cnt_q;

  assign push = push_valid_i & push_ready_o;
  assign pop  = pop_valid_o & pop_ready_i;

  function automatic logic [PTR_W-1:0] inc_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_ptr_q <= '0;
      rd_ptr_q <= '0;
      cnt_q    <= '0;
    end else begin
      if (push) wr_ptr_q <= inc_ptr(wr_ptr_q);
      if (pop)  rd_ptr_q <= inc_ptr(rd_ptr_q);
      if (push && !pop)      cnt_q <= cnt_q + 1'b1;
      else if (pop && !push) cnt_q <= cnt_q - 1'b1;
    end
  end

  // Storage needs no reset: an entry is only read after it was written.
  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_ptr_q] <= push_data_i;
  end

  // The occupancy never exceeds the depth.
  a_usage_bound: assert property (@(posedge clk_i) disable iff (!rst_ni)
    cnt_q <= CNT_W'(DEPTH));

endmodule
