// dispatch_queue: per-SM queue of thread block ids for serial thread block dispatch.
//
// The queue holds no list: two registers, head and tail, describe the range of
// consecutive thread block ids given to this SM before the kernel starts. Each
// pop hands out the head id and increments it; the queue is empty when head
// meets tail (tail is one past the last id). Because an SM receives consecutive
// ids, groups of `stride` consecutive blocks form thread batches implicitly; the
// queue numbers them (batch_age) by counting pops, so that the warp scheduler
// can tell batches apart and rank them oldest first.
//
// Interface: `load` (one cycle, before launch) writes head, tail and stride and
// clears the batch counters. `pop` is honoured only when `!empty`; tb_id and
// batch_age describe the head and change on the clock edge after a pop.
// The head/tail scheme follows the paper; the batch counter, and the rule that
// a range starts on a batch boundary, are this design's own.
module dispatch_queue #(
  parameter int TBID_W = temp_pkg::TBID_W,
  parameter int AGE_W  = temp_pkg::AGE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [TBID_W-1:0] load_head,
  input  logic [TBID_W-1:0] load_tail,
  input  logic [TBID_W-1:0] load_stride,   // 0 is treated as 1
  input  logic              pop,
  output logic              empty,
  output logic [TBID_W-1:0] tb_id,
  output logic [AGE_W-1:0]  batch_age
);

  logic [TBID_W-1:0] head_q, tail_q, stride_q, in_batch_q;
  logic [AGE_W-1:0]  age_q;

  assign empty     = (head_q == tail_q);
  assign tb_id     = head_q;
  assign batch_age = age_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q     <= '0;
      tail_q     <= '0;
      stride_q   <= TBID_W'(1);
      in_batch_q <= '0;
      age_q      <= '0;
    end else if (load) begin
      head_q     <= load_head;
      tail_q     <= load_tail;
      stride_q   <= (load_stride == '0) ? TBID_W'(1) : load_stride;
      in_batch_q <= '0;
      age_q      <= '0;
    end else if (pop && !empty) begin
      head_q <= head_q + 1'b1;
      if (in_batch_q == stride_q - 1'b1) begin
        in_batch_q <= '0;
        age_q      <= age_q + 1'b1;
      end else begin
        in_batch_q <= in_batch_q + 1'b1;
      end
    end
  end

  a_no_load_and_pop: assert property (@(posedge clk) disable iff (!rst_n) !(load && pop))
    else $error("dispatch_queue: load and pop in the same cycle");

endmodule
