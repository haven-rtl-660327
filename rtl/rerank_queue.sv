// rerank_queue: one of the NSU's rerank queues. It holds the candidate list of
// one query as sent by the GPU after the IVF-PQ scan: up to DEPTH entries of a
// 32-bit vector ID and its 32-bit PQ distance (1,024 x 64 bit = 8 KB by
// default, the paper's size).
//
// Operation: the GPU pushes entries (push_valid/push_ready) and marks the
// final entry of the list with push_last; the queue is then "sealed" and
// accepts no more pushes until it has been drained, so it never mixes two
// queries. run_req tells the scheduler that a complete list is waiting. The
// read side is first-word-fall-through: pop_entry/pop_last show the head
// whenever pop_valid is high, and pop_ready removes it. pop_last marks the
// final entry of the sealed list. A full queue holds push_ready low (the
// GPU stalls). The PQ distance is kept with the ID as the paper states; the
// rerank itself replaces it by the exact distance, so the head's distance is
// offered on pop_entry for whoever wants it but the NSU does not use it.
// One push and one pop may happen in the same cycle. Reset empties the queue.
// Depth and entry layout follow the paper; sealing, the handshake and the
// fall-through read are this design's choices.
module rerank_queue
  import haven_pkg::*;
#(
  parameter int unsigned DEPTH = QUEUE_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  // GPU side
  input  logic        push_valid,
  output logic        push_ready,
  input  cand_t       push_entry,
  input  logic        push_last,
  // scheduler side
  output logic        run_req,      // sealed and not empty
  output logic        pop_valid,
  input  logic        pop_ready,
  output cand_t       pop_entry,
  output logic        pop_last,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PTR_W = $clog2(DEPTH);

  cand_t             mem [DEPTH];
  logic [PTR_W-1:0]  wr_ptr, rd_ptr;
  logic              sealed;

  logic do_push, do_pop;
  assign push_ready = !sealed && (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign do_push    = push_valid && push_ready;
  assign pop_valid  = count != '0;
  assign do_pop     = pop_valid && pop_ready;
  assign run_req    = sealed && pop_valid;
  assign pop_entry  = mem[rd_ptr];
  assign pop_last   = sealed && (count == 1);

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_entry;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
      sealed <= 1'b0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PTR_W'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == PTR_W'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
      if (do_push && push_last)      sealed <= 1'b1;
      else if (do_pop && pop_last)   sealed <= 1'b0;
    end
  end

  // the scheduler must not pop an empty queue
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop_ready |-> pop_valid);

endmodule
