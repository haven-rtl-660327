// tb_rerank_queue: fills one rerank queue to its full 1,024 entries, checks
// that a full queue stalls the writer, seals the list, checks that a sealed
// queue refuses pushes, drains it while checking order, run_req and the
// last-entry flag, and then runs a second list with simultaneous push/pop.
module tb_rerank_queue;
  import haven_pkg::*;
  localparam int DEPTH = QUEUE_DEPTH;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push_valid, push_ready, push_last, run_req, pop_valid, pop_ready, pop_last;
  cand_t push_entry, pop_entry;
  logic [$clog2(DEPTH+1)-1:0] count;

  rerank_queue #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic cand_t ent(input int i, input int list);
    return '{distance: 32'(i * 7 + list), id: 32'(32'h1000_0000 * list + i * 3)};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_valid = 0; push_last = 0; pop_ready = 0; push_entry = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // fill without sealing
    for (int i = 0; i < DEPTH; i++) begin
      push_valid <= 1; push_entry <= ent(i, 1); push_last <= 0;
      @(posedge clk);
      check(push_ready, "push accepted while not full");
    end
    push_valid <= 1; push_entry <= ent(DEPTH, 1);
    @(negedge clk);
    check(!push_ready, "full queue stalls the writer");
    check(count == DEPTH, "count at full");
    check(!run_req, "unsealed list not offered to the scheduler");
    @(posedge clk);
    push_valid <= 0;
    // pop one, then seal with the last entry
    @(negedge clk);
    check(pop_valid && pop_entry == ent(0, 1), "head of queue");
    pop_ready = 1; @(posedge clk); #1 pop_ready = 0;
    push_valid <= 1; push_entry <= ent(DEPTH, 1); push_last <= 1;
    @(posedge clk);
    push_valid <= 0; push_last <= 0;
    @(negedge clk);
    check(run_req, "sealed list offered");
    push_valid = 1; push_entry = ent(9999, 1);
    #1 check(!push_ready, "sealed queue refuses pushes");
    push_valid = 0;
    // drain
    for (int i = 1; i <= DEPTH; i++) begin
      @(negedge clk);
      check(pop_valid && pop_entry == ent(i, 1), $sformatf("order at %0d", i));
      check(pop_last == (i == DEPTH), $sformatf("last flag at %0d", i));
      pop_ready = 1; @(posedge clk); #1 pop_ready = 0;
    end
    @(negedge clk);
    check(!pop_valid && !run_req && push_ready, "empty and unsealed after drain");
    // second list: 40 entries, pop while pushing
    fork
      begin
        for (int i = 0; i < 40; i++) begin
          push_valid <= 1; push_entry <= ent(i, 2); push_last <= (i == 39);
          @(posedge clk);
          while (!push_ready) @(posedge clk);
        end
        push_valid <= 0; push_last <= 0;
      end
      begin
        int got = 0;
        while (got < 40) begin
          @(negedge clk);
          if (pop_valid) begin
            check(pop_entry == ent(got, 2), $sformatf("list 2 order at %0d", got));
            check(pop_last == (got == 39), "list 2 last flag");
            pop_ready = 1; @(posedge clk); #1 pop_ready = 0;
            got++;
          end
        end
      end
    join
    @(negedge clk);
    check(count == 0, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
