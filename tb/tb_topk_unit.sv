// tb_topk_unit: runs queries of 1 to 1,024 candidates with unique random
// distances through the top-k unit (256-point sorter) with random gaps on the
// input and random back-pressure on the output. For each query it checks the
// returned ranks, IDs, distances, queue index and last flag against a
// software sort, and checks that each sorter pass holds the input for
// 1 + 36 cycles. k is varied between 1, 10, 100 and 128.
module tb_topk_unit;
  import haven_pkg::*;
  localparam int LAT = 36;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [K_W-1:0] cfg_k;
  logic in_valid, in_ready, out_valid, out_ready, out_last, merge_start;
  logic [DIST_W-1:0] in_dist;
  nsu_tag_t in_tag;
  logic [QIDX_W-1:0] out_qidx;
  logic [K_W-1:0] out_rank;
  cand_t out_cand;

  topk_unit dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stall-length check: in_ready stays low for 1 + LAT cycles per pass
  int low_run = 0, passes = 0;
  always @(posedge clk) if (rst_n) begin
    if (merge_start) passes++;
    if (!in_ready && !out_valid) low_run++;
    else if (low_run != 0) begin
      check(low_run == 1 + LAT, $sformatf("sorter pass takes %0d cycles", low_run));
      low_run = 0;
    end
  end

  initial begin
    int counts[] = '{1, 5, 100, 128, 129, 300, 256, 1024, 77};
    int ks[] = '{100, 10, 128, 1, 100, 100, 128, 100, 10};
    cfg_k = 100; in_valid = 0; in_dist = '0; in_tag = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (counts[t]) begin
      automatic cand_t c [$];
      automatic cand_t r [$];
      automatic int n, k, got;
      n = counts[t]; k = ks[t];
      cfg_k = K_W'(k);
      for (int i = 0; i < n; i++)
        c.push_back('{distance: {$urandom_range(65535), 16'(i)}, id: $urandom});
      // feed
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        while ($urandom_range(9) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_dist = c[i].distance;
        in_tag = '{qidx: QIDX_W'(t), last: (i == n - 1), id: c[i].id};
        while (!in_ready) @(negedge clk);
        @(posedge clk); #1 in_valid = 0;
      end
      // reference
      r = c;
      r.sort() with (item.distance);
      // collect
      got = 0;
      while (1) begin
        @(negedge clk);
        out_ready = ($urandom_range(3) != 0);
        if (out_valid && out_ready) begin
          check(out_qidx == QIDX_W'(t), "queue index");
          check(out_rank == K_W'(got), "rank");
          check(out_cand == r[got], $sformatf("query %0d rank %0d: got %h/%h want %h/%h", t, got,
                out_cand.distance, out_cand.id, r[got].distance, r[got].id));
          check(out_last == (got == ((n < k) ? n : k) - 1), "last flag");
          got++;
          if (out_last) begin @(posedge clk); #1 out_ready = 0; break; end
        end
      end
      check(got == ((n < k) ? n : k), "result count");
    end
    check(passes == 1 + 1 + 1 + 1 + 2 + 3 + 2 + 8 + 1, $sformatf("sorter passes %0d", passes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
