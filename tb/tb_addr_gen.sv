// tb_addr_gen: sends 2,000 random candidate tags through address generation
// with random back-pressure on the request side, checks every request's
// address (base + id * stride), beat count and tag against a model queue,
// and checks the one-cycle latency and one-request-per-cycle rate.
module tb_addr_gen;
  import haven_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] cfg_base;
  logic [15:0]       cfg_stride;
  logic [BEATS_W-1:0] cfg_beats;
  logic in_valid, in_ready, req_valid, req_ready;
  nsu_tag_t in_tag;
  hbf_req_t req;

  addr_gen dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  hbf_req_t exp_q[$];
  int sent = 0, got = 0;
  bit stall_phase;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: record what should come out for every accepted tag
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    hbf_req_t e;
    e.addr  = cfg_base + ADDR_W'(48'(in_tag.id) * 48'(cfg_stride));
    e.beats = cfg_beats;
    e.tag   = in_tag;
    exp_q.push_back(e);
  end
  always @(posedge clk) if (rst_n && req_valid && req_ready) begin
    check(exp_q.size() > 0, "request without candidate");
    if (exp_q.size() > 0) check(req == exp_q.pop_front(), "request contents");
    got++;
  end

  initial begin
    int t0;
    cfg_base = 40'h12_3456_7000; cfg_stride = 16'd128; cfg_beats = 4;
    in_valid = 0; in_tag = '0; req_ready = 0; stall_phase = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: one request, output after one cycle
    @(negedge clk);
    in_valid = 1; in_tag = '{qidx: 5'd3, last: 1'b1, id: 32'd1000};
    @(posedge clk); #1 in_valid = 0;
    check(req_valid && req.addr == 40'h12_3456_7000 + 40'd128000, "latency 1 and address");
    req_ready = 1; @(posedge clk); #1;
    // full rate without back-pressure
    t0 = got;
    for (int i = 0; i < 100; i++) begin
      in_valid = 1; in_tag = '{qidx: 5'(i), last: 1'(i % 2), id: $urandom};
      @(posedge clk); #1;
    end
    in_valid = 0; @(posedge clk); #1;
    check(got - t0 == 100, "one request per cycle");
    // random back-pressure and strides
    for (int i = 0; i < 2000; i++) begin
      if (i % 500 == 0) begin
        req_ready = 1; wait (exp_q.size() == 0); @(negedge clk);
        cfg_stride = 16'($urandom_range(1, 65535)); cfg_beats = BEATS_W'($urandom_range(1, 24));
        cfg_base = {$urandom, 8'($urandom)};
      end
      @(negedge clk);
      req_ready = ($urandom_range(99) < 70);
      in_valid = 1; in_tag = '{qidx: 5'($urandom), last: 1'($urandom), id: $urandom};
      while (!in_ready) begin
        @(negedge clk);
        req_ready = ($urandom_range(99) < 70);
      end
      @(posedge clk);
      #1 in_valid = 0;
    end
    req_ready = 1;
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0 && got >= 2100, $sformatf("all requests delivered (%0d, %0d left)", got, exp_q.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
