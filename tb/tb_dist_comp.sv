// tb_dist_comp: loads query vectors into the distance unit's buffer, then
// streams raw vectors (bytes from the flash model's address function) for
// four settings: 128-dim L2 unsigned, 100-dim L2 signed, 768-dim inner
// product signed and 100-dim inner product unsigned. Every distance and tag is
// compared with a software reference; output back-pressure is random; the
// two-cycle latency from the last beat to out_valid is checked.
module tb_dist_comp;
  import haven_pkg::*;
  import tb_haven_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DIM_W-1:0] cfg_dim;
  logic [BEATS_W-1:0] cfg_beats;
  metric_e cfg_metric;
  logic cfg_signed;
  logic qw_en;
  logic [QIDX_W-1:0] qw_queue;
  logic [$clog2(MAX_BEATS)-1:0] qw_beat;
  logic [BEAT_W-1:0] qw_data, d_data;
  logic d_valid, d_ready, out_valid, out_ready;
  nsu_tag_t d_tag, out_tag;
  logic [DIST_W-1:0] out_dist;

  dist_comp dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] qv [NUM_QUEUES][MAX_DIM];
  typedef struct { logic [31:0] d; nsu_tag_t t; } exp_t;
  exp_t exp_q[$];
  int nres = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    exp_t e;
    check(exp_q.size() > 0, "unexpected result");
    e = exp_q.pop_front();
    check(out_dist == e.d && out_tag == e.t,
          $sformatf("distance %h want %h (id %0d)", out_dist, e.d, e.t.id));
    nres++;
  end

  initial begin
    int dims[4] = '{128, 100, 768, 100};
    bit ips[4]  = '{0, 0, 1, 1};
    bit sgn[4]  = '{0, 1, 1, 0};
    qw_en = 0; qw_queue = '0; qw_beat = '0; qw_data = '0;
    d_valid = 0; d_data = '0; d_tag = '0; out_ready = 1;
    cfg_dim = 128; cfg_beats = 4; cfg_metric = METRIC_L2; cfg_signed = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // query vectors
    for (int q = 0; q < NUM_QUEUES; q++)
      for (int b = 0; b < MAX_BEATS; b++) begin
        @(negedge clk);
        qw_en = 1; qw_queue = QIDX_W'(q); qw_beat = 5'(b);
        for (int l = 0; l < NUM_MACS; l++) begin
          qv[q][b*NUM_MACS+l] = 8'($urandom);
          qw_data[l*8 +: 8] = qv[q][b*NUM_MACS+l];
        end
      end
    @(negedge clk) qw_en = 0;
    // latency check with one vector
    begin
      int t_last, t_out;
      logic [7:0] qa[];
      @(negedge clk);
      qa = new[128];
      for (int j = 0; j < 128; j++) qa[j] = qv[2][j];
      exp_q.push_back('{ref_dist(40'h100, qa, 128, 0, 0), '{qidx: 5'd2, last: 1'b1, id: 32'd7}});
      for (int b = 0; b < 4; b++) begin
        d_valid = 1; d_tag = '{qidx: 5'd2, last: 1'b1, id: 32'd7};
        for (int l = 0; l < 32; l++) d_data[l*8 +: 8] = flash_byte(40'h100 + 40'(b*32 + l));
        @(negedge clk);
      end
      d_valid = 0;
      t_last = 0;
      while (!out_valid) begin @(negedge clk); t_last++; end
      check(t_last == 1, $sformatf("result two cycles after the last beat (%0d)", t_last + 1));
      @(negedge clk);
    end
    for (int s = 0; s < 4; s++) begin
      int beats;
      wait (exp_q.size() == 0);
      @(negedge clk);
      beats = (dims[s] + 31) / 32;
      cfg_dim = DIM_W'(dims[s]); cfg_beats = BEATS_W'(beats);
      cfg_metric = ips[s] ? METRIC_IP : METRIC_L2; cfg_signed = sgn[s];
      for (int v = 0; v < 60; v++) begin
        logic [ADDR_W-1:0] va;
        logic [7:0] qa[];
        nsu_tag_t tg;
        int qi;
        qi = $urandom_range(NUM_QUEUES - 1);
        va = {8'd0, $urandom} & ~40'h1f;
        tg = '{qidx: QIDX_W'(qi), last: 1'($urandom), id: $urandom};
        qa = new[dims[s]];
        for (int j = 0; j < dims[s]; j++) qa[j] = qv[qi][j];
        exp_q.push_back('{ref_dist(va, qa, dims[s], ips[s], sgn[s]), tg});
        for (int b = 0; b < beats; b++) begin
          d_valid = 1; d_tag = tg;
          for (int l = 0; l < 32; l++) d_data[l*8 +: 8] = flash_byte(va + 40'(b*32 + l));
          out_ready = ($urandom_range(3) != 0);
          #1;
          while (!d_ready) begin
            @(negedge clk);
            out_ready = ($urandom_range(3) != 0);
            #1;
          end
          @(negedge clk);
        end
        d_valid = 0;
      end
      out_ready = 1;
    end
    wait (exp_q.size() == 0);
    repeat (3) @(posedge clk);
    check(nres == 241, $sformatf("all distances returned (%0d)", nres));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
