// tb_haven_nsu: end-to-end test of the near-storage search unit at its
// default size (32 queues of 1,024 entries, 32 MACs, 256-point sorter)
// against the behavioural flash model. Three phases with different settings:
//   1. L2, unsigned 8-bit, 128 dims (BIGANN-like), k = 100: lists of 300, 50,
//      1,024 (a full queue) and 129 candidates, then a second list for a
//      queue that is still busy, which stalls the GPU side;
//   2. inner product, signed 8-bit, 100 dims (SPACEV-like), k = 10;
//   3. L2, signed, 768 dims (Wiki-88M size, 24 beats per vector), k = 128.
// Every result is checked: rank order, queue, last flag, that the distance is
// the exact distance of the returned ID, that the ID was a candidate of that
// query and that the distance equals the reference's at that rank. Counts of
// each mechanism (queue switch, multi-pass merge, flash back-pressure,
// result back-pressure, GPU stall on a busy queue, fewer candidates than k,
// metric switch) must all be non-zero.
module tb_haven_nsu;
  import haven_pkg::*;
  import tb_haven_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] cfg_base;
  logic [15:0] cfg_stride;
  logic [DIM_W-1:0] cfg_dim;
  logic [BEATS_W-1:0] cfg_beats;
  metric_e cfg_metric;
  logic cfg_signed;
  logic [K_W-1:0] cfg_k;
  logic cand_valid, cand_ready, cand_last;
  logic [QIDX_W-1:0] cand_queue;
  cand_t cand;
  logic qw_en;
  logic [QIDX_W-1:0] qw_queue;
  logic [$clog2(MAX_BEATS)-1:0] qw_beat;
  logic [BEAT_W-1:0] qw_data;
  logic hbf_req_valid, hbf_req_ready, hbf_rsp_valid, hbf_rsp_ready;
  hbf_req_t hbf_req;
  logic [BEAT_W-1:0] hbf_rsp_data;
  nsu_tag_t hbf_rsp_tag;
  logic res_valid, res_ready, res_last;
  logic [QIDX_W-1:0] res_qidx;
  logic [K_W-1:0] res_rank;
  cand_t res_cand;
  logic [NUM_QUEUES-1:0] queue_nonempty;
  logic sort_pass;

  haven_nsu dut (.*);

  hbf_model #(.LAT(20), .STALL_PCT(10)) u_hbf (
    .clk, .rst_n,
    .req_valid(hbf_req_valid), .req_ready(hbf_req_ready), .req(hbf_req),
    .rsp_valid(hbf_rsp_valid), .rsp_ready(hbf_rsp_ready),
    .rsp_data(hbf_rsp_data), .rsp_tag(hbf_rsp_tag)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference ---------------------------------------------------------
  logic [7:0] qv [NUM_QUEUES][MAX_DIM];
  typedef struct {
    int qidx;
    logic [31:0] ids [$];
    logic [31:0] dists [$];   // sorted reference distances
    int k;
  } query_t;
  query_t pending [NUM_QUEUES][$];   // per queue, in push order
  int queries_done = 0, queries_sent = 0;
  bit ip_mode, sgn_mode;
  int dim_now;

  function automatic logic [31:0] exact(input logic [31:0] id, input int qi);
    logic [7:0] qa[];
    qa = new[dim_now];
    for (int j = 0; j < dim_now; j++) qa[j] = qv[qi][j];
    return ref_dist(cfg_base + ADDR_W'(48'(id) * 48'(cfg_stride)), qa, dim_now, ip_mode, sgn_mode);
  endfunction

  // ---- mechanism counters --------------------------------------------------
  int n_switch = 0, n_multipass = 0, n_hbf_bp = 0, n_res_bp = 0, n_gpu_stall = 0;
  int n_short = 0, n_metric_switch = 0, n_full_queue = 0, n_pass = 0;
  logic [QIDX_W-1:0] prev_res_q = '1;
  always @(posedge clk) if (rst_n) begin
    if (hbf_req_valid && !hbf_req_ready) n_hbf_bp++;
    if (res_valid && !res_ready) n_res_bp++;
    if (cand_valid && !cand_ready) n_gpu_stall++;
    if (sort_pass) n_pass++;
    if (dut.g_queue[2].cnt == 11'(QUEUE_DEPTH)) n_full_queue++;   // queue 2 gets 1,024
  end

  // ---- result checker ------------------------------------------------------
  int rank_exp = 0;
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    int qi;
    query_t qr;
    qi = int'(res_qidx);
    check(pending[qi].size() > 0, $sformatf("result for idle queue %0d", qi));
    if (pending[qi].size() > 0) begin
      int n_exp;
      bit found;
      qr = pending[qi][0];
      n_exp = (qr.ids.size() < qr.k) ? qr.ids.size() : qr.k;
      check(int'(res_rank) == rank_exp, "rank sequence");
      check(res_cand.distance == qr.dists[rank_exp],
            $sformatf("q%0d rank %0d dist %h want %h", qi, rank_exp, res_cand.distance, qr.dists[rank_exp]));
      check(res_cand.distance == exact(res_cand.id, qi), "distance belongs to the ID");
      found = 0;
      foreach (qr.ids[i]) if (qr.ids[i] == res_cand.id) found = 1;
      check(found, "ID was a candidate");
      check(res_last == (rank_exp == n_exp - 1), "last flag");
      if (res_last) begin
        check(rank_exp == n_exp - 1, "result count");
        if (qr.ids.size() > TOPK_MAX) n_multipass++;
        if (qr.ids.size() < qr.k) n_short++;
        if (prev_res_q != res_qidx) n_switch++;
        prev_res_q = res_qidx;
        void'(pending[qi].pop_front());
        queries_done++;
        rank_exp = 0;
      end else rank_exp++;
    end
  end

  always @(negedge clk) res_ready <= ($urandom_range(4) != 0);

  // ---- stimulus --------------------------------------------------------------
  task automatic load_query(input int qi);
    for (int b = 0; b < MAX_BEATS; b++) begin
      @(negedge clk);
      qw_en = 1; qw_queue = QIDX_W'(qi); qw_beat = 5'(b);
      for (int l = 0; l < NUM_MACS; l++) begin
        qv[qi][b*NUM_MACS+l] = 8'($urandom);
        qw_data[l*8 +: 8] = qv[qi][b*NUM_MACS+l];
      end
    end
    @(negedge clk) qw_en = 0;
  endtask

  task automatic send_list(input int qi, input int n, input int k);
    query_t qr;
    logic [31:0] d [$];
    qr.qidx = qi; qr.k = k;
    for (int i = 0; i < n; i++) begin
      logic [31:0] id;
      id = {8'd0, 24'($urandom)};
      qr.ids.push_back(id);
      d.push_back(exact(id, qi));
    end
    d.sort();
    qr.dists = d;
    pending[qi].push_back(qr);
    queries_sent++;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      cand_valid = 1; cand_queue = QIDX_W'(qi);
      cand = '{distance: $urandom, id: qr.ids[i]};   // PQ distance: not used
      cand_last = (i == n - 1);
      #1;
      while (!cand_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 cand_valid = 0;
    end
  endtask

  task automatic wait_idle();
    while (queries_done != queries_sent) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  task automatic set_mode(input int dim, input bit ip, input bit sg, input int k);
    @(negedge clk);
    if (ip_mode != ip) n_metric_switch++;
    dim_now = dim; ip_mode = ip; sgn_mode = sg;
    cfg_dim = DIM_W'(dim); cfg_beats = BEATS_W'((dim + 31) / 32);
    cfg_metric = ip ? METRIC_IP : METRIC_L2; cfg_signed = sg;
    cfg_k = K_W'(k);
    cfg_stride = 16'(((dim + 31) / 32) * 32);
  endtask

  initial begin
    cfg_base = 40'h10_0000_0000; cfg_stride = 128;
    cand_valid = 0; cand_queue = '0; cand = '0; cand_last = 0;
    qw_en = 0; qw_queue = '0; qw_beat = '0; qw_data = '0;
    ip_mode = 0; sgn_mode = 0; dim_now = 128;
    cfg_dim = 128; cfg_beats = 4; cfg_metric = METRIC_L2; cfg_signed = 0; cfg_k = 100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1
    set_mode(128, 0, 0, 100);
    foreach (qv[q]) if (q < 8) load_query(q);
    send_list(0, 300, 100);
    send_list(1, 50, 100);
    send_list(2, 1024, 100);
    send_list(5, 129, 100);
    send_list(1, 200, 100);   // queue 1 may still be busy: GPU stalls
    wait_idle();
    // phase 2
    set_mode(100, 1, 1, 10);
    load_query(31);
    send_list(3, 400, 10);
    send_list(31, 1, 10);
    wait_idle();
    // phase 3
    set_mode(768, 0, 1, 128);
    load_query(7);
    send_list(7, 150, 128);
    wait_idle();
    $display("queries %0d  switches %0d  multipass %0d  hbf_bp %0d  res_bp %0d  gpu_stall %0d  short %0d  metric_switch %0d  full_queue %0d  sorter_passes %0d",
             queries_done, n_switch, n_multipass, n_hbf_bp, n_res_bp, n_gpu_stall, n_short,
             n_metric_switch, n_full_queue, n_pass);
    check(queries_done == 8, "all queries answered");
    check(n_switch > 0, "queue switch happened");
    check(n_multipass > 0, "multi-pass merge happened");
    check(n_hbf_bp > 0, "flash back-pressure happened");
    check(n_res_bp > 0, "result back-pressure happened");
    check(n_gpu_stall > 0, "GPU stall on a busy queue happened");
    check(n_short > 0, "list shorter than k happened");
    check(n_metric_switch > 0, "metric switch happened");
    check(n_full_queue > 0, "full queue happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
