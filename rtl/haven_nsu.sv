// haven_nsu: the near-storage search unit (NSU) that sits on the logic base
// die of a High-Bandwidth Flash (HBF) stack and performs the reranking step of
// IVF-PQ search next to the flash. The GPU runs coarse probing and the PQ list
// scan, then sends each query's candidate IDs here; the NSU fetches every
// candidate's full-precision vector from the flash, computes its exact distance
// to the query and returns the query's k nearest candidates.
//
// Datapath (the paper's Fig. 6(b)): candidate IDs enter one of NQ rerank
// queues (one query per queue) -> a round-robin scheduler picks a queue whose
// list is complete and drains it -> address generation turns each ID into a
// flash read request -> the returned raw data beats go through the distance
// computation module (32 MACs) -> the top-k unit (256-point bitonic sorter)
// selects the best candidates, which leave on the res_* stream.
//
// The block list, the queue count and size, the MAC count and the sorter
// size follow the paper. The scheduler (round robin, one whole queue at a
// time), the in-order read interface, the per-queue query buffer and all port
// protocols are this design's choices.
//
// Interfaces (valid/ready streams, a transfer happens when both are high):
//   cand_*     GPU pushes (queue, ID, PQ distance, last-of-list)
//   qw_*       host writes a query vector, 32 elements per beat
//   hbf_req_*  read requests to the flash; hbf_rsp_* returns the data beats
//              in request order, each beat with the request's tag
//   res_*      results: queue, rank, ID, exact distance, last-of-query
// The PQ distance stored next to each ID is not used by the rerank (it is
// replaced by the exact distance); it is left unconnected on purpose.
module haven_nsu
  import haven_pkg::*;
#(
  parameter int unsigned NQ       = NUM_QUEUES,
  parameter int unsigned DEPTH    = QUEUE_DEPTH,
  parameter int unsigned SN       = SORT_N,
  parameter int unsigned STRIDE_W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration (static while queries are processed)
  input  logic [ADDR_W-1:0]   cfg_base,
  input  logic [STRIDE_W-1:0] cfg_stride,
  input  logic [DIM_W-1:0]    cfg_dim,
  input  logic [BEATS_W-1:0]  cfg_beats,
  input  metric_e             cfg_metric,
  input  logic                cfg_signed,
  input  logic [K_W-1:0]      cfg_k,
  // candidate IDs from the GPU
  input  logic                cand_valid,
  output logic                cand_ready,
  input  logic [QIDX_W-1:0]   cand_queue,
  input  cand_t               cand,
  input  logic                cand_last,
  // query vector write
  input  logic                qw_en,
  input  logic [QIDX_W-1:0]   qw_queue,
  input  logic [$clog2(MAX_BEATS)-1:0] qw_beat,
  input  logic [BEAT_W-1:0]   qw_data,
  // HBF read request / response
  output logic                hbf_req_valid,
  input  logic                hbf_req_ready,
  output hbf_req_t            hbf_req,
  input  logic                hbf_rsp_valid,
  output logic                hbf_rsp_ready,
  input  logic [BEAT_W-1:0]   hbf_rsp_data,
  input  nsu_tag_t            hbf_rsp_tag,
  // results to the GPU
  output logic                res_valid,
  input  logic                res_ready,
  output logic [QIDX_W-1:0]   res_qidx,
  output logic [K_W-1:0]      res_rank,
  output cand_t               res_cand,
  output logic                res_last,
  // status
  output logic [NQ-1:0]       queue_nonempty,
  output logic                sort_pass      // pulse: one 256-point sorter pass starts
);
  localparam int unsigned QI_W = (NQ > 1) ? $clog2(NQ) : 1;

  // ---- rerank queues -------------------------------------------------------
  logic [NQ-1:0] q_push_valid, q_push_ready, q_run_req, q_pop_valid, q_pop_ready, q_pop_last;
  cand_t         q_pop_entry [NQ];

  for (genvar g = 0; g < NQ; g++) begin : g_queue
    logic [$clog2(DEPTH+1)-1:0] cnt;
    assign q_push_valid[g] = cand_valid && (32'(cand_queue) == g);
    rerank_queue #(.DEPTH(DEPTH)) u_queue (
      .clk, .rst_n,
      .push_valid(q_push_valid[g]),
      .push_ready(q_push_ready[g]),
      .push_entry(cand),
      .push_last (cand_last),
      .run_req   (q_run_req[g]),
      .pop_valid (q_pop_valid[g]),
      .pop_ready (q_pop_ready[g]),
      .pop_entry (q_pop_entry[g]),
      .pop_last  (q_pop_last[g]),
      .count     (cnt)
    );
    assign queue_nonempty[g] = cnt != '0;
  end
  assign cand_ready = (32'(cand_queue) < NQ) && q_push_ready[QI_W'(cand_queue)];

  // ---- round-robin queue scheduler ------------------------------------------
  logic            active;
  logic [QI_W-1:0] cur, last_grant;
  logic            pick_found;
  logic [QI_W-1:0] pick;

  always_comb begin
    pick_found = 1'b0;
    pick       = '0;
    for (int i = 1; i <= NQ; i++) begin
      logic [QI_W-1:0] c;
      c = QI_W'((32'(last_grant) + i) % NQ);
      if (!pick_found && q_run_req[c]) begin
        pick_found = 1'b1;
        pick       = QI_W'(c);
      end
    end
  end

  logic     ag_in_valid, ag_in_ready;
  nsu_tag_t ag_in_tag;
  assign ag_in_valid = active && q_pop_valid[cur];
  assign ag_in_tag   = '{qidx: QIDX_W'(cur), last: q_pop_last[cur], id: q_pop_entry[cur].id};
  always_comb begin
    q_pop_ready      = '0;
    q_pop_ready[cur] = active && ag_in_ready && q_pop_valid[cur];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      cur        <= '0;
      last_grant <= QI_W'(NQ - 1);
    end else if (!active) begin
      if (pick_found) begin
        active     <= 1'b1;
        cur        <= pick;
        last_grant <= pick;
      end
    end else if (ag_in_valid && ag_in_ready && ag_in_tag.last) begin
      active <= 1'b0;
    end
  end

  // ---- address generation -----------------------------------------------------
  addr_gen #(.STRIDE_W(STRIDE_W)) u_addr_gen (
    .clk, .rst_n,
    .cfg_base, .cfg_stride, .cfg_beats,
    .in_valid (ag_in_valid),
    .in_ready (ag_in_ready),
    .in_tag   (ag_in_tag),
    .req_valid(hbf_req_valid),
    .req_ready(hbf_req_ready),
    .req      (hbf_req)
  );

  // ---- distance computation --------------------------------------------------
  logic            dc_valid, dc_ready;
  logic [DIST_W-1:0] dc_dist;
  nsu_tag_t        dc_tag;

  dist_comp u_dist_comp (
    .clk, .rst_n,
    .cfg_dim, .cfg_beats, .cfg_metric, .cfg_signed,
    .qw_en, .qw_queue, .qw_beat, .qw_data,
    .d_valid  (hbf_rsp_valid),
    .d_ready  (hbf_rsp_ready),
    .d_data   (hbf_rsp_data),
    .d_tag    (hbf_rsp_tag),
    .out_valid(dc_valid),
    .out_ready(dc_ready),
    .out_dist (dc_dist),
    .out_tag  (dc_tag)
  );

  // ---- top-k -------------------------------------------------------------------
  topk_unit #(.N(SN)) u_topk (
    .clk, .rst_n, .cfg_k,
    .in_valid (dc_valid),
    .in_ready (dc_ready),
    .in_dist  (dc_dist),
    .in_tag   (dc_tag),
    .out_valid(res_valid),
    .out_ready(res_ready),
    .out_qidx (res_qidx),
    .out_rank (res_rank),
    .out_cand (res_cand),
    .out_last (res_last),
    .merge_start(sort_pass)
  );

endmodule
