// topk_unit: top-k selection of the near-storage search unit. It receives the
// exact distances of one query's candidates from the distance computation
// module and returns the cfg_k best (smallest distance) in ascending order.
//
// How it works: the unit keeps a running list of the K_MAX = SORT_N/2 (128)
// best candidates so far and gathers incoming candidates in a second list of
// K_MAX. When that list is full, or the query's last candidate has arrived,
// both lists (SORT_N = 256 elements, the paper's 256-point bitonic sorter)
// go through the sorter and the lower half becomes the new running list.
// Unused slots are padded with an "invalid" flag placed above the distance in
// the sort key, so padding always sorts last. After the merge that follows the
// last candidate, the first min(cfg_k, candidates) entries are streamed out,
// one per cycle, with their rank, and the running list is cleared for the
// next query. The paper evaluates recall at k = 100, which fits K_MAX.
//
// The paper states only that the unit uses a parallel bitonic sorter; the
// merge-with-running-list scheme, the K_MAX = SORT_N/2 choice and the
// handshakes are this design's.
//
// Timing: in_ready is high while gathering. A merge takes 1 + LATENCY cycles
// (LATENCY = 36 for 256 points) during which in_ready is low; results then
// leave at one per cycle under out_valid/out_ready. Queries are handled one
// after another, in the order their candidates arrive. cfg_k must be 1..K_MAX.
module topk_unit
  import haven_pkg::*;
#(
  parameter int unsigned N = SORT_N
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [K_W-1:0]      cfg_k,
  // exact distances from the distance computation module
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [DIST_W-1:0]   in_dist,
  input  nsu_tag_t            in_tag,
  // results
  output logic                out_valid,
  input  logic                out_ready,
  output logic [QIDX_W-1:0]   out_qidx,
  output logic [K_W-1:0]      out_rank,
  output cand_t               out_cand,
  output logic                out_last,
  // one-cycle pulse per sorter pass
  output logic                merge_start
);
  localparam int unsigned K     = N / 2;
  localparam int unsigned KEY_W = DIST_W + 1;
  localparam int unsigned IDX_W = $clog2(N);
  localparam int unsigned W     = KEY_W + IDX_W;
  localparam int unsigned CNT_W = $clog2(K + 1);
  localparam int unsigned RNK_W = $clog2(K);

  typedef struct packed {
    logic              invalid;   // padding flag, most significant part of the key
    logic [DIST_W-1:0] distance;
    logic [ID_W-1:0]   id;
  } slot_t;

  localparam slot_t PAD = '{invalid: 1'b1, distance: '1, id: '0};

  typedef enum logic [1:0] {S_COLLECT, S_MERGE, S_WAIT, S_OUTPUT} state_e;
  state_e state;

  slot_t              best   [K];
  slot_t              fresh  [K];
  logic [CNT_W-1:0]   nfresh;
  logic               final_merge;
  logic [QIDX_W-1:0]  qidx_r;
  logic [RNK_W-1:0]   rank;

  // ---- sorter ------------------------------------------------------------
  logic         s_in_valid, s_out_valid;
  logic [W-1:0] s_in  [N];
  logic [W-1:0] s_out [N];

  // The sorter carries the key and the slot number (0..N-1) of each element
  // rather than its 32-bit ID; the IDs are picked up again from the slots
  // after the pass. This keeps the 256-point network KEY_W + 8 bits wide.
  always_comb begin
    for (int j = 0; j < K; j++) begin
      slot_t f;
      f = (j < int'(nfresh)) ? fresh[j] : PAD;
      s_in[j]     = {best[j].invalid, best[j].distance, IDX_W'(j)};
      s_in[K + j] = {f.invalid, f.distance, IDX_W'(K + j)};
    end
  end
  assign s_in_valid  = (state == S_MERGE);
  assign merge_start = s_in_valid;

  bitonic_sorter #(.N(N), .KEY_W(KEY_W), .PAY_W(IDX_W)) u_sorter (
    .clk, .rst_n,
    .in_valid (s_in_valid),
    .in_data  (s_in),
    .out_valid(s_out_valid),
    .out_data (s_out)
  );

  // ---- control -------------------------------------------------------------
  logic accept;
  assign in_ready = (state == S_COLLECT);
  assign accept   = in_valid && in_ready;

  logic more_after;
  assign more_after = (32'(rank) + 1 < 32'(cfg_k)) && (32'(rank) + 1 < K)
                      && !best[(32'(rank) + 1) % K].invalid;

  assign out_valid = (state == S_OUTPUT);
  assign out_qidx  = qidx_r;
  assign out_rank  = K_W'(rank);
  assign out_cand  = '{distance: best[rank].distance, id: best[rank].id};
  assign out_last  = !more_after;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_COLLECT;
      nfresh      <= '0;
      final_merge <= 1'b0;
      qidx_r      <= '0;
      rank        <= '0;
      for (int j = 0; j < K; j++) begin
        best[j]  <= PAD;
        fresh[j] <= PAD;
      end
    end else begin
      unique case (state)
        S_COLLECT: if (accept) begin
          fresh[nfresh[RNK_W-1:0]] <= '{invalid: 1'b0, distance: in_dist, id: in_tag.id};
          nfresh <= nfresh + 1'b1;
          qidx_r <= in_tag.qidx;
          if (in_tag.last || nfresh == CNT_W'(K - 1)) begin
            state       <= S_MERGE;
            final_merge <= in_tag.last;
          end
        end
        S_MERGE: state <= S_WAIT;
        S_WAIT: if (s_out_valid) begin
          for (int j = 0; j < K; j++) begin
            logic [IDX_W-1:0] src;
            src = s_out[j][IDX_W-1:0];
            best[j] <= (src < IDX_W'(K)) ? best[src[IDX_W-2:0]]
                                         : ((src[IDX_W-2:0] < RNK_W'(nfresh)) || nfresh == CNT_W'(K)) ? fresh[src[IDX_W-2:0]] : PAD;
          end
          nfresh <= '0;
          rank   <= '0;
          state  <= final_merge ? S_OUTPUT : S_COLLECT;
        end
        S_OUTPUT: if (out_ready) begin
          if (out_last) begin
            for (int j = 0; j < K; j++) best[j] <= PAD;
            state <= S_COLLECT;
          end else begin
            rank <= rank + 1'b1;
          end
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  a_k_range: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> (cfg_k != '0) && (32'(cfg_k) <= K));

endmodule
