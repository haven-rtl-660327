// haven_pkg: sizes, stream types and the result-order encoding shared by the
// near-storage search unit (NSU). The NSU sits on the logic base die of a
// High-Bandwidth Flash (HBF) stack and reranks IVF-PQ candidates against the
// full-precision vectors held in the flash.
//
// Numbers that come from the paper: 32 rerank queues, 1,024 entries of a
// 32-bit ID plus a 32-bit distance per queue (8 KB), 32 multiply-accumulators,
// a 256-point bitonic sorter, recall measured at k = 100.
// Everything else here (address width, element width, the tag that travels
// with a read, the metric encoding) is this design's own choice.
package haven_pkg;

  // ---- paper numbers -------------------------------------------------------
  localparam int unsigned NUM_QUEUES  = 32;    // "32x Rerank Queues"
  localparam int unsigned QUEUE_DEPTH = 1024;  // "up to 1,024 32-bit IDs"
  localparam int unsigned ID_W        = 32;    // "32-bit IDs"
  localparam int unsigned DIST_W      = 32;    // distance stored next to each ID
  localparam int unsigned NUM_MACS    = 32;    // "32 multiply-accumulators"
  localparam int unsigned SORT_N      = 256;   // "256-point" bitonic sorter

  // ---- design choices ------------------------------------------------------
  localparam int unsigned QIDX_W   = $clog2(NUM_QUEUES);
  localparam int unsigned ELEM_W   = 8;        // 8-bit vector elements (BIGANN/SPACEV)
  localparam int unsigned ADDR_W   = 40;       // byte address, covers 1 TB
  localparam int unsigned MAX_DIM  = 768;      // largest dimension evaluated (Wiki-88M)
  localparam int unsigned BEAT_W   = NUM_MACS * ELEM_W;   // 256-bit read data beat
  localparam int unsigned MAX_BEATS = (MAX_DIM + NUM_MACS - 1) / NUM_MACS;  // 24
  localparam int unsigned BEATS_W  = $clog2(MAX_BEATS + 1);
  localparam int unsigned DIM_W    = $clog2(MAX_DIM + 1);
  localparam int unsigned TOPK_MAX = SORT_N / 2;          // 128 kept per query
  localparam int unsigned K_W      = $clog2(TOPK_MAX + 1);

  // distance metric selected by the host
  typedef enum logic {
    METRIC_L2 = 1'b0,   // squared Euclidean distance
    METRIC_IP = 1'b1    // inner product, reported as 2^31 - <q,x>
  } metric_e;

  // what travels with a flash read so the returned data can be matched up
  typedef struct packed {
    logic [QIDX_W-1:0] qidx;   // rerank queue (= query) the candidate belongs to
    logic              last;   // last candidate of that query
    logic [ID_W-1:0]   id;     // vector ID
  } nsu_tag_t;

  // a read request to the HBF stack
  typedef struct packed {
    logic [ADDR_W-1:0]  addr;  // byte address of the raw vector
    logic [BEATS_W-1:0] beats; // number of BEAT_W-bit beats to return
    nsu_tag_t           tag;
  } hbf_req_t;

  // one reranked candidate
  typedef struct packed {
    logic [DIST_W-1:0] distance;
    logic [ID_W-1:0]   id;
  } cand_t;

  localparam logic [DIST_W-1:0] IP_OFFSET = DIST_W'(1) << (DIST_W - 1);

endpackage
