// dist_comp: distance computation module of the near-storage search unit. It
// computes the exact distance between a query and each full-precision vector
// streamed back from the HBF stack, using NUM_MACS (32) multiply-accumulate
// lanes as in the paper.
//
// Data arrive as 256-bit beats of 32 elements; a vector of cfg_dim elements
// takes cfg_beats = ceil(cfg_dim/32) beats. Lanes whose element index is at
// or beyond cfg_dim are masked to zero, so the tail of the last beat may hold
// anything. Each beat carries the tag of its read (queue index, last-of-query
// flag, vector ID); the tag of the vector's last beat is passed on with the
// distance.
//
// The query vectors live in a small buffer inside this module, one per rerank
// queue (NUM_QUEUES x MAX_BEATS beats), written by the host through qw_*
// before that query's candidates are processed. The paper does not describe
// where the query is held; the per-queue buffer is this design's choice.
//
// Metrics (cfg_metric): METRIC_L2 gives sum (x_i - q_i)^2; METRIC_IP gives
// 2^31 - sum x_i q_i, so that for both a smaller number is a better match.
// cfg_signed selects signed (int8) or unsigned (uint8) elements.
//
// Timing: two register stages. Stage 1 registers the 32 lane products of a
// beat, stage 2 adds them in an adder tree into the accumulator. A beat is
// accepted every cycle (one vector every cfg_beats cycles); the distance of
// a vector appears on out_* two cycles after its last beat was accepted. The
// pipeline holds (d_ready low) while a result waits on out_ready.
module dist_comp
  import haven_pkg::*;
#(
  parameter int unsigned LANES = NUM_MACS
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic [DIM_W-1:0]    cfg_dim,
  input  logic [BEATS_W-1:0]  cfg_beats,
  input  metric_e             cfg_metric,
  input  logic                cfg_signed,
  // query buffer write port
  input  logic                qw_en,
  input  logic [QIDX_W-1:0]   qw_queue,
  input  logic [$clog2(MAX_BEATS)-1:0] qw_beat,
  input  logic [LANES*ELEM_W-1:0] qw_data,
  // raw vector data from the HBF stack
  input  logic                d_valid,
  output logic                d_ready,
  input  logic [LANES*ELEM_W-1:0] d_data,
  input  nsu_tag_t            d_tag,
  // exact distance out
  output logic                out_valid,
  input  logic                out_ready,
  output logic [DIST_W-1:0]   out_dist,
  output nsu_tag_t            out_tag
);
  localparam int unsigned BI_W = $clog2(MAX_BEATS);

  logic [LANES*ELEM_W-1:0] qmem [NUM_QUEUES][MAX_BEATS];

  always_ff @(posedge clk) begin
    if (qw_en) qmem[qw_queue][qw_beat] <= qw_data;
  end

  logic en;
  assign en      = !out_valid || out_ready;
  assign d_ready = en;

  // beat counter within the current vector
  logic [BEATS_W-1:0] beat;
  logic               beat_last;
  assign beat_last = (beat == cfg_beats - 1'b1);

  // ---- stage 1: lane products ----------------------------------------------
  logic [LANES*ELEM_W-1:0] qword;
  assign qword = qmem[d_tag.qidx][BI_W'(beat)];

  logic signed [31:0] prod [LANES];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ELEM_W:0]   xe, qe;
      logic signed [ELEM_W+1:0] df;
      logic [ELEM_W-1:0]        xr, qr;
      xr = d_data[l*ELEM_W +: ELEM_W];
      qr = qword[l*ELEM_W +: ELEM_W];
      xe = cfg_signed ? {xr[ELEM_W-1], xr} : {1'b0, xr};
      qe = cfg_signed ? {qr[ELEM_W-1], qr} : {1'b0, qr};
      df = xe - qe;
      if ((32'(beat) * LANES + l) >= 32'(cfg_dim))
        prod[l] = '0;
      else if (cfg_metric == METRIC_L2)
        prod[l] = 32'(df * df);
      else
        prod[l] = 32'(xe * qe);
    end
  end

  logic               s1_valid, s1_first, s1_last;
  logic signed [31:0] s1_prod [LANES];
  nsu_tag_t           s1_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat     <= '0;
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_tag   <= '0;
      for (int l = 0; l < LANES; l++) s1_prod[l] <= '0;
    end else if (en) begin
      s1_valid <= d_valid;
      if (d_valid) begin
        beat     <= beat_last ? '0 : beat + 1'b1;
        s1_first <= (beat == '0);
        s1_last  <= beat_last;
        s1_tag   <= d_tag;
        for (int l = 0; l < LANES; l++) s1_prod[l] <= prod[l];
      end
    end
  end

  // ---- stage 2: adder tree and accumulator -----------------------------------
  logic signed [31:0] beat_sum, acc, acc_next;
  always_comb begin
    beat_sum = '0;
    for (int l = 0; l < LANES; l++) beat_sum += s1_prod[l];
    acc_next = (s1_first ? 32'sd0 : acc) + beat_sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_dist  <= '0;
      out_tag   <= '0;
    end else if (en) begin
      out_valid <= 1'b0;
      if (s1_valid) begin
        acc <= acc_next;
        if (s1_last) begin
          out_valid <= 1'b1;
          out_tag   <= s1_tag;
          out_dist  <= (cfg_metric == METRIC_L2) ? DIST_W'(acc_next)
                                                 : IP_OFFSET - DIST_W'(acc_next);
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_dist) && $stable(out_tag));

endmodule
