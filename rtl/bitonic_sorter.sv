// bitonic_sorter: fully parallel, pipelined bitonic sorting network, 256
// points by default as in the paper's top-k unit ("implemented with a
// parallel Bitonic sorter", 256-point). It sorts N = 2^n elements into
// ascending order of their KEY_W-bit key (the low bits of each element are a
// payload that travels with the key and does not take part in the compare).
//
// Structure (Batcher's bitonic sort): n merge phases; phase p (p = 0..n-1)
// has p+1 compare-exchange stages with partner distance 2^p, 2^(p-1), .., 1.
// In every stage element i is compared with element i ^ d; the pair is put in
// ascending order when bit p+1 of i is 0 and in descending order otherwise.
// That gives n(n+1)/2 stages of N/2 compare-exchange units each: 36 stages and
// 4,608 comparators for N = 256.
//
// Timing (this design's choice; the paper gives no pipeline depth): a register
// follows every stage, so the network accepts a new set of N elements every
// cycle and out_data/out_valid follow in_data/in_valid after LATENCY =
// n(n+1)/2 cycles. There is no back-pressure.
module bitonic_sorter #(
  parameter int unsigned N     = 256,
  parameter int unsigned KEY_W = 33,
  parameter int unsigned PAY_W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [KEY_W+PAY_W-1:0] in_data  [N],
  output logic                   out_valid,
  output logic [KEY_W+PAY_W-1:0] out_data [N]
);
  localparam int unsigned LOGN    = $clog2(N);
  localparam int unsigned LATENCY = LOGN * (LOGN + 1) / 2;
  localparam int unsigned W       = KEY_W + PAY_W;

  logic [W-1:0] stg   [LATENCY+1][N];
  logic         vld   [LATENCY+1];

  assign stg[0] = in_data;
  assign vld[0] = in_valid;

  for (genvar p = 0; p < LOGN; p++) begin : g_phase
    for (genvar q = 0; q <= p; q++) begin : g_stage
      localparam int unsigned S = p * (p + 1) / 2 + q;   // stage index
      localparam int unsigned D = 1 << (p - q);          // partner distance
      logic [W-1:0] nxt [N];
      for (genvar i = 0; i < N; i++) begin : g_elem
        if ((i & D) == 0) begin : g_cx
          localparam bit DESC = ((i >> (p + 1)) & 1) == 1;
          logic swap;
          assign swap = DESC ? (stg[S][i][W-1 -: KEY_W] < stg[S][i+D][W-1 -: KEY_W])
                             : (stg[S][i][W-1 -: KEY_W] > stg[S][i+D][W-1 -: KEY_W]);
          assign nxt[i]   = swap ? stg[S][i+D] : stg[S][i];
          assign nxt[i+D] = swap ? stg[S][i]   : stg[S][i+D];
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) vld[S+1] <= 1'b0;
        else        vld[S+1] <= vld[S];
      end
      always_ff @(posedge clk) begin
        if (vld[S]) stg[S+1] <= nxt;
      end
    end
  end

  assign out_data  = stg[LATENCY];
  assign out_valid = vld[LATENCY];

endmodule
