// pcn_topk: hierarchical Top-K selection of nearest neighbours.
//
// Given one row of the distance matrix (the distances of one query point to all NMAX
// points of the event) and a mask of the points that exist (index < N), it returns the K
// nearest existing points, sorted by increasing distance, ties broken by the lower index.
// The selection is hierarchical: the row is cut into groups of K that are each sorted
// (level 0), then pairs of sorted K-lists are merged, keeping only the K best, until one
// list is left (log2 of the group count levels). Every level is a rank sort: an element's
// output slot is the number of elements with a smaller key {absent, distance, index}.
// Each level is registered, so a new row is accepted every cycle.
//
// Timing: latency 1 + clog2(ceil(NMAX/K)) cycles. If fewer than K points exist, the
// missing slots are marked with ok = 0. The paper names a hierarchical Top-K; group size,
// merge structure and tie rule are this design's choice.
module pcn_topk #(
  parameter int NMAX   = 32,
  parameter int K      = 8,
  parameter int DIST_W = 19,
  localparam int NG0   = (NMAX + K - 1) / K,
  localparam int LEVELS = (NG0 > 1) ? $clog2(NG0) : 0,
  localparam int NG    = 1 << LEVELS,
  localparam int IW    = (NG * K > 1) ? $clog2(NG * K) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [DIST_W-1:0] dist_row    [NMAX],
  input  logic [NMAX-1:0]   mask,
  output logic              out_valid,
  output logic [IW-1:0]     nbr_idx [K],
  output logic [DIST_W-1:0] nbr_dist[K],
  output logic [K-1:0]      nbr_ok
);
  localparam int KW = 1 + DIST_W + IW;  // {absent, distance, index}

  typedef logic [KW-1:0] key_t;

  // K smallest of M unique keys, sorted ascending (rank sort).
  function automatic void rank_select(input key_t in [2*K], input int m, output key_t out [K]);
    for (int r = 0; r < K; r++) out[r] = '0;
    for (int s = 0; s < m; s++) begin
      int rank;
      rank = 0;
      for (int j = 0; j < m; j++) if (in[j] < in[s]) rank++;
      for (int r = 0; r < K; r++) if (rank == r) out[r] = in[s];
    end
  endfunction

  // Level 0 keys.
  key_t keys [NG*K];
  always_comb begin
    for (int j = 0; j < NG * K; j++) begin
      if (j < NMAX) keys[j] = {~mask[j], dist_row[j], IW'(j)};
      else          keys[j] = {1'b1, {DIST_W{1'b1}}, IW'(j)};
    end
  end

  for (genvar lv = 0; lv <= LEVELS; lv++) begin : g_level
    localparam int NL = NG >> lv;   // lists at this level
    key_t lst [NL][K];
    logic vld;

    if (lv == 0) begin : g_sort
      key_t nxt [NL][K];
      always_comb begin
        for (int g = 0; g < NL; g++) begin
          key_t tmp [2*K];
          for (int i = 0; i < 2 * K; i++) tmp[i] = (i < K) ? keys[g*K+i] : '0;
          rank_select(tmp, K, nxt[g]);
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          vld <= 1'b0;
          lst <= '{default: '0};
        end else begin
          vld <= in_valid;
          lst <= nxt;
        end
      end
    end else begin : g_merge
      key_t nxt [NL][K];
      always_comb begin
        for (int g = 0; g < NL; g++) begin
          key_t tmp [2*K];
          for (int i = 0; i < K; i++) begin
            tmp[i]     = g_level[lv-1].lst[2*g][i];
            tmp[K + i] = g_level[lv-1].lst[2*g+1][i];
          end
          rank_select(tmp, 2 * K, nxt[g]);
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          vld <= 1'b0;
          lst <= '{default: '0};
        end else begin
          vld <= g_level[lv-1].vld;
          lst <= nxt;
        end
      end
    end
  end

  assign out_valid = g_level[LEVELS].vld;
  always_comb begin
    for (int r = 0; r < K; r++) begin
      nbr_ok[r]   = ~g_level[LEVELS].lst[0][r][KW-1];
      nbr_dist[r] = g_level[LEVELS].lst[0][r][IW +: DIST_W];
      nbr_idx[r]  = g_level[LEVELS].lst[0][r][IW-1:0];
    end
  end

endmodule
