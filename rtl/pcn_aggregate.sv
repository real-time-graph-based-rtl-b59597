// pcn_aggregate: message passing of GraVNetConv for one query point
// ("mult", "multicast", "max reduce" and "sum reduce").
//
// The feature vectors of the K nearest neighbours are each multiplied by their edge weight
// (mult); the weighted messages are forked (multicast) into an element-wise maximum over
// the neighbours (max reduce) and an element-wise sum over the neighbours (sum reduce).
// Neighbour slots marked absent (ok = 0) take no part; with no neighbour at all both
// results are 0.
//
// Arithmetic: weight is an unsigned 8-bit fraction (255 = 1.0), so message =
// (w * f) >>> 8 keeps the feature format; the sum saturates to DATA_W bits.
// Timing: two cycles latency (messages registered, reductions registered), one query per
// cycle. The block structure follows the paper's figure; formats are this design's choice.
module pcn_aggregate #(
  parameter int K      = 8,
  parameter int D_F    = 8,
  parameter int DATA_W = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [7:0]               weight  [K],
  input  logic signed [DATA_W-1:0] feat    [K][D_F],
  input  logic [K-1:0]             ok,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] max_out [D_F],
  output logic signed [DATA_W-1:0] sum_out [D_F]
);
  localparam int SUM_W = DATA_W + $clog2(K) + 1;
  localparam logic signed [SUM_W-1:0] SMAX = SUM_W'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [SUM_W-1:0] SMIN = -SUM_W'(1 << (DATA_W - 1));

  // Stage 1: mult.
  logic signed [DATA_W-1:0] msg_q [K][D_F];
  logic [K-1:0]             ok_q;
  logic                     vld_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      msg_q <= '{default: '0};
      ok_q  <= '0;
      vld_q <= 1'b0;
    end else begin
      for (int k = 0; k < K; k++)
        for (int f = 0; f < D_F; f++)
          msg_q[k][f] <= DATA_W'((DATA_W+9)'(feat[k][f]) * (DATA_W+9)'($signed({1'b0, weight[k]})) >>> 8);
      ok_q  <= ok;
      vld_q <= in_valid;
    end
  end

  // Stage 2: max reduce and sum reduce.
  logic signed [DATA_W-1:0] max_d [D_F];
  logic signed [DATA_W-1:0] sum_d [D_F];

  always_comb begin
    for (int f = 0; f < D_F; f++) begin
      logic signed [SUM_W-1:0] s;
      logic signed [DATA_W-1:0] m;
      logic any;
      s   = '0;
      m   = '0;
      any = 1'b0;
      for (int k = 0; k < K; k++) begin
        if (ok_q[k]) begin
          s = s + SUM_W'(msg_q[k][f]);
          if (!any || msg_q[k][f] > m) m = msg_q[k][f];
          any = 1'b1;
        end
      end
      max_d[f] = m;
      if (s > SMAX)      sum_d[f] = DATA_W'(SMAX);
      else if (s < SMIN) sum_d[f] = DATA_W'(SMIN);
      else               sum_d[f] = DATA_W'(s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_out   <= '{default: '0};
      sum_out   <= '{default: '0};
      out_valid <= 1'b0;
    end else begin
      max_out   <= max_d;
      sum_out   <= sum_d;
      out_valid <= vld_q;
    end
  end

endmodule
