// pcn_gravnet: graph processing element (GPE) for a GraVNetConv layer.
//
// It builds the k-nearest-neighbour graph of an event on the fly and passes messages over
// it, in one module:
//   1. Receive: the three input streams (learned coordinates S, features F to be sent as
//      messages, and features P passed straight to the output) are written into a
//      receive bank, PAR points per beat, ceil(NMAX/PAR) beats per event.
//   2. Ping-pong hand-over: when the last beat of an event has arrived, the whole event is
//      copied into the processing bank, and the receive bank is free for the next event.
//      The feature banks get a second, delayed copy so that the gather step, which runs a
//      few cycles behind the distance step, still sees the old event while the next one
//      is already in the distance step.
//   3. Per cycle PAR query points run through: ANN distances to all points (pcn_ann),
//      hierarchical Top-K (pcn_topk), exp(-d) weights (pcn_exp_weight) together with the
//      gather of the K neighbour feature vectors, and mult / max reduce / sum reduce
//      (pcn_aggregate).
//   4. Combine: the output point is {P, max-aggregate, sum-aggregate}, 3*D_F features.
// Only the first in_ctrl.nodes points of an event are neighbours; every point (padding
// rows included) produces an output row. A point is its own nearest neighbour.
//
// Timing: the element never stalls; it takes one beat per cycle and events may follow
// each other back to back, so the initiation interval is ceil(NMAX/PAR) cycles per event.
// The first output beat of an event leaves 7 + clog2(ceil(NMAX/K)) cycles after the
// event's last input beat; output beats of an event are consecutive. The three input
// streams must be beat-aligned. Requires ceil(NMAX/PAR) > 2 + clog2(ceil(NMAX/K)).
// The sequence of operators follows the paper's figure; banks as registers, the exact
// pipeline cut and number formats are this design's choice.
module pcn_gravnet
  import pcn_pkg::*;
#(
  parameter int NMAX   = 32,
  parameter int PAR    = 2,
  parameter int DATA_W = 8,
  parameter int D_S    = 6,
  parameter int D_F    = 8,
  parameter int K      = 8,
  localparam int D_OUT = 3 * D_F
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  ctrl_t                    in_ctrl,
  input  logic signed [DATA_W-1:0] s_data   [PAR][D_S],
  input  logic signed [DATA_W-1:0] f_data   [PAR][D_F],
  input  logic signed [DATA_W-1:0] p_data   [PAR][D_F],
  output ctrl_t                    out_ctrl,
  output logic signed [DATA_W-1:0] out_data [PAR][D_OUT]
);
  localparam int BEATS  = (NMAX + PAR - 1) / PAR;
  localparam int NROW   = BEATS * PAR;
  localparam int BW     = (BEATS > 1) ? $clog2(BEATS) : 1;
  localparam int DIST_W = 2 * DATA_W + $clog2(D_S) + 1;
  localparam int NG0    = (NMAX + K - 1) / K;
  localparam int L      = (NG0 > 1) ? $clog2(NG0) : 0;
  localparam int IW     = ((1 << L) * K > 1) ? $clog2((1 << L) * K) : 1;
  localparam int G      = 2 + L;      // issue -> gather offset
  localparam int PIPE   = 6 + L;      // issue -> output register

  typedef logic signed [DATA_W-1:0] s_row_t [D_S];
  typedef logic signed [DATA_W-1:0] f_row_t [D_F];

  // ---------------------------------------------------------------- receive
  s_row_t rx_s [NROW];
  f_row_t rx_f [NROW];
  f_row_t rx_p [NROW];
  s_row_t rx_s_nx [NROW];
  f_row_t rx_f_nx [NROW];
  f_row_t rx_p_nx [NROW];
  logic [BW-1:0] rx_beat;
  logic          handover;

  assign handover = in_ctrl.valid && (rx_beat == BW'(BEATS - 1));

  always_comb begin
    rx_s_nx = rx_s;
    rx_f_nx = rx_f;
    rx_p_nx = rx_p;
    if (in_ctrl.valid) begin
      for (int l = 0; l < PAR; l++) begin
        rx_s_nx[int'(rx_beat)*PAR + l] = s_data[l];
        rx_f_nx[int'(rx_beat)*PAR + l] = f_data[l];
        rx_p_nx[int'(rx_beat)*PAR + l] = p_data[l];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rx_beat <= '0;
    else if (in_ctrl.valid) rx_beat <= handover ? '0 : rx_beat + 1'b1;
  end

  always_ff @(posedge clk) begin
    rx_s <= rx_s_nx;
    rx_f <= rx_f_nx;
    rx_p <= rx_p_nx;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   in_ctrl.valid |-> (in_ctrl.last == (rx_beat == BW'(BEATS - 1))))
    else $error("pcn_gravnet: last flag does not match the event length");

  // ---------------------------------------------------------------- processing banks
  s_row_t pr_s  [NROW];        // read by the distance step
  f_row_t pr_f1 [NROW];        // first copy of the feature banks
  f_row_t pr_p1 [NROW];
  f_row_t pr_f2 [NROW];        // delayed copy, read by the gather step
  f_row_t pr_p2 [NROW];
  logic [G-1:0] ho_dly;        // hand-over pulse delayed for the second copy
  nodes_t       pr_nodes;
  logic         issuing;
  logic [BW-1:0] iss_beat;

  always_ff @(posedge clk) begin
    if (handover) begin
      pr_s  <= rx_s_nx;
      pr_f1 <= rx_f_nx;
      pr_p1 <= rx_p_nx;
    end
    if (ho_dly[G-1]) begin
      pr_f2 <= pr_f1;
      pr_p2 <= pr_p1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ho_dly   <= '0;
      issuing  <= 1'b0;
      iss_beat <= '0;
      pr_nodes <= '0;
    end else begin
      ho_dly <= {ho_dly[G-2:0], handover};
      if (handover) begin
        issuing  <= 1'b1;
        iss_beat <= '0;
        pr_nodes <= in_ctrl.nodes;
      end else if (issuing) begin
        if (iss_beat == BW'(BEATS - 1)) issuing <= 1'b0;
        iss_beat <= iss_beat + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) handover |-> (!issuing || iss_beat == BW'(BEATS - 1)))
    else $error("pcn_gravnet: hand-over while the previous event is still being issued");

  // ---------------------------------------------------------------- control pipeline
  typedef struct packed {
    ctrl_t         ctrl;
    logic [BW-1:0] beat;
  } tag_t;

  tag_t tag [PIPE+1];
  always_comb begin
    tag[0].ctrl.valid = issuing;
    tag[0].ctrl.last  = issuing && (iss_beat == BW'(BEATS - 1));
    tag[0].ctrl.nodes = pr_nodes;
    tag[0].beat       = iss_beat;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i <= PIPE; i++) tag[i] <= '0;
    end else begin
      for (int i = 1; i <= PIPE; i++) tag[i] <= tag[i-1];
    end
  end

  // ---------------------------------------------------------------- ANN
  logic signed [DATA_W-1:0] query [PAR][D_S];
  logic signed [DATA_W-1:0] pts   [NMAX][D_S];
  logic [DIST_W-1:0]        dists [PAR][NMAX];
  logic                     ann_valid;

  always_comb begin
    for (int l = 0; l < PAR; l++) query[l] = pr_s[int'(iss_beat)*PAR + l];
    for (int j = 0; j < NMAX; j++) pts[j] = pr_s[j];
  end

  pcn_ann #(.NMAX(NMAX), .PAR(PAR), .D(D_S), .DATA_W(DATA_W)) u_ann (
    .clk, .rst_n, .in_valid(issuing), .query, .pts,
    .out_valid(ann_valid), .dists);

  // ---------------------------------------------------------------- per lane
  logic [NMAX-1:0] nbr_mask;
  always_comb
    for (int j = 0; j < NMAX; j++) nbr_mask[j] = (nodes_t'(j) < tag[1].ctrl.nodes);

  logic signed [DATA_W-1:0] agg_max [PAR][D_F];
  logic signed [DATA_W-1:0] agg_sum [PAR][D_F];
  f_row_t                   self_q  [PAR][3];   // P of the query, t = G+1 .. G+3

  for (genvar l = 0; l < PAR; l++) begin : g_lane
    logic              tk_valid;
    logic [IW-1:0]     nbr_idx  [K];
    logic [DIST_W-1:0] nbr_dist [K];
    logic [K-1:0]      nbr_ok;
    logic              ew_valid;
    logic [7:0]        weight [K];
    logic signed [DATA_W-1:0] gath [K][D_F];
    logic [K-1:0]      ok_q;
    logic              ag_valid;

    pcn_topk #(.NMAX(NMAX), .K(K), .DIST_W(DIST_W)) u_topk (
      .clk, .rst_n, .in_valid(ann_valid), .dist_row(dists[l]), .mask(nbr_mask),
      .out_valid(tk_valid), .nbr_idx, .nbr_dist, .nbr_ok);

    pcn_exp_weight #(.N_IN(K), .DIST_W(DIST_W), .FRAC(DATA_W / 2)) u_exp (
      .clk, .rst_n, .in_valid(tk_valid), .d(nbr_dist), .ok(nbr_ok),
      .out_valid(ew_valid), .weight);

    // Gather of the neighbour features from the delayed feature bank, aligned with -exp.
    always_ff @(posedge clk) begin
      for (int k = 0; k < K; k++) gath[k] <= pr_f2[int'(nbr_idx[k]) % NROW];
      ok_q <= nbr_ok;
      self_q[l][0] <= pr_p2[int'(tag[G].beat)*PAR + l];
      self_q[l][1] <= self_q[l][0];
      self_q[l][2] <= self_q[l][1];
    end

    pcn_aggregate #(.K(K), .D_F(D_F), .DATA_W(DATA_W)) u_agg (
      .clk, .rst_n, .in_valid(ew_valid), .weight, .feat(gath), .ok(ok_q),
      .out_valid(ag_valid), .max_out(agg_max[l]), .sum_out(agg_sum[l]));
  end

  // ---------------------------------------------------------------- combine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_ctrl <= '0;
      out_data <= '{default: '0};
    end else begin
      out_ctrl <= tag[PIPE-1].ctrl;
      for (int l = 0; l < PAR; l++) begin
        for (int f = 0; f < D_F; f++) begin
          out_data[l][f]         <= self_q[l][2][f];
          out_data[l][D_F + f]   <= agg_max[l][f];
          out_data[l][2*D_F + f] <= agg_sum[l][f];
        end
      end
    end
  end

endmodule
