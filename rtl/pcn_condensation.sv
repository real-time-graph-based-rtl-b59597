// pcn_condensation: graph processing element (GPE) for condensation point selection.
//
// It clusters the points of an event in the network's learned clustering space, the way
// object condensation does at inference time. Each input point carries D_O output-layer
// features; feature 0 is taken as the condensation strength beta and features
// 1..CC_DIM as the clustering coordinates. Four stages, each ceil(NMAX/PAR) cycles long,
// run on four consecutive events at once:
//   receive    the event is written into a receive bank, PAR points per beat;
//   analyse    ANN (pcn_ann) computes PAR rows of the distance matrix per cycle and
//              Isolation Selection turns them into rows of the isolation matrix
//              (adj[i][j] = both points exist and squared distance < cfg_t_d2);
//              at the same time Candidate Selection (beta > cfg_t_beta, point exists) and
//              the Sort by beta (pcn_rank_sort) run;
//   select     Cluster Selection (pcn_cluster_select) picks the seeds greedily;
//   emit       every point leaves with its features unchanged plus is_cp (it is a
//              condensation point), assigned (it belongs to a cluster) and cid (index of
//              its condensation point within the event).
// The features wait in a FIFO (pcn_stream_fifo) from receive to emit.
//
// Timing: stall-free, one beat per cycle, initiation interval ceil(NMAX/PAR) cycles per
// event; the first output beat of an event appears 2*ceil(NMAX/PAR) + 3 cycles after its
// last input beat. The structure follows the paper's figure; which output features are
// beta and coordinates, the thresholds and the greedy rule's details are this design's
// choice. The two thresholds are configuration inputs (t_beta and t_d of object
// condensation) that must be held constant while events are in flight.
module pcn_condensation
  import pcn_pkg::*;
#(
  parameter int NMAX   = 32,
  parameter int PAR    = 2,
  parameter int DATA_W = 8,
  parameter int D_O    = 9,
  parameter int CC_DIM = 2,
  localparam int IDW   = (NMAX > 1) ? $clog2(NMAX) : 1,
  localparam int DIST_W = 2 * DATA_W + $clog2(CC_DIM) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] cfg_t_beta,   // candidate threshold on beta
  input  logic [DIST_W-1:0]        cfg_t_d2,     // isolation threshold, squared distance
  input  ctrl_t                    in_ctrl,
  input  logic signed [DATA_W-1:0] in_data      [PAR][D_O],
  output ctrl_t                    out_ctrl,
  output logic signed [DATA_W-1:0] out_data     [PAR][D_O],
  output logic [PAR-1:0]           out_is_cp,
  output logic [PAR-1:0]           out_assigned,
  output logic [IDW-1:0]           out_cid      [PAR],
  output logic                     fifo_overflow
);
  localparam int BEATS  = (NMAX + PAR - 1) / PAR;
  localparam int NROW   = BEATS * PAR;
  localparam int BW     = (BEATS > 1) ? $clog2(BEATS) : 1;
  localparam int CW     = $bits(ctrl_t);
  localparam int FW     = CW + PAR * D_O * DATA_W;

  typedef logic signed [DATA_W-1:0] c_row_t [CC_DIM];

  // ---------------------------------------------------------------- receive
  logic signed [DATA_W-1:0] rx_b [NROW];
  c_row_t                   rx_c [NROW];
  logic signed [DATA_W-1:0] rx_b_nx [NROW];
  c_row_t                   rx_c_nx [NROW];
  logic [BW-1:0]            rx_beat;
  logic                     handover;

  assign handover = in_ctrl.valid && (rx_beat == BW'(BEATS - 1));

  always_comb begin
    rx_b_nx = rx_b;
    rx_c_nx = rx_c;
    if (in_ctrl.valid) begin
      for (int l = 0; l < PAR; l++) begin
        rx_b_nx[int'(rx_beat)*PAR + l] = in_data[l][0];
        for (int d = 0; d < CC_DIM; d++) rx_c_nx[int'(rx_beat)*PAR + l][d] = in_data[l][1 + d];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rx_beat <= '0;
    else if (in_ctrl.valid) rx_beat <= handover ? '0 : rx_beat + 1'b1;
  end

  always_ff @(posedge clk) begin
    rx_b <= rx_b_nx;
    rx_c <= rx_c_nx;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   in_ctrl.valid |-> (in_ctrl.last == (rx_beat == BW'(BEATS - 1))))
    else $error("pcn_condensation: last flag does not match the event length");

  // Feature FIFO from receive to emit.
  logic [FW-1:0] f_word, f_head;
  logic          f_empty, f_full, f_pop;
  always_comb begin
    f_word = '0;
    f_word[FW-1 -: CW] = in_ctrl;
    for (int l = 0; l < PAR; l++)
      for (int f = 0; f < D_O; f++) f_word[(l*D_O+f)*DATA_W +: DATA_W] = in_data[l][f];
  end

  pcn_stream_fifo #(.WIDTH(FW), .DEPTH(4 * BEATS)) u_fifo (
    .clk, .rst_n, .push(in_ctrl.valid), .din(f_word), .pop(f_pop),
    .dout(f_head), .empty(f_empty), .full(f_full));

  // ---------------------------------------------------------------- analyse
  // Candidate Selection + Sort
  logic signed [DATA_W-1:0] prio [NMAX];
  logic [NMAX-1:0]          cand;
  logic [IDW-1:0]           sorted_idx [NMAX];
  logic [NMAX-1:0]          sorted_cand;
  logic                     sort_done;

  always_comb begin
    for (int i = 0; i < NMAX; i++) begin
      prio[i] = rx_b_nx[i];
      cand[i] = (rx_b_nx[i] > cfg_t_beta) && (nodes_t'(i) < in_ctrl.nodes);
    end
  end

  pcn_rank_sort #(.NMAX(NMAX), .PAR(PAR), .DATA_W(DATA_W)) u_sort (
    .clk, .rst_n, .start(handover), .prio, .cand,
    .sorted_idx, .sorted_cand, .done(sort_done));

  // ANN + Isolation Selection
  c_row_t        pr_c [NROW];
  nodes_t        pr_nodes;
  logic          issuing;
  logic [BW-1:0] iss_beat;
  logic          ann_valid;
  logic [BW-1:0] ann_beat;
  logic          ann_last;
  nodes_t        ann_nodes;

  always_ff @(posedge clk) begin
    if (handover) pr_c <= rx_c_nx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing   <= 1'b0;
      iss_beat  <= '0;
      pr_nodes  <= '0;
      ann_beat  <= '0;
      ann_last  <= 1'b0;
      ann_nodes <= '0;
    end else begin
      if (handover) begin
        issuing  <= 1'b1;
        iss_beat <= '0;
        pr_nodes <= in_ctrl.nodes;
      end else if (issuing) begin
        if (iss_beat == BW'(BEATS - 1)) issuing <= 1'b0;
        iss_beat <= iss_beat + 1'b1;
      end
      ann_beat  <= iss_beat;
      ann_last  <= issuing && (iss_beat == BW'(BEATS - 1));
      ann_nodes <= pr_nodes;
    end
  end

  logic signed [DATA_W-1:0] query [PAR][CC_DIM];
  logic signed [DATA_W-1:0] pts   [NMAX][CC_DIM];
  logic [DIST_W-1:0]        dists [PAR][NMAX];

  always_comb begin
    for (int l = 0; l < PAR; l++) query[l] = pr_c[int'(iss_beat)*PAR + l];
    for (int j = 0; j < NMAX; j++) pts[j] = pr_c[j];
  end

  pcn_ann #(.NMAX(NMAX), .PAR(PAR), .D(CC_DIM), .DATA_W(DATA_W)) u_ann (
    .clk, .rst_n, .in_valid(issuing), .query, .pts,
    .out_valid(ann_valid), .dists);

  logic [NMAX-1:0] adj    [NMAX];
  logic [NMAX-1:0] adj_nx [NMAX];
  always_comb begin
    int r;
    r = 0;
    adj_nx = adj;
    if (ann_valid) begin
      for (int l = 0; l < PAR; l++) begin
        r = int'(ann_beat) * PAR + l;
        if (r < NMAX) begin
          for (int j = 0; j < NMAX; j++)
            adj_nx[r][j] = (nodes_t'(r) < ann_nodes) && (nodes_t'(j) < ann_nodes) &&
                           (dists[l][j] < cfg_t_d2);
        end
      end
    end
  end
  always_ff @(posedge clk) adj <= adj_nx;

  // ---------------------------------------------------------------- select
  logic            sel_start, sel_done;
  logic [NMAX-1:0] is_cp, assigned;
  logic [IDW-1:0]  cid [NMAX];

  assign sel_start = ann_valid && ann_last;

  pcn_cluster_select #(.NMAX(NMAX), .PAR(PAR)) u_select (
    .clk, .rst_n, .start(sel_start), .adj(adj_nx), .sorted_idx, .sorted_cand,
    .is_cp, .cid, .assigned, .done(sel_done));

  // ---------------------------------------------------------------- emit
  logic          em_active;
  logic [BW-1:0] em_cnt;
  logic          emit;
  logic [BW-1:0] em_beat;

  assign emit    = sel_done || em_active;
  assign em_beat = sel_done ? '0 : em_cnt;
  assign f_pop   = emit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      em_active     <= 1'b0;
      em_cnt        <= '0;
      out_ctrl      <= '0;
      out_data      <= '{default: '0};
      out_is_cp     <= '0;
      out_assigned  <= '0;
      out_cid       <= '{default: '0};
      fifo_overflow <= 1'b0;
    end else begin
      fifo_overflow <= fifo_overflow | (f_full && in_ctrl.valid && !f_pop);
      if (emit) begin
        em_active <= (em_beat != BW'(BEATS - 1));
        em_cnt    <= em_beat + 1'b1;
      end
      out_ctrl <= emit ? ctrl_t'(f_head[FW-1 -: CW]) : '0;
      if (emit) begin
        for (int l = 0; l < PAR; l++) begin
          int r;
          r = (int'(em_beat) * PAR + l) % NMAX;
          for (int f = 0; f < D_O; f++) out_data[l][f] <= f_head[(l*D_O+f)*DATA_W +: DATA_W];
          out_is_cp[l]    <= is_cp[r]    && ((int'(em_beat) * PAR + l) < NMAX);
          out_assigned[l] <= assigned[r] && ((int'(em_beat) * PAR + l) < NMAX);
          out_cid[l]      <= cid[r];
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) sel_start |-> sort_done)
    else $error("pcn_condensation: sort not finished when cluster selection starts");

endmodule
