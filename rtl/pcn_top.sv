// pcn_top: stall-free dataflow accelerator for a graph-based point cloud network.
//
// The network clusters the hits of one detector snapshot (an event). An event is a
// compressed point cloud: NMAX rows of D_I input features (X), the original sensor number
// of each row (Y) and the number N of rows that hold real hits (in_ctrl.nodes). It enters
// as ceil(NMAX/PAR) beats of PAR rows, in_ctrl.last on the final beat; events may follow
// each other back to back. Every row leaves, in the same order, with the D_O output-layer
// features, its sensor number and its cluster: is_cp (it is a condensation point),
// assigned (it belongs to a cluster) and cid (row of its condensation point).
//
// Layer chain (dense = linear + ReLU, linear = no activation; widths in brackets):
//   d0  dense  D_I->D_I  (from X, skip to the last combine)
//   d1  dense  D_I->D_1  -> linear D_1->D_S (S), linear D_1->D_F (F) -> GraVNetConv 1
//   c1  {GraVNetConv 1 (3*D_F), d1} -> d2 dense ->D_2 -> d3 dense ->D_1 (skip)
//   d4  dense  D_1->D_1  -> linear S, linear F -> GraVNetConv 2
//   c2  {GraVNetConv 2, d4} -> d5 dense ->D_2 -> d6 dense ->D_1
//   c3  {d6, d3}, c4 {c3, d0} -> d7 dense ->D_1 -> output layer linear ->D_O
//   condensation point selection
// Forks (multicast) are plain fan-out; joins are pcn_combine instances whose FIFOs
// absorb the different path latencies. The sensor numbers Y bypass the network in a FIFO
// and are rejoined at the output.
//
// Timing: every actor accepts one beat per cycle, so the accelerator takes a new event
// every ceil(NMAX/PAR) cycles and never stalls; its latency is fixed (see the README).
// overflow reports a FIFO sized too small (a design error, never expected).
// The layer sequence and sizes follow the paper's network figure; the
// skip-connection combine order, what the third GraVNetConv input carries and all number
// formats are this design's choices.
module pcn_top
  import pcn_pkg::*;
#(
  parameter int NMAX   = 32,
  parameter int PAR    = 2,
  parameter int DATA_W = 8,
  parameter int D_I    = 5,
  parameter int D_1    = 16,
  parameter int D_2    = 32,
  parameter int D_S    = 6,
  parameter int D_F    = 8,
  parameter int D_O    = 9,
  parameter int K      = 8,
  parameter int Y_W    = 16,
  localparam int IDW   = (NMAX > 1) ? $clog2(NMAX) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] cfg_t_beta,   // condensation: seed threshold on beta
  input  logic [2*DATA_W+1:0]      cfg_t_d2,     // condensation: squared isolation radius
  input  ctrl_t                    in_ctrl,
  input  logic signed [DATA_W-1:0] in_x         [PAR][D_I],
  input  logic [Y_W-1:0]           in_y         [PAR],
  output ctrl_t                    out_ctrl,
  output logic signed [DATA_W-1:0] out_feat     [PAR][D_O],
  output logic [Y_W-1:0]           out_y        [PAR],
  output logic [PAR-1:0]           out_is_cp,
  output logic [PAR-1:0]           out_assigned,
  output logic [IDW-1:0]           out_cid      [PAR],
  output logic                     overflow
);
  localparam int BEATS  = (NMAX + PAR - 1) / PAR;
  localparam int CDEPTH = 4 * BEATS + 64;   // combine FIFOs
  localparam int YDEPTH = 8 * BEATS + 64;   // sensor-number bypass
  localparam int DG     = 3 * D_F;          // GraVNetConv output width

  `define PCN_STREAM(name, width) \
    ctrl_t name``_c; \
    logic signed [DATA_W-1:0] name``_d [PAR][width];

  `PCN_STREAM(d0, D_I)
  `PCN_STREAM(d1, D_1)
  `PCN_STREAM(s1, D_S)
  `PCN_STREAM(f1, D_F)
  `PCN_STREAM(g1, DG)
  `PCN_STREAM(c1, DG + D_1)
  `PCN_STREAM(d2, D_2)
  `PCN_STREAM(d3, D_1)
  `PCN_STREAM(d4, D_1)
  `PCN_STREAM(s2, D_S)
  `PCN_STREAM(f2, D_F)
  `PCN_STREAM(g2, DG)
  `PCN_STREAM(c2, DG + D_1)
  `PCN_STREAM(d5, D_2)
  `PCN_STREAM(d6, D_1)
  `PCN_STREAM(c3, 2 * D_1)
  `PCN_STREAM(c4, 2 * D_1 + D_I)
  `PCN_STREAM(d7, D_1)
  `PCN_STREAM(ol, D_O)
  `undef PCN_STREAM

  ctrl_t unused_s1_c, unused_s2_c;
  logic  ovf_c1, ovf_c2, ovf_c3, ovf_c4, ovf_cps, ovf_y;

  // ------------------------------------------------------------- first block
  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(D_I), .D_OUT(D_I), .SEED(10), .RELU(1'b1))
    u_d0 (.clk, .rst_n, .in_ctrl, .in_data(in_x), .out_ctrl(d0_c), .out_data(d0_d));
  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(D_I), .D_OUT(D_1), .SEED(11), .RELU(1'b1))
    u_d1 (.clk, .rst_n, .in_ctrl, .in_data(in_x), .out_ctrl(d1_c), .out_data(d1_d));
  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(D_1), .D_OUT(D_S), .SEED(12), .RELU(1'b0))
    u_s1 (.clk, .rst_n, .in_ctrl(d1_c), .in_data(d1_d), .out_ctrl(s1_c), .out_data(s1_d));
  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(D_1), .D_OUT(D_F), .SEED(13), .RELU(1'b0))
    u_f1 (.clk, .rst_n, .in_ctrl(d1_c), .in_data(d1_d), .out_ctrl(f1_c), .out_data(f1_d));
  assign unused_s1_c = s1_c;

  pcn_gravnet #(.NMAX(NMAX), .PAR(PAR), .DATA_W(DATA_W), .D_S(D_S), .D_F(D_F), .K(K))
    u_gv1 (.clk, .rst_n, .in_ctrl(f1_c), .s_data(s1_d), .f_data(f1_d), .p_data(f1_d),
           .out_ctrl(g1_c), .out_data(g1_d));

  pcn_combine #(.PAR(PAR), .DATA_W(DATA_W), .D_A(DG), .D_B(D_1), .DEPTH(CDEPTH))
    u_c1 (.clk, .rst_n, .a_ctrl(g1_c), .a_data(g1_d), .b_ctrl(d1_c), .b_data(d1_d),
          .out_ctrl(c1_c), .out_data(c1_d), .overflow(ovf_c1));

  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(DG + D_1), .D_OUT(D_2), .SEED(14), .RELU(1'b1))
    u_d2 (.clk, .rst_n, .in_ctrl(c1_c), .in_data(c1_d), .out_ctrl(d2_c), .out_data(d2_d));
  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(D_2), .D_OUT(D_1), .SEED(15), .RELU(1'b1))
    u_d3 (.clk, .rst_n, .in_ctrl(d2_c), .in_data(d2_d), .out_ctrl(d3_c), .out_data(d3_d));

  // ------------------------------------------------------------- second block
  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(D_1), .D_OUT(D_1), .SEED(16), .RELU(1'b1))
    u_d4 (.clk, .rst_n, .in_ctrl(d3_c), .in_data(d3_d), .out_ctrl(d4_c), .out_data(d4_d));
  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(D_1), .D_OUT(D_S), .SEED(17), .RELU(1'b0))
    u_s2 (.clk, .rst_n, .in_ctrl(d4_c), .in_data(d4_d), .out_ctrl(s2_c), .out_data(s2_d));
  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(D_1), .D_OUT(D_F), .SEED(18), .RELU(1'b0))
    u_f2 (.clk, .rst_n, .in_ctrl(d4_c), .in_data(d4_d), .out_ctrl(f2_c), .out_data(f2_d));
  assign unused_s2_c = s2_c;

  pcn_gravnet #(.NMAX(NMAX), .PAR(PAR), .DATA_W(DATA_W), .D_S(D_S), .D_F(D_F), .K(K))
    u_gv2 (.clk, .rst_n, .in_ctrl(f2_c), .s_data(s2_d), .f_data(f2_d), .p_data(f2_d),
           .out_ctrl(g2_c), .out_data(g2_d));

  pcn_combine #(.PAR(PAR), .DATA_W(DATA_W), .D_A(DG), .D_B(D_1), .DEPTH(CDEPTH))
    u_c2 (.clk, .rst_n, .a_ctrl(g2_c), .a_data(g2_d), .b_ctrl(d4_c), .b_data(d4_d),
          .out_ctrl(c2_c), .out_data(c2_d), .overflow(ovf_c2));

  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(DG + D_1), .D_OUT(D_2), .SEED(19), .RELU(1'b1))
    u_d5 (.clk, .rst_n, .in_ctrl(c2_c), .in_data(c2_d), .out_ctrl(d5_c), .out_data(d5_d));
  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(D_2), .D_OUT(D_1), .SEED(20), .RELU(1'b1))
    u_d6 (.clk, .rst_n, .in_ctrl(d5_c), .in_data(d5_d), .out_ctrl(d6_c), .out_data(d6_d));

  // ------------------------------------------------------------- head
  pcn_combine #(.PAR(PAR), .DATA_W(DATA_W), .D_A(D_1), .D_B(D_1), .DEPTH(CDEPTH))
    u_c3 (.clk, .rst_n, .a_ctrl(d6_c), .a_data(d6_d), .b_ctrl(d3_c), .b_data(d3_d),
          .out_ctrl(c3_c), .out_data(c3_d), .overflow(ovf_c3));
  pcn_combine #(.PAR(PAR), .DATA_W(DATA_W), .D_A(2 * D_1), .D_B(D_I), .DEPTH(CDEPTH))
    u_c4 (.clk, .rst_n, .a_ctrl(c3_c), .a_data(c3_d), .b_ctrl(d0_c), .b_data(d0_d),
          .out_ctrl(c4_c), .out_data(c4_d), .overflow(ovf_c4));

  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(2 * D_1 + D_I), .D_OUT(D_1), .SEED(21), .RELU(1'b1))
    u_d7 (.clk, .rst_n, .in_ctrl(c4_c), .in_data(c4_d), .out_ctrl(d7_c), .out_data(d7_d));
  pcn_dense #(.PAR(PAR), .DATA_W(DATA_W), .D_IN(D_1), .D_OUT(D_O), .SEED(22), .RELU(1'b0))
    u_ol (.clk, .rst_n, .in_ctrl(d7_c), .in_data(d7_d), .out_ctrl(ol_c), .out_data(ol_d));

  pcn_condensation #(.NMAX(NMAX), .PAR(PAR), .DATA_W(DATA_W), .D_O(D_O)) u_cps (
    .clk, .rst_n, .cfg_t_beta, .cfg_t_d2, .in_ctrl(ol_c), .in_data(ol_d),
    .out_ctrl, .out_data(out_feat), .out_is_cp, .out_assigned, .out_cid,
    .fifo_overflow(ovf_cps));

  // ------------------------------------------------------------- sensor numbers
  logic [PAR*Y_W-1:0] y_word, y_head;
  logic               y_empty, y_full;
  always_comb begin
    for (int l = 0; l < PAR; l++) begin
      y_word[l*Y_W +: Y_W] = in_y[l];
      out_y[l]             = out_ctrl.valid ? y_head[l*Y_W +: Y_W] : '0;
    end
  end

  pcn_stream_fifo #(.WIDTH(PAR * Y_W), .DEPTH(YDEPTH)) u_yfifo (
    .clk, .rst_n, .push(in_ctrl.valid), .din(y_word), .pop(out_ctrl.valid),
    .dout(y_head), .empty(y_empty), .full(y_full));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ovf_y <= 1'b0;
    else        ovf_y <= ovf_y | (y_full && in_ctrl.valid && !out_ctrl.valid);
  end

  assign overflow = ovf_c1 | ovf_c2 | ovf_c3 | ovf_c4 | ovf_cps | ovf_y;

endmodule
