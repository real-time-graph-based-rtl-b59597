// pcn_cluster_select: the "Cluster Selection" step of condensation point selection.
//
// Greedy object-condensation inference. Points are visited in priority order (from
// pcn_rank_sort). A visited point that is a candidate and is not yet covered becomes a
// condensation point (a cluster seed); every point within the isolation distance of it
// (row of the isolation matrix adj) that is not yet covered is assigned to its cluster and
// marked covered. Covered points can no longer become seeds. Points never covered are
// noise. PAR visits are chained combinationally in one cycle, so an event takes
// ceil(NMAX/PAR) cycles, the same as every other actor.
//
// Timing: start in cycle t copies the inputs; the result registers (is_cp, cid, assigned)
// are updated with the finished event at the end of cycle t + ceil(NMAX/PAR) and done is
// high in the cycle after; they then hold until the next event finishes. adj[c][j] must
// be 0 for points j that do not exist and adj[c][c] = 1 for existing points.
// The paper gives the step by name and the isolation/priority inputs; the greedy rule is
// the usual condensation point inference of object condensation.
module pcn_cluster_select #(
  parameter int NMAX = 32,
  parameter int PAR  = 2,
  localparam int IDW = (NMAX > 1) ? $clog2(NMAX) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [NMAX-1:0] adj         [NMAX],
  input  logic [IDW-1:0]  sorted_idx  [NMAX],
  input  logic [NMAX-1:0] sorted_cand,
  output logic [NMAX-1:0] is_cp,
  output logic [IDW-1:0]  cid         [NMAX],
  output logic [NMAX-1:0] assigned,
  output logic            done
);
  localparam int BEATS = (NMAX + PAR - 1) / PAR;
  localparam int BW    = (BEATS > 1) ? $clog2(BEATS) : 1;

  logic [NMAX-1:0] adj_q [NMAX];
  logic [IDW-1:0]  ord_q [NMAX];
  logic [NMAX-1:0] cnd_q;
  logic            busy;
  logic [BW-1:0]   step;

  logic [NMAX-1:0] cov_q, cov_d;
  logic [NMAX-1:0] cp_q, cp_d;
  logic [IDW-1:0]  cid_q [NMAX];
  logic [IDW-1:0]  cid_d [NMAX];

  always_comb begin
    cov_d = cov_q;
    cp_d  = cp_q;
    cid_d = cid_q;
    for (int l = 0; l < PAR; l++) begin
      int s;
      logic [IDW-1:0] c;
      s = int'(step) * PAR + l;
      c = '0;
      if (s < NMAX) begin
        c = ord_q[s];
        if (cnd_q[s] && !cov_d[c]) begin
          cp_d[c] = 1'b1;
          for (int j = 0; j < NMAX; j++) begin
            if (adj_q[c][j] && !cov_d[j]) cid_d[j] = c;
          end
          cov_d = cov_d | adj_q[c];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      step     <= '0;
      done     <= 1'b0;
      is_cp    <= '0;
      assigned <= '0;
      cid      <= '{default: '0};
    end else begin
      done <= busy && (step == BW'(BEATS - 1));
      if (busy && step == BW'(BEATS - 1)) begin
        is_cp    <= cp_d;
        assigned <= cov_d;
        cid      <= cid_d;
      end
      if (start) begin
        busy <= 1'b1;
        step <= '0;
      end else if (busy) begin
        step <= step + 1'b1;
        if (step == BW'(BEATS - 1)) busy <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      adj_q <= adj;
      ord_q <= sorted_idx;
      cnd_q <= sorted_cand;
      cov_q <= '0;
      cp_q  <= '0;
      cid_q <= '{default: '0};
    end else if (busy) begin
      cov_q <= cov_d;
      cp_q  <= cp_d;
      cid_q <= cid_d;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> (!busy || step == BW'(BEATS - 1)))
    else $error("pcn_cluster_select: started while busy");

endmodule
