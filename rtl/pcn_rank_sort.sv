// pcn_rank_sort: the "Sort" step of condensation point selection.
//
// It orders the NMAX points of an event by priority: candidates (cand = 1) first, then by
// decreasing priority value (the condensation strength beta), then by increasing index,
// so the order is total and every point gets a distinct rank. It is a rank sort spread
// over time: start loads the keys of an event; in each of the following ceil(NMAX/PAR)
// cycles PAR points count how many keys beat theirs (NMAX comparators per point) and write
// their index into the output slot of that rank. So the sort keeps pace with a stream of
// PAR points per cycle and never stalls.
//
// Timing: start in cycle t loads the keys; the order is complete in sorted_idx /
// sorted_cand from cycle t + 1 + ceil(NMAX/PAR) (done is high in that cycle) and stays
// there until the next event overwrites it slot by slot, ceil(NMAX/PAR) cycles after the
// next start at the earliest. The paper names the sort; the rank method is this
// design's choice.
module pcn_rank_sort #(
  parameter int NMAX   = 32,
  parameter int PAR    = 2,
  parameter int DATA_W = 8,
  localparam int IDW   = (NMAX > 1) ? $clog2(NMAX) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [DATA_W-1:0] prio        [NMAX],
  input  logic [NMAX-1:0]          cand,
  output logic [IDW-1:0]           sorted_idx  [NMAX],
  output logic [NMAX-1:0]          sorted_cand,
  output logic                     done
);
  localparam int BEATS = (NMAX + PAR - 1) / PAR;
  localparam int BW    = (BEATS > 1) ? $clog2(BEATS) : 1;
  localparam int KW    = 1 + DATA_W + IDW;

  // Smaller key = earlier in the order.
  typedef logic [KW-1:0] key_t;
  key_t          keys [NMAX];
  logic [NMAX-1:0] cand_q;
  logic          busy;
  logic [BW-1:0] step;

  function automatic key_t make_key(logic c, logic signed [DATA_W-1:0] p, int idx);
    logic [DATA_W-1:0] ord;
    ord = ~{~p[DATA_W-1], p[DATA_W-2:0]};  // larger p -> smaller ord
    return {~c, ord, IDW'(idx)};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      step <= '0;
      done <= 1'b0;
    end else begin
      done <= busy && (step == BW'(BEATS - 1));
      if (start) begin
        busy <= 1'b1;
        step <= '0;
      end else if (busy) begin
        if (step == BW'(BEATS - 1)) busy <= 1'b0;
        step <= step + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      for (int i = 0; i < NMAX; i++) keys[i] <= make_key(cand[i], prio[i], i);
      cand_q <= cand;
    end
    if (busy) begin
      for (int l = 0; l < PAR; l++) begin
        int e;
        int rank;
        e = int'(step) * PAR + l;
        if (e < NMAX) begin
          rank = 0;
          for (int j = 0; j < NMAX; j++) if (keys[j] < keys[e]) rank++;
          sorted_idx[rank]  <= IDW'(e);
          sorted_cand[rank] <= cand_q[e];
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> (!busy || step == BW'(BEATS - 1)))
    else $error("pcn_rank_sort: started while busy");

endmodule
