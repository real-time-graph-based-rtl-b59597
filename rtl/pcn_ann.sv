// pcn_ann: all-nearest-neighbour distance unit.
//
// For PAR query points per cycle it computes the squared Euclidean distance to every one
// of the NMAX points of the current event, i.e. PAR rows of the event's NMAX x NMAX
// distance matrix. Over ceil(NMAX/PAR) cycles the whole matrix is produced, so the unit
// keeps pace with the stream without stalling. The event's points are supplied by the
// caller as a register bank (pts); the query coordinates are supplied per cycle.
// Both graph processing elements use it: GraVNetConv in the learned space S and the
// condensation point selection in the clustering space.
//
// Timing: one cycle latency (distances registered). Distances are kept at full width
// (2*DATA_W + clog2(D) bits), so no rounding happens here. The paper names the ANN block;
// the brute-force all-pairs structure is this design's reading of "all-nearest-neighbor".
module pcn_ann #(
  parameter int NMAX   = 32,
  parameter int PAR    = 2,
  parameter int D      = 6,
  parameter int DATA_W = 8,
  localparam int DIST_W = 2 * DATA_W + $clog2(D) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] query [PAR][D],
  input  logic signed [DATA_W-1:0] pts   [NMAX][D],
  output logic                     out_valid,
  output logic [DIST_W-1:0]        dists  [PAR][NMAX]
);
  logic [DIST_W-1:0] dists_d [PAR][NMAX];

  always_comb begin
    for (int l = 0; l < PAR; l++) begin
      for (int j = 0; j < NMAX; j++) begin
        dists_d[l][j] = '0;
        for (int k = 0; k < D; k++) begin
          logic signed [DIST_W:0] diff;
          diff = (DIST_W+1)'(query[l][k]) - (DIST_W+1)'(pts[j][k]);
          dists_d[l][j] += DIST_W'(diff * diff);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      dists      <= '{default: '0};
    end else begin
      out_valid <= in_valid;
      dists      <= dists_d;
    end
  end

endmodule
