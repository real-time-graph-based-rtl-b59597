// pcn_exp_weight: the "-exp" stage of GraVNetConv, edge weight = exp(-d).
//
// For each of the N_IN neighbours of a query it turns the squared distance d (with 2*FRAC
// fractional bits, as produced by pcn_ann) into the weight exp(-d). d is quantised to
// steps of 1/8 and looked up in a 256-entry table (pcn_pkg::exp_lut_fn: entry i holds
// round(255 * exp(-i/8)), so 255 stands for 1.0); distances of 32 and more give the last
// entry, which is 0. A neighbour slot that holds no point (ok = 0) gets weight 0.
//
// Timing: one cycle latency, one set of N_IN distances per cycle. The paper only names
// the exponential weighting; the table size and weight format are this design's choice.
module pcn_exp_weight
  import pcn_pkg::*;
#(
  parameter int N_IN   = 8,
  parameter int DIST_W = 19,
  parameter int FRAC   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [DIST_W-1:0] d      [N_IN],
  input  logic [N_IN-1:0]   ok,
  output logic              out_valid,
  output logic [7:0]        weight [N_IN]
);
  localparam int SHIFT = 2 * FRAC - 3;  // distance LSBs below 1/8

  typedef logic [7:0] lut_t [EXP_LUT_SIZE];
  function automatic lut_t init_lut();
    lut_t t;
    for (int i = 0; i < EXP_LUT_SIZE; i++) t[i] = 8'(exp_lut_fn(i));
    return t;
  endfunction
  localparam lut_t LUT = init_lut();

  logic [7:0] w_d [N_IN];
  always_comb begin
    for (int n = 0; n < N_IN; n++) begin
      logic [DIST_W-1:0] q;
      q = d[n] >> SHIFT;
      if (!ok[n])                                w_d[n] = '0;
      else if (q >= DIST_W'(EXP_LUT_SIZE - 1))   w_d[n] = LUT[EXP_LUT_SIZE-1];
      else                                       w_d[n] = LUT[q[7:0]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      weight    <= '{default: '0};
    end else begin
      out_valid <= in_valid;
      weight    <= w_d;
    end
  end

endmodule
