// pcn_dense: point processing element (PPE) for a batched dense or linear layer.
//
// Every point of an event is multiplied by the same D_OUT x D_IN weight matrix, a bias is
// added and, for a dense layer, ReLU is applied; a linear layer (RELU = 0) skips the
// activation. Each beat holds PAR points and every lane has its own fully unrolled
// matrix-vector unit, so the element accepts one beat per cycle and processes an event of
// NMAX points in ceil(NMAX/PAR) cycles without ever stalling, as the paper requires of all
// actors. The weights are compile-time constants (zero weights cost no logic, which is
// how the 40 % weight sparsity saves resources); they come from pcn_pkg::wgt_fn.
//
// Timing: fixed latency of 2 cycles from in_* to out_*; the control record travels with
// the data. Arithmetic: products are accumulated at full width, shifted back to the
// activation format (DATA_W-2 weight fraction bits dropped, truncation towards minus
// infinity) and saturated to DATA_W bits. The number formats, rounding, saturation and
// the choice of ReLU are this design's assumptions.
module pcn_dense
  import pcn_pkg::*;
#(
  parameter int PAR    = 2,
  parameter int DATA_W = 8,
  parameter int D_IN   = 16,
  parameter int D_OUT  = 16,
  parameter int SEED   = 1,
  parameter bit RELU   = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  ctrl_t                    in_ctrl,
  input  logic signed [DATA_W-1:0] in_data  [PAR][D_IN],
  output ctrl_t                    out_ctrl,
  output logic signed [DATA_W-1:0] out_data [PAR][D_OUT]
);
  localparam int WFRAC = DATA_W - 2;
  localparam int ACC_W = 2 * DATA_W + $clog2(D_IN + 1) + 2;
  localparam longint SAT_MAX = (64'sd1 <<< (DATA_W - 1)) - 1;
  localparam longint SAT_MIN = -(64'sd1 <<< (DATA_W - 1));

  typedef int w_arr_t [D_OUT*D_IN];  // row-major: o*D_IN + i
  typedef int b_arr_t [D_OUT];

  function automatic w_arr_t init_w();
    w_arr_t w;
    for (int o = 0; o < D_OUT; o++)
      for (int i = 0; i < D_IN; i++) w[o*D_IN+i] = wgt_fn(SEED, o, i, DATA_W);
    return w;
  endfunction

  function automatic b_arr_t init_b();
    b_arr_t b;
    for (int o = 0; o < D_OUT; o++) b[o] = bias_fn(SEED, o, DATA_W);
    return b;
  endfunction

  localparam w_arr_t WEIGHTS = init_w();
  localparam b_arr_t BIASES  = init_b();

  // Stage 1: multiply-accumulate.
  logic signed [ACC_W-1:0] acc_d [PAR][D_OUT];
  logic signed [ACC_W-1:0] acc_q [PAR][D_OUT];
  ctrl_t                   ctrl_q;

  always_comb begin
    for (int l = 0; l < PAR; l++) begin
      for (int o = 0; o < D_OUT; o++) begin
        acc_d[l][o] = ACC_W'(BIASES[o]) <<< WFRAC;
        for (int i = 0; i < D_IN; i++)
          acc_d[l][o] += ACC_W'(WEIGHTS[o*D_IN+i]) * ACC_W'(in_data[l][i]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl_q <= '0;
      acc_q  <= '{default: '0};
    end else begin
      ctrl_q <= in_ctrl;
      acc_q  <= acc_d;
    end
  end

  // Stage 2: requantise, saturate, activation.
  logic signed [ACC_W-1:0] shifted;
  logic signed [DATA_W-1:0] res_d [PAR][D_OUT];

  always_comb begin
    shifted = '0;
    for (int l = 0; l < PAR; l++) begin
      for (int o = 0; o < D_OUT; o++) begin
        shifted = acc_q[l][o] >>> WFRAC;
        if (longint'(shifted) > SAT_MAX)      res_d[l][o] = DATA_W'(SAT_MAX);
        else if (longint'(shifted) < SAT_MIN) res_d[l][o] = DATA_W'(SAT_MIN);
        else                                  res_d[l][o] = DATA_W'(shifted);
        if (RELU && res_d[l][o] < 0) res_d[l][o] = '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_ctrl <= '0;
      out_data <= '{default: '0};
    end else begin
      out_ctrl <= ctrl_q;
      out_data <= res_d;
    end
  end

endmodule
