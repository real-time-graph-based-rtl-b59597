// pcn_pkg: types and constants shared by the point cloud network pipeline.
//
// Every stream in the pipeline carries one "beat" per clock cycle: PAR points of one
// event side by side. Next to the point data travels a small control record
// (ctrl_t): a valid flag, a last flag on the final beat of an event, and the number of
// real points N of that event (rows N..NMAX-1 of the compressed event are padding).
// There is no back-pressure anywhere: every actor accepts a beat in every cycle.
//
// Fixed-point convention (this design's choice, the paper gives only the word length):
// activations are signed DATA_W-bit numbers with DATA_W/2 fractional bits, weights are
// signed DATA_W-bit numbers with DATA_W-2 fractional bits.
//
// Trained weights are not published with the network description, so the dense layers
// use a fixed pseudo-random weight set generated by wgt_fn/bias_fn below, with about
// 40 % of the weights set to zero (the paper's weight sparsity).
package pcn_pkg;

  typedef logic [15:0] nodes_t;

  typedef struct packed {
    logic   valid;  // beat carries data
    logic   last;   // final beat of an event
    nodes_t nodes;  // number of real points N of the event
  } ctrl_t;

  // Integer hash used to derive reproducible pseudo-random weights.
  function automatic int unsigned hash3(int unsigned a, int unsigned b, int unsigned c);
    int unsigned h;
    h = a * 32'h9E3779B1 ^ (b + 32'h7F4A7C15) * 32'h85EBCA77 ^ (c + 32'h165667B1) * 32'hC2B2AE3D;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Weight of input i to output o of layer SEED, as a signed integer in
  // [-2^(w-3), 2^(w-3)) with w = DATA_W (i.e. magnitude below 0.5 in the weight format),
  // zero with probability 40/100.
  function automatic int wgt_fn(int seed, int o, int i, int w);
    int unsigned h;
    int span;
    h = hash3(seed, o, i);
    if ((h % 100) < 40) return 0;
    span = 1 << (w - 3);
    return int'((h >> 8) % (2 * span)) - span;
  endfunction

  // Bias of output o of layer SEED, in activation format, small magnitude.
  function automatic int bias_fn(int seed, int o, int w);
    int unsigned h;
    int span;
    h = hash3(seed + 1000, o, 77);
    span = 1 << (w / 2 - 2);
    return int'(h % (2 * span)) - span;
  endfunction

  // exp(-x) edge weight for the GraVNet message passing, unsigned 8-bit fraction
  // (255 stands for 1.0). x = idx / 8.
  localparam int EXP_LUT_SIZE = 256;
  function automatic int exp_lut_fn(int idx);
    real x;
    x = real'(idx) / 8.0;
    return $rtoi(255.0 * $exp(-x) + 0.5);
  endfunction

endpackage
