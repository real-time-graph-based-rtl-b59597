// pcn_combine: topology element that joins two point streams of the same events.
//
// Out of two streams A and B that carry the same points in the same order, it forms one
// stream whose points hold the features of A followed by the features of B (a
// concatenation, as used for the skip connections of the network). Both inputs are
// written into FIFOs; as soon as both FIFOs hold a beat, one beat of each is popped and
// the concatenated beat is registered to the output. The stream that arrives first simply
// waits in its FIFO, so neither producer is ever stalled. The control record of the
// output is the one of stream A.
//
// Timing: one beat per cycle; output 2 cycles after the later of the two input beats.
// The paper names the element (Combine) and its role; the FIFO-based alignment and the
// depth are this design's choice.
module pcn_combine
  import pcn_pkg::*;
#(
  parameter int PAR    = 2,
  parameter int DATA_W = 8,
  parameter int D_A    = 16,
  parameter int D_B    = 16,
  parameter int DEPTH  = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  ctrl_t                    a_ctrl,
  input  logic signed [DATA_W-1:0] a_data   [PAR][D_A],
  input  ctrl_t                    b_ctrl,
  input  logic signed [DATA_W-1:0] b_data   [PAR][D_B],
  output ctrl_t                    out_ctrl,
  output logic signed [DATA_W-1:0] out_data [PAR][D_A+D_B],
  output logic                     overflow
);
  localparam int CW = $bits(ctrl_t);
  localparam int WA = CW + PAR * D_A * DATA_W;
  localparam int WB = PAR * D_B * DATA_W;

  logic [WA-1:0] a_word, a_head;
  logic [WB-1:0] b_word, b_head;
  logic          a_empty, b_empty, a_full, b_full, pop;

  always_comb begin
    a_word = '0;
    b_word = '0;
    a_word[WA-1 -: CW] = a_ctrl;
    for (int l = 0; l < PAR; l++) begin
      for (int f = 0; f < D_A; f++) a_word[(l*D_A+f)*DATA_W +: DATA_W] = a_data[l][f];
      for (int f = 0; f < D_B; f++) b_word[(l*D_B+f)*DATA_W +: DATA_W] = b_data[l][f];
    end
  end

  pcn_stream_fifo #(.WIDTH(WA), .DEPTH(DEPTH)) u_fifo_a (
    .clk, .rst_n, .push(a_ctrl.valid), .din(a_word), .pop,
    .dout(a_head), .empty(a_empty), .full(a_full));

  pcn_stream_fifo #(.WIDTH(WB), .DEPTH(DEPTH)) u_fifo_b (
    .clk, .rst_n, .push(b_ctrl.valid), .din(b_word), .pop,
    .dout(b_head), .empty(b_empty), .full(b_full));

  assign pop = !a_empty && !b_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_ctrl <= '0;
      out_data <= '{default: '0};
      overflow <= 1'b0;
    end else begin
      overflow <= overflow | (a_full && a_ctrl.valid && !pop) | (b_full && b_ctrl.valid && !pop);
      out_ctrl <= pop ? ctrl_t'(a_head[WA-1 -: CW]) : '0;
      if (pop) begin
        for (int l = 0; l < PAR; l++) begin
          for (int f = 0; f < D_A; f++) out_data[l][f]     <= a_head[(l*D_A+f)*DATA_W +: DATA_W];
          for (int f = 0; f < D_B; f++) out_data[l][D_A+f] <= b_head[(l*D_B+f)*DATA_W +: DATA_W];
        end
      end
    end
  end

endmodule
