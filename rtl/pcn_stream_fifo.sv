// pcn_stream_fifo: first-word-fall-through FIFO used to delay one stream against another.
//
// In a stall-free pipeline the consumers of a fork reach a join after different, but
// fixed, latencies. The early stream is parked in this FIFO until its partner arrives.
// push writes din at the end of the cycle; dout always shows the oldest word and pop
// removes it. Because every actor runs at the same rate, the fill level is bounded by
// the latency difference, so the FIFO never fills when DEPTH is large enough; an
// assertion flags an overflow (a design-time sizing error) and an underflow.
// The DEPTH default is this design's choice.
module pcn_stream_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("pcn_stream_fifo overflow: DEPTH too small for the latency difference");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("pcn_stream_fifo underflow");

endmodule
