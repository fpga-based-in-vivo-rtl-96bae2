// trace_buffer: the frame's trace values, between ACC-Trace and ACC-Decode.
//
// DEPTH 16-bit words, one per contour id. Two write ports, one per half chain
// of ACC-Trace (their ids never collide). Two registered read ports: one for
// the decoder, one for the host that sends traces to the PC. Read data is
// valid the cycle after the address. The paper says only that the traces are
// "sent to an external buffer"; the port structure is this design's choice.
module trace_buffer
  import decalcion_pkg::*;
#(
  parameter int DEPTH = MAX_CONTOURS
) (
  input  logic        clk,
  input  logic [1:0]  we,
  input  logic [$clog2(DEPTH)-1:0] waddr [2],
  input  trace_t      wdata [2],
  input  logic [$clog2(DEPTH)-1:0] raddr_a,
  output trace_t      rdata_a,
  input  logic [$clog2(DEPTH)-1:0] raddr_b,
  output trace_t      rdata_b
);
  trace_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we[0]) mem[waddr[0]] <= wdata[0];
    if (we[1]) mem[waddr[1]] <= wdata[1];
    rdata_a <= mem[raddr_a];
    rdata_b <= mem[raddr_b];
  end

  // The two half chains write disjoint ids.
  a_no_collision: assert property (@(posedge clk) (we == 2'b11) |-> (waddr[0] != waddr[1]));

endmodule
