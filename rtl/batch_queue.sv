// batch_queue: the distribution engine's batch queue. It holds batches handed
// over by the object-oriented middleware (driver software) until the engine
// assigns them to a GPM.
//
// The paper limits the queue to 4 entries to save storage; each entry is a
// batch_desc_t (16-bit batch ID as in the paper, plus this design's triangle
// count and texture range). Both sides use valid/ready; a batch pushed in
// cycle n can be popped in cycle n+1. 'full', 'empty' and 'count' are exported so the middleware
// side can see back-pressure. The queue is a plain FIFO: batches leave in the
// order the middleware issued them, which is batch-ID order.
module batch_queue
  import oovr_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  batch_desc_t in_desc,
  output logic        out_valid,
  input  logic        out_ready,
  output batch_desc_t out_desc,
  output logic        full,
  output logic        empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  stream_fifo #(.T(batch_desc_t), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_desc),
    .out_valid, .out_ready, .out_data(out_desc),
    .count
  );

  assign full  = !in_ready;
  assign empty = !out_valid;
endmodule
