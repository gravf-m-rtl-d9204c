// gravfm_update_queue: the PE's output queue of updates, its main storage.
//
// A first-word-fall-through FIFO of update_t entries between the apply
// module and the network. Because apply issues at most one update per vertex
// per superstep, and the queue has always drained the previous superstep's
// entries before the next apply starts (that superstep could not end before
// this PE's own barrier had crossed the network), V_PER_PE + 1 entries (all
// vertices plus the barrier) can never overflow. The paper gives the queue's
// size as the number of vertices; the extra entry for the barrier is this
// design's reading of that.
module gravfm_update_queue
  import gravfm_pkg::*;
#(
  parameter int unsigned V_PER_PE = 512,
  localparam int unsigned DEPTH   = V_PER_PE + 1
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    in_valid,
  output logic    in_ready,
  input  update_t in_data,
  output logic    out_valid,
  input  logic    out_ready,
  output update_t out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);

  logic [$bits(update_t)-1:0] out_bits;

  gravfm_fifo #(.WIDTH($bits(update_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst,
    .in_valid, .in_ready, .in_data (in_data),
    .out_valid, .out_ready, .out_data (out_bits),
    .level
  );

  assign out_data = update_t'(out_bits);

endmodule
