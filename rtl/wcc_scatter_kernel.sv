// wcc_scatter_kernel: user scatter kernel of weakly connected components.
//
// Called once per local outgoing edge of a vertex that issued an update; it
// turns (update, edge) into a message for the edge's destination. For WCC the
// message is the update's label. As in the paper's WCC scatter listing, one
// register stage is inserted to show a pipelined kernel: all outputs are
// registered on cycles with message_ack = 1, and ready = message_ack, so an
// input is taken exactly when the output register is allowed to change.
// num_neighbors_in is part of the fixed interface; WCC does not use it.
module wcc_scatter_kernel
  import gravfm_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  payload_t   update_in,
  input  vid_t       sender_in,
  input  logic       round_in,
  input  logic       barrier_in,
  input  vid_t       neighbor_in,
  input  logic [31:0] num_neighbors_in,
  input  logic       valid_in,
  output logic       ready,
  output payload_t   message_out,
  output vid_t       neighbor_out,
  output vid_t       sender_out,
  output logic       round_out,
  output logic       barrier_out,
  output logic       valid_out,
  input  logic       message_ack
);

  assign ready = message_ack;

  always_ff @(posedge clk) begin
    if (rst) begin
      valid_out <= 1'b0;
    end else if (message_ack) begin
      valid_out <= valid_in;
    end
  end

  always_ff @(posedge clk) begin
    if (message_ack) begin
      message_out.label <= update_in.label;
      neighbor_out      <= neighbor_in;
      sender_out        <= sender_in;
      round_out         <= round_in;
      barrier_out       <= barrier_in;
    end
  end

endmodule
