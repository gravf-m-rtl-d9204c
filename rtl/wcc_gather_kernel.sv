// wcc_gather_kernel: user gather kernel of weakly connected components.
//
// Called once per received message. If the message label is smaller than the
// vertex's stored label, the label is replaced and the vertex marked active;
// otherwise the state passes unchanged. Purely combinational: state_valid
// follows valid_in and ready follows state_ack. This is the kernel printed in
// the paper's WCC gather listing, with the field signals grouped into the
// layout structs of gravfm_pkg. level_in and sender_in are part of the fixed
// kernel interface; WCC does not need them.
module wcc_gather_kernel
  import gravfm_pkg::*;
(
  input  logic [LEVEL_W-1:0] level_in,
  input  vid_t               nodeid_in,
  input  vid_t               sender_in,
  input  payload_t           message_in,
  input  vstate_t            state_in,
  input  logic               valid_in,
  output logic               ready,
  output vid_t               nodeid_out,
  output vstate_t            state_out,
  output logic               state_valid,
  input  logic               state_ack
);

  logic new_label;
  assign new_label = state_in.label > message_in.label;

  assign nodeid_out       = nodeid_in;
  assign state_out.label  = new_label ? message_in.label : state_in.label;
  assign state_out.active = new_label ? 1'b1 : state_in.active;
  assign state_valid      = valid_in;
  assign ready            = state_ack;

endmodule
