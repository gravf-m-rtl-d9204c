// wcc_apply_kernel: user apply kernel of weakly connected components.
//
// Called once per vertex at the end of a superstep. The active bit is always
// cleared in the written-back state; if it was set (a smaller label arrived in
// this superstep) an update carrying the label is issued. The barrier marker
// passes through to both outputs. Combinational, as in the paper's WCC apply
// listing: state_valid follows valid_in (no handshake, the state can always be
// written), update_valid = valid_in & active, ready follows update_ack.
module wcc_apply_kernel
  import gravfm_pkg::*;
(
  input  vid_t     nodeid_in,
  input  vstate_t  state_in,
  input  logic     round_in,
  input  logic     barrier_in,
  input  logic     valid_in,
  output logic     ready,
  output vid_t     nodeid_out,
  output vstate_t  state_out,
  output logic     state_barrier,
  output logic     state_valid,
  output payload_t update_out,
  output vid_t     update_sender,
  output logic     update_round,
  output logic     barrier_out,
  output logic     update_valid,
  input  logic     update_ack
);

  assign nodeid_out       = nodeid_in;
  assign state_out.label  = state_in.label;
  assign state_out.active = 1'b0;
  assign state_barrier    = barrier_in;
  assign state_valid      = valid_in;
  assign update_out.label = state_in.label;
  assign update_sender    = nodeid_in;
  assign update_round     = round_in;
  assign update_valid     = valid_in & state_in.active;
  assign barrier_out      = barrier_in;
  assign ready            = update_ack;

endmodule
