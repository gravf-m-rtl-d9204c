// gravfm_gather: the gather module of a PE, and the PE's superstep control.
//
// Messages from the scatter module pass three steps:
//   read   - the destination vertex's state is read from vertex storage; the
//            hazard unit stalls this step while an earlier message to the
//            same vertex has not been written back yet,
//   kernel - the gather kernel combines message and state (stage R holds
//            the message while the synchronous read returns the state),
//   write  - the new state is written back (the write port is always free
//            in gather mode, so the kernel's state_ack is tied to 1).
// A barrier message ends the superstep: it is consumed, the module stops
// accepting messages (the next superstep's may already be waiting), waits
// until no state write is outstanding, then hands the vertex storage to the
// apply module (sel_apply) and pulses apply_start. When apply reports done,
// the storage returns to gather and messages flow again. The very first
// apply is started by start, which injects the initial barrier.
//
// apply_round is the virtual channel of the updates the apply run issues:
// 0 for the initial run, then alternating. level counts supersteps and is
// given to the gather kernel. These encodings are this design's choice.
module gravfm_gather
  import gravfm_pkg::*;
#(
  parameter int unsigned V_PER_PE  = 512,
  parameter int unsigned HZ_DEPTH  = 4,
  localparam int unsigned LW       = $clog2(V_PER_PE)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  // messages from the scatter module
  input  logic               in_valid,
  output logic               in_ready,
  input  message_t           in_msg,
  // vertex storage, gather side
  output logic               vs_rd_en,
  output logic [LW-1:0]      vs_rd_addr,
  input  vstate_t            vs_rd_data,
  output logic               vs_wr_en,
  output logic [LW-1:0]      vs_wr_addr,
  output vstate_t            vs_wr_data,
  // hand-over to the apply module
  output logic               sel_apply,
  output logic               apply_start,
  output logic               apply_round,
  input  logic               apply_done,
  output logic [LEVEL_W-1:0] level,
  // events
  output logic               ev_hazard,   // read stage stalled by a hazard
  output logic               ev_message   // a message was gathered
);

  typedef enum logic [1:0] { S_IDLE, S_RUN, S_FLUSH, S_APPLY } state_e;
  state_e state;

  logic     r_valid;
  message_t r_msg;
  logic     r_adv;
  logic     k_ready;
  logic     hz_stall, hz_empty;
  logic     acc_msg, acc_bar;
  logic     wr_fire;

  vid_t     k_nodeid_out;
  vstate_t  k_state_out;
  logic     k_state_valid;

  assign r_adv   = !r_valid || k_ready;
  assign acc_bar = (state == S_RUN) && in_valid && in_msg.barrier;
  assign acc_msg = (state == S_RUN) && in_valid && !in_msg.barrier && !hz_stall && r_adv;
  // in_ready is the kernels' message_ack: it does not wait for in_valid, as
  // the scatter kernel only loads a new message while it is acknowledged.
  assign in_ready = (state == S_RUN) && (!in_valid || in_msg.barrier || (!hz_stall && r_adv));

  assign vs_rd_en   = acc_msg;
  assign vs_rd_addr = in_msg.neighbor[LW-1:0];

  gravfm_hazard #(.AW(LW), .DEPTH(HZ_DEPTH)) u_hazard (
    .clk, .rst,
    .check_addr (in_msg.neighbor[LW-1:0]),
    .stall      (hz_stall),
    .push       (acc_msg),
    .push_addr  (in_msg.neighbor[LW-1:0]),
    .pop        (wr_fire),
    .empty      (hz_empty)
  );

  wcc_gather_kernel u_kernel (
    .level_in    (level),
    .nodeid_in   (r_msg.neighbor),
    .sender_in   (r_msg.sender),
    .message_in  (r_msg.data),
    .state_in    (vs_rd_data),
    .valid_in    (r_valid),
    .ready       (k_ready),
    .nodeid_out  (k_nodeid_out),
    .state_out   (k_state_out),
    .state_valid (k_state_valid),
    .state_ack   (1'b1)
  );

  assign wr_fire    = k_state_valid;
  assign vs_wr_en   = wr_fire;
  assign vs_wr_addr = k_nodeid_out[LW-1:0];
  assign vs_wr_data = k_state_out;

  assign sel_apply  = (state == S_APPLY);
  assign ev_hazard  = (state == S_RUN) && in_valid && !in_msg.barrier && hz_stall;
  assign ev_message = wr_fire;

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      r_valid     <= 1'b0;
      apply_start <= 1'b0;
      apply_round <= 1'b0;
      level       <= '0;
    end else begin
      apply_start <= 1'b0;
      if (r_adv) r_valid <= acc_msg;
      unique case (state)
        S_IDLE:  if (start) begin
                   state       <= S_APPLY;
                   apply_start <= 1'b1;
                 end
        S_RUN:   if (acc_bar) state <= S_FLUSH;
        S_FLUSH: if (hz_empty && !r_valid) begin
                   state       <= S_APPLY;
                   apply_start <= 1'b1;
                 end
        S_APPLY: if (apply_done) begin
                   state       <= S_RUN;
                   apply_round <= ~apply_round;
                   level       <= level + 1'b1;
                 end
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (acc_msg) r_msg <= in_msg;
  end

  // Messages of a superstep carry the channel of the apply run before it.
  assert property (@(posedge clk) disable iff (rst)
                   (state == S_RUN && in_valid) |-> in_msg.round == ~apply_round);

endmodule
