// gravfm_apply: the apply module of a PE.
//
// Started by the gather module once vertex storage is handed over, it reads
// every vertex slot of the PE in order (one per cycle), passes the state to
// the apply kernel, writes the kernel's state output back at the same slot
// and pushes the kernel's update, if any, into the update queue. After the
// last vertex it passes a barrier item through the kernel; the kernel's
// barrier output is written to the queue as the barrier update that closes
// the superstep, and done is pulsed so gather takes the storage back.
//
// The state write has no handshake: it is repeated, harmlessly, while the
// kernel waits for the queue. The barrier item is given an inactive state so
// it issues no update and is not written back (state_barrier gates the
// write). Pipeline: one read cycle (stage R) then the combinational WCC
// kernel; a superstep's apply pass takes V_PER_PE + 2 cycles without
// backpressure.
module gravfm_apply
  import gravfm_pkg::*;
#(
  parameter int unsigned V_PER_PE = 512,
  localparam int unsigned LW      = $clog2(V_PER_PE)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [15:0]   pe_gid,
  input  logic          start,
  input  logic          round,
  output logic          done,
  // vertex storage, apply side
  output logic          vs_rd_en,
  output logic [LW-1:0] vs_rd_addr,
  input  vstate_t       vs_rd_data,
  output logic          vs_wr_en,
  output logic [LW-1:0] vs_wr_addr,
  output vstate_t       vs_wr_data,
  // update queue
  output logic          q_valid,
  input  logic          q_ready,
  output update_t       q_data
);

  logic          issuing;
  logic [LW:0]   iss_cnt;
  logic          r_valid, r_barrier;
  logic [LW-1:0] r_addr;
  logic          r_adv, k_ready, issue;
  logic          round_q;

  vid_t     k_nodeid_out, k_update_sender;
  vstate_t  k_state_out;
  logic     k_state_barrier, k_state_valid;
  payload_t k_update_out;
  logic     k_update_round, k_barrier_out, k_update_valid;

  assign r_adv      = !r_valid || k_ready;
  assign issue      = issuing && r_adv;
  assign vs_rd_en   = issue && (iss_cnt != (LW+1)'(V_PER_PE));
  assign vs_rd_addr = iss_cnt[LW-1:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      issuing <= 1'b0;
      iss_cnt <= '0;
      r_valid <= 1'b0;
      round_q <= 1'b0;
    end else begin
      if (start) begin
        issuing <= 1'b1;
        iss_cnt <= '0;
        round_q <= round;
      end else if (issue) begin
        iss_cnt <= iss_cnt + 1'b1;
        if (iss_cnt == (LW+1)'(V_PER_PE)) issuing <= 1'b0;
      end
      if (r_adv) r_valid <= issue;
    end
  end

  always_ff @(posedge clk) begin
    if (issue) begin
      r_barrier <= (iss_cnt == (LW+1)'(V_PER_PE));
      r_addr    <= iss_cnt[LW-1:0];
    end
  end

  vid_t node_vid;
  assign node_vid = VID_W'({pe_gid, r_addr} & {(16+LW){1'b1}});

  wcc_apply_kernel u_kernel (
    .nodeid_in     (node_vid),
    .state_in      (r_barrier ? vstate_t'('0) : vs_rd_data),
    .round_in      (round_q),
    .barrier_in    (r_barrier),
    .valid_in      (r_valid),
    .ready         (k_ready),
    .nodeid_out    (k_nodeid_out),
    .state_out     (k_state_out),
    .state_barrier (k_state_barrier),
    .state_valid   (k_state_valid),
    .update_out    (k_update_out),
    .update_sender (k_update_sender),
    .update_round  (k_update_round),
    .barrier_out   (k_barrier_out),
    .update_valid  (k_update_valid),
    .update_ack    (q_ready)
  );

  assign vs_wr_en   = k_state_valid && !k_state_barrier;
  assign vs_wr_addr = k_nodeid_out[LW-1:0];
  assign vs_wr_data = k_state_out;

  assign q_valid = r_valid && (k_update_valid || k_barrier_out);
  assign q_data  = '{barrier: k_barrier_out, round: k_update_round,
                     sender: k_update_sender, data: k_update_out};

  assign done = r_valid && r_barrier && k_ready;

endmodule
