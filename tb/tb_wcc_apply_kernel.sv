// Testbench of wcc_apply_kernel: random vertex states; checks that the
// active bit is cleared, that an update with the label is issued exactly for
// active vertices, and that round, sender and barrier pass through.
`include "tb_check.svh"
module tb_wcc_apply_kernel;
  import gravfm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 10000)

  vid_t nodeid_in, nodeid_out, update_sender;
  vstate_t state_in, state_out;
  payload_t update_out;
  logic round_in, barrier_in, valid_in, ready, state_barrier, state_valid;
  logic update_round, barrier_out, update_valid, update_ack;

  wcc_apply_kernel dut (.*);

  initial begin
    for (int i = 0; i < 2000; i++) begin
      nodeid_in = $urandom; state_in.label = $urandom; state_in.active = 1'($urandom);
      round_in = 1'($urandom); barrier_in = 1'($urandom); valid_in = 1'($urandom);
      update_ack = 1'($urandom);
      #1;
      `CHECK(state_out.label == state_in.label && state_out.active == 1'b0, "state write-back")
      `CHECK(state_valid == valid_in && state_barrier == barrier_in, "state valid/barrier")
      `CHECK(update_valid == (valid_in && state_in.active), "update_valid")
      `CHECK(update_out.label == state_in.label && update_sender == nodeid_in, "update payload")
      `CHECK(update_round == round_in && barrier_out == barrier_in, "round/barrier")
      `CHECK(ready == update_ack && nodeid_out == nodeid_in, "ready/nodeid")
      @(posedge clk);
    end
    `TB_FINISH
  end
endmodule
