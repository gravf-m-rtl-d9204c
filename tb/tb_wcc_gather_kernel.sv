// Testbench of wcc_gather_kernel: random messages and states against the
// WCC rule "keep the smaller label, mark active when it changed".
`include "tb_check.svh"
module tb_wcc_gather_kernel;
  import gravfm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 10000)

  logic [LEVEL_W-1:0] level_in;
  vid_t nodeid_in, sender_in, nodeid_out;
  payload_t message_in;
  vstate_t state_in, state_out;
  logic valid_in, ready, state_valid, state_ack;

  wcc_gather_kernel dut (.*);

  initial begin
    for (int i = 0; i < 2000; i++) begin
      level_in = LEVEL_W'($urandom); nodeid_in = $urandom; sender_in = $urandom;
      message_in.label = (i % 3 == 0) ? $urandom : ($urandom % 16);
      state_in.label = (i % 5 == 0) ? message_in.label : ($urandom % 16);
      state_in.active = 1'($urandom); valid_in = 1'($urandom); state_ack = 1'($urandom);
      #1;
      begin
        automatic logic smaller = message_in.label < state_in.label;
        `CHECK(state_out.label == (smaller ? message_in.label : state_in.label), "label")
        `CHECK(state_out.active == (smaller ? 1'b1 : state_in.active), "active")
        `CHECK(nodeid_out == nodeid_in, "nodeid")
        `CHECK(state_valid == valid_in && ready == state_ack, "handshake")
      end
      @(posedge clk);
    end
    `TB_FINISH
  end
endmodule
