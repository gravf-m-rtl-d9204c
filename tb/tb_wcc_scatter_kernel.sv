// Testbench of wcc_scatter_kernel: random inputs and random message_ack.
// A reference register updated on acknowledged cycles must match the
// kernel's registered outputs (one pipeline stage).
`include "tb_check.svh"
module tb_wcc_scatter_kernel;
  import gravfm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 10000)

  payload_t update_in, message_out;
  vid_t sender_in, neighbor_in, neighbor_out, sender_out;
  logic round_in, barrier_in, valid_in, ready, round_out, barrier_out, valid_out, message_ack;
  logic [31:0] num_neighbors_in;

  wcc_scatter_kernel dut (.*);

  message_t ref_msg;
  logic ref_valid;

  initial begin
    ref_valid = 0; valid_in = 0; message_ack = 1;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      `CHECK(valid_out == ref_valid, "valid_out")
      if (ref_valid) begin
        `CHECK(message_out == ref_msg.data && neighbor_out == ref_msg.neighbor &&
               sender_out == ref_msg.sender && round_out == ref_msg.round &&
               barrier_out == ref_msg.barrier, "message fields")
      end
      update_in.label = $urandom; sender_in = $urandom; neighbor_in = $urandom;
      round_in = 1'($urandom); barrier_in = 1'($urandom); valid_in = 1'($urandom);
      num_neighbors_in = $urandom; message_ack = ($urandom % 4) != 0;
      #1 `CHECK(ready == message_ack, "ready")
      @(posedge clk);
      if (message_ack) begin
        ref_valid = valid_in;
        ref_msg = '{barrier: barrier_in, round: round_in, neighbor: neighbor_in,
                    sender: sender_in, data: update_in};
      end
    end
    `TB_FINISH
  end
endmodule
