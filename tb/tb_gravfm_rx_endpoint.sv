// Testbench of gravfm_rx_endpoint in a 3-PE system. Checks: updates of the
// current round are delivered in order; barriers are absorbed; the round
// closes only when all 3 barriers are in and the announced count of updates
// was received (a barrier arriving ahead of its updates makes it wait);
// words of the next round wait in their own buffer; after a round with no
// active PE, terminate rises and no barrier is passed on.
`include "tb_check.svh"
module tb_gravfm_rx_endpoint;
  import gravfm_pkg::*;
  localparam int NF = 1, NP = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 50000)

  logic in_valid = 0, out_valid, out_ready = 0, terminate, cur_round, ev_ahead, ev_count_wait;
  net_word_t in_word; logic [1:0] in_space; update_t out_upd;
  gravfm_rx_endpoint #(.N_FPGA(NF), .N_PE(NP), .DEPTH(8)) dut (.*);

  update_t got[$];
  int waits = 0, aheads = 0;
  always @(posedge clk) if (!rst) begin
    if (out_valid && out_ready) got.push_back(out_upd);
    if (ev_count_wait) waits++;
    if (ev_ahead) aheads++;
  end
  always @(negedge clk) out_ready <= ($urandom % 3 != 0);

  task automatic push(net_word_t w);
    @(negedge clk);
    while (!in_space[w.round]) @(negedge clk);
    in_valid = 1; in_word = w;
    @(negedge clk); in_valid = 0;
  endtask
  function automatic net_word_t upd(int r, int s);
    return '{barrier: 0, round: 1'(r), active: 0, count: 0, sender: s, data: '{label: s + 100}};
  endfunction
  function automatic net_word_t bar(int r, int c, bit a);
    return '{barrier: 1, round: 1'(r), active: a, count: c, sender: 0, data: 0};
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst = 0;
    // round 0: PE0 sends 2 updates, PE1 sends its barrier ahead of its update,
    // PE2 is idle; round-1 words arrive early.
    push(upd(0, 1)); push(bar(1 - 1, 2, 1));       // PE0's two-update barrier after one update
    push(bar(0, 1, 1));                              // PE1 barrier, its update still missing
    push(bar(0, 0, 0));                              // PE2 barrier
    push(upd(1, 50));                                // next round, must wait
    repeat (20) @(posedge clk);
    `CHECK(got.size() == 1 && got[0].sender == 1, "only the current round delivered")
    `CHECK(cur_round == 0, "round not closed while updates missing")
    push(upd(0, 2)); push(upd(0, 3));
    repeat (20) @(posedge clk);
    `CHECK(got.size() == 5, "round closed: 3 updates + barrier + next-round update")
    if (got.size() == 5) begin
      `CHECK(got[1].sender == 2 && got[2].sender == 3, "updates in order")
      `CHECK(got[3].barrier && got[3].round == 0, "barrier passed to PE")
      `CHECK(!got[4].barrier && got[4].round == 1 && got[4].sender == 50, "early word delivered next round")
    end
    `CHECK(cur_round == 1, "switched to round 1")
    `CHECK(waits > 0 && aheads > 0, "count wait and early word observed")
    // round 1: the update sent is the only one; nobody reports activity for round 0->1 ... then round 0 idle
    push(bar(1, 1, 1)); push(bar(1, 0, 0)); push(bar(1, 0, 0));
    repeat (20) @(posedge clk);
    `CHECK(got.size() == 6 && got[5].barrier && got[5].round == 1, "second barrier")
    `CHECK(!terminate, "not terminated while active")
    push(bar(0, 0, 0)); push(bar(0, 0, 0)); push(bar(0, 0, 0));
    repeat (20) @(posedge clk);
    `CHECK(terminate, "terminate after an idle round")
    `CHECK(got.size() == 6, "no barrier passed on at termination")
    `TB_FINISH
  end
endmodule
