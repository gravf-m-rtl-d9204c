// Testbench of gravfm_hazard: random pushes, pops and queries against a
// reference queue of outstanding addresses; stall must be raised exactly
// for an outstanding address or a full record.
`include "tb_check.svh"
module tb_gravfm_hazard;
  localparam int AW = 3, D = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 20000)

  logic [AW-1:0] check_addr, push_addr;
  logic stall, push = 0, pop = 0, empty;
  gravfm_hazard #(.AW(AW), .DEPTH(D)) dut (.*);

  logic [AW-1:0] q[$];
  int stalls = 0;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      check_addr = $urandom; push_addr = check_addr;
      pop  = (q.size() > 0) && ($urandom % 2);
      #1;
      begin
        automatic bit m = 0;
        foreach (q[j]) if (q[j] == check_addr) m = 1;
        `CHECK(stall == (m || q.size() == D), "stall")
        `CHECK(empty == (q.size() == 0), "empty")
        if (stall) stalls++;
      end
      push = !stall && ($urandom % 4 != 0);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(push_addr);
      #1 push = 0; pop = 0;
    end
    `CHECK(stalls > 100, "stalls observed")
    `TB_FINISH
  end
endmodule
