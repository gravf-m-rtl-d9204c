// Testbench of gravfm_update_queue: random pushes and pops against a
// reference queue; it must hold exactly V_PER_PE + 1 entries.
`include "tb_check.svh"
module tb_gravfm_update_queue;
  import gravfm_pkg::*;
  localparam int V = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 20000)

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  update_t in_data, out_data;
  logic [$clog2(V+2)-1:0] level;
  gravfm_update_queue #(.V_PER_PE(V)) dut (.*);

  update_t q[$];
  int fulls = 0;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      `CHECK(in_ready == (q.size() < V + 1), "in_ready / capacity V+1")
      `CHECK(out_valid == (q.size() > 0), "out_valid")
      if (q.size() > 0) `CHECK(out_data == q[0], "head data")
      if (q.size() == V + 1) fulls++;
      in_valid = ($urandom % 100) < ((i / 500) % 2 ? 70 : 30);
      out_ready = ($urandom % 100) < ((i / 500) % 2 ? 30 : 70);
      in_data = '{barrier: 1'($urandom), round: 1'($urandom), sender: $urandom, data: '{label: $urandom}};
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    `CHECK(fulls > 0, "queue filled")
    `TB_FINISH
  end
endmodule
