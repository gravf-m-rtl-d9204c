// Testbench of gravfm_apply with a vertex storage: random initial states;
// after start the update queue side must see one update per active vertex,
// in vertex order, with label, sender vid and round, then the barrier; all
// active bits must be cleared; done pulses once. Run twice: with random
// queue backpressure, and without, where done must come V + 1 cycles after the
// cycle that samples start (one item per cycle: V vertices and the barrier).
`include "tb_check.svh"
module tb_gravfm_apply;
  import gravfm_pkg::*;
  localparam int V = 16, LW = 4, GID = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 50000)

  logic [15:0] pe_gid = GID;
  logic start = 0, round = 0, done;
  logic vs_rd_en, vs_wr_en, q_valid, q_ready = 0;
  logic [LW-1:0] vs_rd_addr, vs_wr_addr;
  vstate_t vs_rd_data, vs_wr_data;
  update_t q_data;
  gravfm_apply #(.V_PER_PE(V)) dut (.*);

  logic host_en = 1, host_we = 0, host_re = 0;
  logic [LW-1:0] host_addr; vstate_t host_wdata;
  gravfm_vertex_storage #(.V_PER_PE(V)) u_vs (
    .clk, .sel_apply (1'b1),
    .g_rd_en (1'b0), .g_rd_addr ('0), .g_wr_en (1'b0), .g_wr_addr ('0), .g_wr_data ('0),
    .a_rd_en (vs_rd_en), .a_rd_addr (vs_rd_addr), .a_wr_en (vs_wr_en), .a_wr_addr (vs_wr_addr),
    .a_wr_data (vs_wr_data),
    .host_en, .host_we, .host_re, .host_addr, .host_wdata, .rd_data (vs_rd_data));

  vstate_t ref_m [V];
  update_t exp_q[$];
  int dones = 0;
  bit bp = 1;

  int since_start = 0, done_at = 0;
  always @(posedge clk) begin
    since_start <= start ? 0 : since_start + 1;
    if (!rst && done) begin dones++; done_at = since_start; end
    if (!rst && q_valid && q_ready) begin
      if (exp_q.size() == 0) begin checks++; failures++; $display("FAIL: extra update"); end
      else begin
        automatic update_t u = exp_q.pop_front();
        `CHECK(q_data.barrier == u.barrier && q_data.round == u.round &&
               (u.barrier || (q_data.sender == u.sender && q_data.data == u.data)), "update stream")
      end
    end
  end
  always @(negedge clk) q_ready <= bp ? ($urandom % 3 != 0) : 1'b1;

  task automatic pass(int r);
    int cyc = 0;
    host_en = 1;
    for (int i = 0; i < V; i++) begin
      @(negedge clk); host_we = 1; host_addr = i;
      host_wdata = '{label: $urandom % 100, active: 1'($urandom)}; ref_m[i] = host_wdata;
      if (host_wdata.active)
        exp_q.push_back('{barrier: 0, round: 1'(r), sender: VID_W'(GID * V + i), data: '{label: host_wdata.label}});
    end
    exp_q.push_back('{barrier: 1, round: 1'(r), sender: 0, data: 0});
    @(negedge clk); host_we = 0; host_en = 0; rst = 0; dones = 0;
    start = 1; round = 1'(r);
    @(negedge clk); start = 0;
    while (dones == 0) @(posedge clk);
    cyc = done_at;
    `CHECK(exp_q.size() == 0, "all updates and the barrier issued")
    if (!bp) begin `CHECK(cyc == V + 1, "apply pass takes V+1 cycles") $display("apply pass cycles=%0d", cyc); end
    repeat (3) @(posedge clk);
    `CHECK(dones == 1, "done pulsed once")
    host_en = 1;
    for (int i = 0; i < V; i++) begin
      @(negedge clk); host_re = 1; host_addr = i;
      @(negedge clk); host_re = 0;
      `CHECK(vs_rd_data.label == ref_m[i].label && !vs_rd_data.active, "state written back, active cleared")
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    pass(1);
    bp = 0;
    pass(0);
    `TB_FINISH
  end
endmodule
