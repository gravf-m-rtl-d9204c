// Testbench of gravfm_vertex_storage: writes and reads through the gather,
// apply and host sides and checks that only the selected side reaches the
// memory.
`include "tb_check.svh"
module tb_gravfm_vertex_storage;
  import gravfm_pkg::*;
  localparam int V = 16, LW = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 20000)

  logic sel_apply = 0, host_en = 0;
  logic g_rd_en = 0, g_wr_en = 0, a_rd_en = 0, a_wr_en = 0, host_we = 0, host_re = 0;
  logic [LW-1:0] g_rd_addr, g_wr_addr, a_rd_addr, a_wr_addr, host_addr;
  vstate_t g_wr_data, a_wr_data, host_wdata, rd_data;
  gravfm_vertex_storage #(.V_PER_PE(V)) dut (.*);

  vstate_t ref_m [V];

  task automatic step(); @(negedge clk); endtask

  initial begin
    // host fills the memory
    host_en = 1;
    for (int i = 0; i < V; i++) begin
      step(); host_we = 1; host_addr = i; host_wdata = '{label: $urandom, active: 1'($urandom)};
      ref_m[i] = host_wdata;
    end
    step(); host_we = 0;
    for (int k = 0; k < 400; k++) begin
      automatic int mode = $urandom % 3;
      step();
      host_en = (mode == 2); sel_apply = (mode == 1);
      g_wr_en = 1'($urandom); g_wr_addr = $urandom; g_wr_data = '{label: $urandom, active: 1'($urandom)};
      a_wr_en = 1'($urandom); a_wr_addr = $urandom; a_wr_data = '{label: $urandom, active: 1'($urandom)};
      host_we = 1'($urandom); host_addr = $urandom; host_wdata = '{label: $urandom, active: 1'($urandom)};
      g_rd_en = 1; a_rd_en = 1; host_re = 1;
      g_rd_addr = $urandom; a_rd_addr = $urandom;
      begin
        automatic int ra = (mode == 2) ? int'(host_addr) : (mode == 1) ? int'(a_rd_addr) : int'(g_rd_addr);
        automatic vstate_t exp_q = ref_m[ra];
        @(posedge clk);
        if (mode == 2 && host_we) ref_m[host_addr] = host_wdata;
        if (mode == 1 && a_wr_en) ref_m[a_wr_addr] = a_wr_data;
        if (mode == 0 && g_wr_en) ref_m[g_wr_addr] = g_wr_data;
        #1 `CHECK(rd_data == exp_q, "read data of selected side")
      end
    end
    `TB_FINISH
  end
endmodule
