// Testbench of gravfm_gather together with a vertex storage and a simple
// stand-in for the apply module. Checks: the initial start hands the storage
// to apply; random WCC messages (many to the same vertex, back to back)
// leave every vertex with the minimum label and the active bit where it
// changed; the hazard stall occurs; a barrier stops input, flushes, starts
// apply with the next round and resumes after apply_done.
`include "tb_check.svh"
module tb_gravfm_gather;
  import gravfm_pkg::*;
  localparam int V = 16, LW = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 50000)

  logic start = 0, in_valid = 0, in_ready;
  message_t in_msg;
  logic vs_rd_en, vs_wr_en, sel_apply, apply_start, apply_round, apply_done = 0;
  logic [LW-1:0] vs_rd_addr, vs_wr_addr;
  vstate_t vs_rd_data, vs_wr_data;
  logic [LEVEL_W-1:0] level;
  logic ev_hazard, ev_message;
  gravfm_gather #(.V_PER_PE(V)) dut (.*);

  logic host_en = 1, host_we = 0, host_re = 0;
  logic [LW-1:0] host_addr; vstate_t host_wdata;
  gravfm_vertex_storage #(.V_PER_PE(V)) u_vs (
    .clk, .sel_apply,
    .g_rd_en (vs_rd_en), .g_rd_addr (vs_rd_addr), .g_wr_en (vs_wr_en), .g_wr_addr (vs_wr_addr),
    .g_wr_data (vs_wr_data),
    .a_rd_en (1'b0), .a_rd_addr ('0), .a_wr_en (1'b0), .a_wr_addr ('0), .a_wr_data ('0),
    .host_en, .host_we, .host_re, .host_addr, .host_wdata, .rd_data (vs_rd_data));

  vstate_t ref_m [V];
  int hazards = 0, starts = 0, last_start_round = -1;
  always @(posedge clk) begin
    if (ev_hazard) hazards++;
    if (apply_start) begin starts++; last_start_round = apply_round; end
  end

  task automatic send(message_t m);
    @(negedge clk); in_valid = 1; in_msg = m;
    @(posedge clk); while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic do_apply(int round_exp);
    wait (apply_start);
    `CHECK(apply_round == 1'(round_exp), "apply round")
    @(posedge clk);
    `CHECK(sel_apply == 1, "storage switched to apply")
    repeat (10) begin
      @(negedge clk);
      in_valid = 1; in_msg = '{barrier: 0, round: 1'(~round_exp), neighbor: 0, sender: 0, data: '0};
      #1 `CHECK(in_ready == 0, "no message accepted during apply");
    end
    in_valid = 0;
    @(negedge clk) apply_done = 1;
    @(negedge clk) apply_done = 0;
  endtask

  initial begin
    for (int i = 0; i < V; i++) begin
      @(negedge clk); host_we = 1; host_addr = i;
      host_wdata = '{label: 1000 + i, active: 0}; ref_m[i] = host_wdata;
    end
    @(negedge clk); host_we = 0; host_en = 0; rst = 0;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    do_apply(0);
    `CHECK(level == 1, "level after first apply")
    for (int i = 0; i < 300; i++) begin
      message_t m;
      automatic int v = (i % 4 < 2) ? 3 : 4 + $urandom % (V - 4);
      automatic int lab = (i % 4 == 0) ? 999 - i : (i % 4 == 1) ? 1999 : $urandom % 2000;
      // vertex 3 gets a falling label followed at once by a larger one: the
      // second read must wait for the first write
      m = '{barrier: 0, round: 0, neighbor: VID_W'(v), sender: $urandom, data: '{label: lab}};
      if (m.data.label < ref_m[v].label) ref_m[v] = '{label: m.data.label, active: 1};
      send(m);
    end
    send('{barrier: 1, round: 0, neighbor: 0, sender: 0, data: '0});
    do_apply(1);
    `CHECK(starts == 2 && level == 2, "two apply passes")
    `CHECK(hazards > 0, "hazard stall observed")
    $display("hazard stalls: %0d, vertex 3 label %0d", hazards, ref_m[3].label);
    // read back through the host port
    host_en = 1;
    for (int i = 0; i < V; i++) begin
      @(negedge clk); host_re = 1; host_addr = i;
      @(negedge clk); host_re = 0;
      `CHECK(vs_rd_data == ref_m[i], "final vertex state")
    end
    `TB_FINISH
  end
endmodule
