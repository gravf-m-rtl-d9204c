// Testbench of gravfm_scatter: loads a random local edge list for every
// vertex of a small system, streams updates (some from senders without local
// edges) and a barrier, and compares the messages, in order, with those
// expected from the edge lists, under random backpressure. Then measures
// that a 20-edge list streams out at one message per cycle.
`include "tb_check.svh"
module tb_gravfm_scatter;
  import gravfm_pkg::*;
  localparam int NF = 2, NP = 2, V = 8, E = 64, NV = NF * NP * V, GID = 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 50000)

  logic [15:0] pe_gid = GID;
  logic host_index_we = 0, host_edge_we = 0;
  logic [31:0] host_addr; logic [63:0] host_wdata;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, ev_empty_list;
  update_t in_upd; message_t out_msg;
  gravfm_scatter #(.N_FPGA(NF), .N_PE(NP), .V_PER_PE(V), .E_PER_PE(E)) dut (.*);

  int st [NV], ln [NV], ed [E];
  message_t exp_q[$];
  int n_empty_exp = 0, n_empty = 0, got = 0;
  bit rand_ready = 1;

  always @(posedge clk) if (!rst && ev_empty_list) n_empty++;

  // output checker
  always @(posedge clk) begin
    if (!rst && out_valid && out_ready) begin
      got++;
      if (exp_q.size() == 0) begin
        checks++; failures++; $display("FAIL: unexpected message");
      end else begin
        automatic message_t m = exp_q.pop_front();
        if (m.barrier) `CHECK(out_msg.barrier && out_msg.round == m.round, "barrier passed through")
        else           `CHECK(out_msg == m, "message matches edge list")
      end
    end
  end
  always @(negedge clk) out_ready <= rand_ready ? ($urandom % 4 != 0) : 1'b1;

  task automatic send(update_t u);
    @(negedge clk); in_valid = 1; in_upd = u;
    @(posedge clk); while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  initial begin
    int e = 0;
    for (int v = 0; v < NV; v++) begin
      ln[v] = (v == 5) ? 20 : (($urandom % 3 == 0) ? 0 : $urandom % 4 + 1);
      st[v] = e;
      for (int k = 0; k < ln[v]; k++) begin ed[e] = $urandom % V; e++; end
    end
    for (int v = 0; v < NV; v++) begin
      @(negedge clk); host_index_we = 1; host_addr = v; host_wdata = {32'(ln[v]), 32'(st[v])};
    end
    for (int k = 0; k < e; k++) begin
      @(negedge clk); host_index_we = 0; host_edge_we = 1; host_addr = k; host_wdata = 64'(ed[k]);
    end
    @(negedge clk); host_edge_we = 0; rst = 0;
    for (int i = 0; i < 60; i++) begin
      update_t u;
      automatic int s = $urandom % NV;
      if (s == 5) s = 6;
      u = '{barrier: 0, round: 1'(i / 30), sender: s, data: '{label: $urandom}};
      if (ln[s] == 0) n_empty_exp++;
      for (int k = 0; k < ln[s]; k++)
        exp_q.push_back('{barrier: 0, round: u.round, neighbor: VID_W'(GID * V + ed[st[s] + k]),
                          sender: u.sender, data: u.data});
      send(u);
    end
    exp_q.push_back('{barrier: 1, round: 1, neighbor: '0, sender: '0, data: '0});
    send('{barrier: 1, round: 1, sender: '0, data: '0});
    while (exp_q.size() > 0) @(posedge clk);
    repeat (5) @(posedge clk);
    `CHECK(n_empty == n_empty_exp, "empty edge lists skipped")
    // throughput: one update with 20 local edges, no backpressure
    rand_ready = 0;
    repeat (3) @(posedge clk);
    for (int k = 0; k < 20; k++)
      exp_q.push_back('{barrier: 0, round: 0, neighbor: VID_W'(GID * V + ed[st[5] + k]),
                        sender: 5, data: '{label: 7}});
    begin
      automatic int first = -1, last = -1, cyc = 0;
      fork
        send('{barrier: 0, round: 0, sender: 5, data: '{label: 7}});
        begin
          while (exp_q.size() > 0) begin
            @(posedge clk); cyc++;
            if (out_valid && out_ready) begin if (first < 0) first = cyc; last = cyc; end
          end
        end
      join
      `CHECK(last - first == 19, "20 edges in 20 consecutive cycles")
    end
    `TB_FINISH
  end
endmodule
