// Testbench of one gravfm_pe forming a single-PE system (1 FPGA, 1 PE, 32
// vertices). The testbench plays the network: it loops every update the PE
// issues back into its input (with random stalls on both sides), passes the
// PE's barrier back once the round's updates are in, and stops when a
// round issued no update. Checks: final WCC labels against a reference,
// the number of gathered messages and of supersteps, and that the hazard
// stall and the empty-edge-list case occurred.
`include "tb_check.svh"
module tb_gravfm_pe;
  import gravfm_pkg::*;
  localparam int V = 32, E = 512;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 200000)

  logic start = 0; logic [15:0] pe_gid = 0;
  logic host_en = 1, host_vertex_we = 0, host_vertex_re = 0, host_index_we = 0, host_edge_we = 0;
  logic [31:0] host_addr = 0; logic [63:0] host_wdata = 0; vstate_t host_rdata;
  logic in_valid, in_ready, out_valid, out_ready;
  update_t in_upd, out_upd;
  logic [LEVEL_W-1:0] level; logic ev_hazard, ev_message, ev_empty_list;
  gravfm_pe #(.N_FPGA(1), .N_PE(1), .V_PER_PE(V), .E_PER_PE(E)) dut (.*);

  int adj [V][$];
  int lab_ref [V];
  int msgs_ref = 0, steps_ref = 0;
  update_t loop_q [$];
  int n_upd = 0, n_msg = 0, n_hz = 0, n_empty = 0, rounds = 0;
  bit finished = 0, in_gate = 0, out_gate = 0;

  always @(negedge clk) begin in_gate <= ($urandom % 4 != 0); out_gate <= ($urandom % 4 != 0); end
  always_comb begin
    out_ready = !rst && out_gate && !finished;
    in_valid  = !rst && in_gate && loop_q.size() != 0;
    in_upd    = loop_q.size() != 0 ? loop_q[0] : '0;
  end
  always @(posedge clk) if (!rst) begin
    if (ev_message) n_msg++;
    if (ev_hazard) n_hz++;
    if (ev_empty_list) n_empty++;
    if (in_valid && in_ready) void'(loop_q.pop_front());
    if (out_valid && out_ready) begin
      if (!out_upd.barrier) begin n_upd++; loop_q.push_back(out_upd); end
      else begin
        rounds++;
        `CHECK(out_upd.round == 1'(rounds - 1), "barrier rounds alternate")
        if (n_upd == 0) finished = 1;        // no update this round: terminate
        else loop_q.push_back(out_upd);
        n_upd = 0;
      end
    end
  end

  task automatic hwr(ref logic we, input int addr, input logic [63:0] d);
    @(negedge clk); we = 1; host_addr = addr; host_wdata = d;
    @(negedge clk); we = 0;
  endtask

  initial begin
    automatic int ptr = 0;
    // graph: two chains, a star, a doubled edge, plus isolated vertices
    for (int k = 0; k < 2; k++) begin adj[31].push_back(30); adj[30].push_back(31); end
    for (int v = 1; v < 10; v++) begin adj[v].push_back(v - 1); adj[v - 1].push_back(v); end
    for (int v = 11; v < 20; v++) begin adj[v].push_back(v + 1); adj[v + 1].push_back(v); end
    for (int v = 23; v < 31; v++) begin adj[22].push_back(v); adj[v].push_back(22); adj[v].push_back(21); adj[21].push_back(v); end
    begin
      automatic int lab [V]; automatic bit act [V], nact [V]; automatic bit any = 1;
      for (int v = 0; v < V; v++) begin lab[v] = v; act[v] = 1; end
      while (any) begin
        automatic int nl [V];
        steps_ref++;
        for (int v = 0; v < V; v++) begin nl[v] = lab[v]; nact[v] = 0; end
        for (int u = 0; u < V; u++) if (act[u]) begin
          msgs_ref += adj[u].size();
          foreach (adj[u][i]) if (lab[u] < nl[adj[u][i]]) begin nl[adj[u][i]] = lab[u]; nact[adj[u][i]] = 1; end
        end
        any = 0;
        for (int v = 0; v < V; v++) begin lab[v] = nl[v]; act[v] = nact[v]; any |= nact[v]; end
      end
      for (int v = 0; v < V; v++) lab_ref[v] = lab[v];
    end
    repeat (2) @(posedge clk);
    for (int u = 0; u < V; u++) begin
      automatic int st = ptr;
      foreach (adj[u][i]) begin hwr(host_edge_we, ptr, 64'(adj[u][i])); ptr++; end
      hwr(host_index_we, u, {32'(adj[u].size()), 32'(st)});
      hwr(host_vertex_we, u, 64'({VID_W'(u), 1'b1}));
    end
    rst = 0; host_en = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (finished);
    repeat (20) @(posedge clk);
    `CHECK(rounds == steps_ref + 1, "one barrier per apply pass, last pass issues nothing")
    `CHECK(n_msg == msgs_ref, "messages gathered equal edge traversals")
    `CHECK(n_hz > 0, "hazard stall occurred")
    `CHECK(n_empty > 0, "update with an empty edge list occurred")
    host_en = 1;
    for (int v = 0; v < V; v++) begin
      @(negedge clk); host_vertex_re = 1; host_addr = v;
      @(negedge clk); host_vertex_re = 0;
      `CHECK(host_rdata.label == VID_W'(lab_ref[v]), "final label")
    end
    $display("supersteps=%0d messages=%0d hazards=%0d", rounds, n_msg, n_hz);
    `TB_FINISH
  end
endmodule
