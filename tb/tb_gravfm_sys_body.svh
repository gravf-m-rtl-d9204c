// Shared body of the system testbenches: NF copies of gravfm_fpga, fully
// meshed through stream models, run weakly connected components on a
// generated undirected graph. The including module defines NF, NP, V, E
// (matching the FPGA parameters), DEG (random edges per vertex), NC
// (number of planted components), HUB (degree of a hub vertex) and
// MAX_CYC (run time limit), and the macro GRAVFM_PARAMS (the parameter list
// of the FPGA instances, empty for the defaults).
//
// The testbench computes, independently of the design, the bulk-synchronous
// WCC run: final labels, number of supersteps and the number of messages
// (edge traversals). It loads the graph through the host ports, starts all
// FPGAs, waits for done everywhere, then reads every vertex back and
// compares. It also counts how often each mechanism of the design fired and
// counts a failure for any that never did.
  import gravfm_pkg::*;
  localparam int NL = NP * V;          // vertices per FPGA
  localparam int NV = NF * NL;         // vertices in the system
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, MAX_CYC)

  logic start = 0;
  host_req_t host_req [NF];
  logic host_rvalid [NF]; logic [63:0] host_rdata [NF];
  logic st_tx_valid [NF][NF], st_tx_ready [NF][NF], st_rx_valid [NF][NF], st_rx_ready [NF][NF];
  logic [STREAM_W-1:0] st_tx_data [NF][NF], st_rx_data [NF][NF];
  logic done [NF]; logic [NP-1:0] terminated [NF]; logic [63:0] msg_count [NF];

  for (genvar a = 0; a < NF; a++) begin : g_f
    gravfm_fpga `GRAVFM_PARAMS u_fpga (
      .clk, .rst, .fpga_id (8'(a)), .start,
      .host_req (host_req[a]), .host_rvalid (host_rvalid[a]), .host_rdata (host_rdata[a]),
      .st_tx_valid (st_tx_valid[a]), .st_tx_data (st_tx_data[a]), .st_tx_ready (st_tx_ready[a]),
      .st_rx_valid (st_rx_valid[a]), .st_rx_data (st_rx_data[a]), .st_rx_ready (st_rx_ready[a]),
      .done (done[a]), .terminated (terminated[a]), .msg_count (msg_count[a]));
    for (genvar b = 0; b < NF; b++) begin : g_link
      if (a != b) begin : g_m
        gravfm_stream_model u_link (
          .clk, .rst,
          .in_valid (st_tx_valid[a][b]), .in_data (st_tx_data[a][b]), .in_ready (st_tx_ready[a][b]),
          .out_valid (st_rx_valid[b][a]), .out_data (st_rx_data[b][a]), .out_ready (st_rx_ready[b][a]));
      end else begin : g_none
        assign st_tx_ready[a][b] = 1'b0;
        assign st_rx_valid[a][b] = 1'b0;
        assign st_rx_data[a][b]  = '0;
      end
    end
  end

  // ---- mechanism counters ----
  longint n_hazard = 0, n_empty = 0, n_blocked = 0, n_seq = 0, n_filt = 0, n_ahead = 0,
          n_bar = 0, n_offchip = 0, n_stream_wait = 0;
  for (genvar a = 0; a < NF; a++) begin : g_cnt
    for (genvar p = 0; p < NP; p++) begin : g_p
      always @(posedge clk) if (!rst) begin
        if (g_f[a].u_fpga.g_pe[p].u_pe.ev_hazard)     n_hazard++;
        if (g_f[a].u_fpga.g_pe[p].u_pe.ev_empty_list) n_empty++;
        if (g_f[a].u_fpga.g_pe[p].u_rx.ev_ahead)      n_ahead++;
        if (g_f[a].u_fpga.g_pe[p].u_rx.out_valid && g_f[a].u_fpga.g_pe[p].u_rx.out_ready &&
            g_f[a].u_fpga.g_pe[p].u_rx.out_upd.barrier) n_bar++;
      end
    end
    always @(posedge clk) if (!rst) begin
      if (g_f[a].u_fpga.u_xbar.ev_blocked)   n_blocked++;
      if (g_f[a].u_fpga.u_xbar.ev_seq_block) n_seq++;
      if (g_f[a].u_fpga.u_tx.ev_filtered)    n_filt++;
      for (int b = 0; b < NF; b++) begin
        if (st_tx_valid[a][b]) n_offchip++;
        if (g_f[a].u_fpga.u_tx.s_valid && !g_f[a].u_fpga.u_tx.all_ready) n_stream_wait++;
      end
    end
  end

  // ---- graph and reference ----
  int adj [NV][$];
  int label_ref [NV];
  longint msgs_ref = 0;
  int steps_ref = 0;

  function automatic int pe_of(int v);  return v / V; endfunction     // global PE number
  function automatic int fpga_of(int v); return v / NL; endfunction

  task automatic add_edge(int u, int v);
    adj[u].push_back(v); adj[v].push_back(u);
  endtask

  task automatic make_graph();
    for (int u = 0; u < NV; u++) begin
      if (u % 13 == 5) continue;                     // isolated vertices
      for (int k = 0; k < DEG; k++) begin
        automatic int v = ($urandom % (NV / NC)) * NC + u % NC;   // stay in the planted component
        if (v % 13 == 5 || v == u) continue;
        add_edge(u, v);
      end
    end
    for (int k = 1; k <= HUB; k++)                   // a hub: many updates hit one vertex
      if ((k * NC) % 13 != 5 && k * NC < NV) add_edge(0, k * NC);
  endtask

  task automatic reference();
    automatic int lab [NV];
    automatic bit act [NV], nact [NV];
    automatic bit any = 1;
    for (int v = 0; v < NV; v++) begin lab[v] = v; act[v] = 1; end
    steps_ref = 0;
    while (any) begin
      automatic int nl [NV];
      steps_ref++;
      for (int v = 0; v < NV; v++) begin nl[v] = lab[v]; nact[v] = 0; end
      for (int u = 0; u < NV; u++) if (act[u]) begin
        msgs_ref += adj[u].size();
        foreach (adj[u][i]) if (lab[u] < nl[adj[u][i]]) begin nl[adj[u][i]] = lab[u]; nact[adj[u][i]] = 1; end
      end
      any = 0;
      for (int v = 0; v < NV; v++) begin lab[v] = nl[v]; act[v] = nact[v]; any |= nact[v]; end
    end
    for (int v = 0; v < NV; v++) label_ref[v] = lab[v];
  endtask

  // ---- host access ----
  task automatic hw(int a, host_target_e t, bit bc, int pe, int addr, logic [63:0] d);
    @(negedge clk);
    host_req[a] = '{we: 1'b1, re: 1'b0, target: t, bcast: bc, pe: 8'(pe), addr: 32'(addr), wdata: d};
  endtask

  task automatic load(int a);
    // zero every index entry of every PE with broadcast writes
    for (int u = 0; u < NV; u++) hw(a, HOST_INDEX, 1, 0, u, 64'(0));
    for (int p = 0; p < NP; p++) begin
      automatic int gp = a * NP + p, ptr = 0;
      for (int u = 0; u < NV; u++) begin
        automatic int len = 0, st = ptr;
        foreach (adj[u][i]) if (pe_of(adj[u][i]) == gp) begin
          hw(a, HOST_EDGE, 0, p, ptr, 64'(adj[u][i] % V)); ptr++; len++;
        end
        if (len != 0) hw(a, HOST_INDEX, 0, p, u, {32'(len), 32'(st)});
      end
      `CHECK(ptr <= E, "edges of a PE fit its edgelist storage")
      for (int s = 0; s < V; s++) begin
        automatic vstate_t vs = '{label: VID_W'(gp * V + s), active: 1'b1};
        hw(a, HOST_VERTEX, 0, p, s, 64'(vs));
      end
    end
    for (int l = 0; l < NL; l++) begin
      automatic logic [63:0] row = 0;
      foreach (adj[a * NL + l][i]) row[fpga_of(adj[a * NL + l][i])] = 1'b1;
      hw(a, HOST_FILTER, 0, 0, l, row);
    end
    @(negedge clk); host_req[a] = '0;
  endtask

  task automatic readback(int a);
    for (int p = 0; p < NP; p++)
      for (int s = 0; s < V; s++) begin
        automatic int v = (a * NP + p) * V + s;
        @(negedge clk);
        host_req[a] = '{we: 1'b0, re: 1'b1, target: HOST_VERTEX, bcast: 1'b0, pe: 8'(p), addr: 32'(s), wdata: '0};
        @(negedge clk);
        host_req[a] = '0;
        `CHECK(host_rvalid[a], "readback valid")
        if (host_rdata[a][VID_W:1] != VID_W'(label_ref[v])) begin
          failures++;
          if (failures < 10) $display("FAIL: vertex %0d label %0d expected %0d", v, host_rdata[a][VID_W:1], label_ref[v]);
        end
        checks++;
      end
  endtask

  initial begin
    automatic longint t0, t1, msgs = 0;
    automatic int nedges = 0;
    for (int a = 0; a < NF; a++) host_req[a] = '0;
    make_graph();
    reference();
    for (int u = 0; u < NV; u++) nedges += adj[u].size();
    $display("graph: %0d vertices, %0d directed edges; reference: %0d supersteps, %0d messages",
             NV, nedges, steps_ref, msgs_ref);
    repeat (3) @(posedge clk);
    rst = 0;
    for (int a = 0; a < NF; a++) fork automatic int aa = a; load(aa); join_none
    wait fork;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t0 = $time;
    for (int a = 0; a < NF; a++) wait (done[a]);
    t1 = $time;
    repeat (5) @(negedge clk);
    for (int a = 0; a < NF; a++) msgs += msg_count[a];
    $display("run: %0d cycles, %0d messages gathered", (t1 - t0) / 10, msgs);
    `CHECK(msgs == msgs_ref, "messages gathered equal the reference edge traversals")
    // every PE receives one barrier per superstep except the last (terminating) one
    `CHECK(n_bar == longint'(NF * NP) * (steps_ref), "barriers delivered per superstep")
    for (int a = 0; a < NF; a++) fork automatic int aa = a; readback(aa); join_none
    wait fork;
    $display("mechanisms: hazard=%0d empty_list=%0d xbar_blocked=%0d seq_block=%0d filtered=%0d next_round_early=%0d offchip=%0d stream_wait=%0d barriers=%0d",
             n_hazard, n_empty, n_blocked, n_seq, n_filt, n_ahead, n_offchip, n_stream_wait, n_bar);
    `CHECK(n_hazard > 0, "mechanism: gather hazard stall")
    `CHECK(n_empty > 0, "mechanism: update with no local edges")
    `CHECK(n_blocked > 0, "mechanism: crossbar blocked by a full receiver")
    `CHECK(n_seq > 0, "mechanism: channel sequentialisation at the outgoing endpoint")
    `CHECK(n_filt > 0, "mechanism: update filtered from some FPGA")
    `CHECK(n_ahead > 0, "mechanism: floating barrier, next-round word buffered")
    `CHECK(n_offchip > 0, "mechanism: off-chip transfer")
    `CHECK(n_stream_wait > 0, "mechanism: outgoing endpoint waited for a stream")
    `TB_FINISH
  end
