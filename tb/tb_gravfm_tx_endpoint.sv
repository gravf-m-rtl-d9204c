// Testbench of gravfm_tx_endpoint: FPGA 1 of 3, 2 PEs of 8 vertices. The host
// writes a random filter bitmap; the crossbar side offers rounds of updates
// and barriers of both PEs, the streams accept at random. Checks: each update
// reaches exactly the remote FPGAs its bitmap row names, nothing goes to the
// own FPGA; each barrier goes to every remote FPGA with the number of updates
// its PE sent to that FPGA in the round; words of the next round are refused
// until both local barriers of the current round have passed; per stream,
// words arrive in order; the filter event occurs.
`include "tb_check.svh"
module tb_gravfm_tx_endpoint;
  import gravfm_pkg::*;
  localparam int NF = 3, NP = 2, V = 8, FID = 1, NR = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 100000)

  logic [7:0] fpga_id = FID;
  logic host_filter_we = 0; logic [31:0] host_addr = 0; logic [63:0] host_wdata = 0;
  logic in_valid; net_word_t in_word; logic [0:0] in_src; logic [1:0] in_accept;
  logic st_valid [NF]; logic [STREAM_W-1:0] st_data [NF]; logic st_ready [NF];
  logic cur_round, ev_filtered;
  gravfm_tx_endpoint #(.N_FPGA(NF), .N_PE(NP), .V_PER_PE(V)) dut (.*);

  logic [NF-1:0] row [NP * V];
  typedef struct { net_word_t w; int src; } item_t;
  item_t in_q [$];
  net_word_t exp_s [NF][$];
  int filt = 0, refused = 0, rounds_done = 0;

  initial begin
    automatic int c [NP][NF];
    for (int r = 0; r < NR; r++) begin
      for (int p = 0; p < NP; p++) for (int f = 0; f < NF; f++) c[p][f] = 0;
      for (int i = 0; i < 12; i++) begin
        automatic int p = $urandom % NP, slot = $urandom % V;
        automatic net_word_t w = '{barrier: 0, round: 1'(r), active: 1, count: 0,
                                   sender: VID_W'((FID * NP + p) * V + slot), data: '{label: $urandom}};
        in_q.push_back('{w: w, src: p});
      end
      for (int p = 0; p < NP; p++)
        in_q.push_back('{w: '{barrier: 1, round: 1'(r), active: 1, count: 0, sender: FID * NP + p, data: 0}, src: p});
    end
  end

  always_comb begin
    in_valid = !rst && in_q.size() != 0;
    in_word  = in_valid ? in_q[0].w : '0;
    in_src   = in_valid ? 1'(in_q[0].src) : '0;
  end
  always @(negedge clk) for (int f = 0; f < NF; f++) st_ready[f] <= ($urandom % 4 != 0);
  initial for (int f = 0; f < NF; f++) st_ready[f] = 0;

  int cnt [NP][NF];
  int bars = 0;
  always @(posedge clk) if (!rst) begin
    if (ev_filtered) filt++;
    for (int f = 0; f < NF; f++) if (st_valid[f]) begin
      `CHECK(f != FID, "nothing sent to the own FPGA")
      `CHECK(st_ready[f], "stream written only when ready")
      if (exp_s[f].size() == 0) begin checks++; failures++; $display("FAIL: unexpected word on stream %0d", f); end
      else begin
        automatic net_word_t e = exp_s[f].pop_front();
        `CHECK(stream_to_word(st_data[f]) == e, "stream word")
      end
    end
    if (in_valid && in_accept[in_word.round]) begin
      automatic item_t it = in_q.pop_front();
      `CHECK(it.w.round == 1'(bars / NP), "accepted only in its round")
      if (it.w.barrier) begin
        for (int f = 0; f < NF; f++) if (f != FID) begin
          automatic net_word_t b = it.w;
          b.count = cnt[it.src][f]; cnt[it.src][f] = 0;
          exp_s[f].push_back(b);
        end
        bars++;
      end else begin
        automatic logic [NF-1:0] m = row[it.w.sender - FID * NP * V];
        for (int f = 0; f < NF; f++) if (f != FID && m[f]) begin
          exp_s[f].push_back(it.w); cnt[it.src][f]++;
        end
      end
    end else if (in_valid && in_word.round != cur_round) refused++;
  end

  initial begin
    for (int p = 0; p < NP; p++) for (int f = 0; f < NF; f++) cnt[p][f] = 0;
    repeat (2) @(posedge clk);
    for (int i = 0; i < NP * V; i++) begin
      @(negedge clk); host_filter_we = 1; host_addr = i; row[i] = NF'($urandom); host_wdata = 64'(row[i]);
    end
    @(negedge clk); host_filter_we = 0; rst = 0;
    repeat (3000) @(posedge clk);
    `CHECK(in_q.size() == 0, "all words accepted")
    for (int f = 0; f < NF; f++) `CHECK(exp_s[f].size() == 0, "all expected stream words seen")
    `CHECK(refused > 0, "next-round words held back")
    `CHECK(filt > 0, "filter removed some destination")
    `CHECK(cur_round == 1'(NR), "round counter after all barriers")
    `TB_FINISH
  end
endmodule
