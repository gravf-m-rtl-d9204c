// Testbench of gravfm_crossbar with 2 FPGAs of 2 PEs (this is FPGA 0).
// Each local PE sends bursts of updates closed by a barrier, the remote FPGA
// sends random words; receivers and the outgoing endpoint take words at
// random. Checks: at most one source granted per cycle; the broadcast word
// equals the granted source's head word; a local barrier carries the count of
// updates its PE sent since its previous barrier and the matching active bit;
// a word is broadcast only when every local receiver has room in its round and
// (local words) the outgoing endpoint accepts that round; remote words never
// go out again; every word is delivered exactly once, in source order; the
// blocking events occur.
`include "tb_check.svh"
module tb_gravfm_crossbar;
  import gravfm_pkg::*;
  localparam int NF = 2, NP = 2, NS = NP + NF, NB = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 100000)

  logic [7:0] fpga_id = 0;
  logic loc_valid [NP], loc_ready [NP]; update_t loc_upd [NP];
  logic rem_valid [NF], rem_ready [NF]; net_word_t rem_word [NF];
  logic rx_valid, tx_valid; net_word_t rx_word, tx_word;
  logic [1:0] rx_space [NP]; logic [0:0] tx_src; logic [1:0] tx_accept;
  logic ev_blocked, ev_seq_block;
  gravfm_crossbar #(.N_FPGA(NF), .N_PE(NP)) dut (.*);

  net_word_t exp_w [NS][$];     // expected broadcast words per source
  update_t   src_q [NP][$];
  net_word_t rem_q [$];
  int blocked = 0, seqb = 0, delivered = 0, total = 0;

  initial begin
    for (int s = 0; s < NP; s++)
      for (int b = 0; b < NB; b++) begin
        automatic int k = $urandom % 5;
        for (int i = 0; i < k; i++) begin
          automatic update_t u = '{barrier: 0, round: 1'(b), sender: VID_W'(s * 1000 + b * 10 + i), data: '{label: $urandom}};
          src_q[s].push_back(u);
          exp_w[s].push_back('{barrier: 0, round: 1'(b), active: 1'b1, count: 0, sender: u.sender, data: u.data});
        end
        src_q[s].push_back('{barrier: 1, round: 1'(b), sender: 0, data: 0});
        exp_w[s].push_back('{barrier: 1, round: 1'(b), active: k != 0, count: k, sender: s, data: 0});
      end
    for (int i = 0; i < 40; i++) begin
      automatic net_word_t w = '{barrier: 1'($urandom), round: 1'($urandom), active: 1'($urandom),
                                 count: $urandom, sender: $urandom, data: '{label: $urandom}};
      rem_q.push_back(w); exp_w[NP + 1].push_back(w);
    end
    for (int s = 0; s < NS; s++) total += exp_w[s].size();
  end

  always_comb begin
    for (int s = 0; s < NP; s++) begin
      loc_valid[s] = !rst && src_q[s].size() != 0;
      loc_upd[s]   = loc_valid[s] ? src_q[s][0] : '0;
    end
    rem_valid[0] = 1'b1; rem_word[0] = '0;      // own index: must be ignored
    rem_valid[1] = !rst && rem_q.size() != 0;
    rem_word[1]  = rem_valid[1] ? rem_q[0] : '0;
  end

  always @(negedge clk) begin
    for (int p = 0; p < NP; p++) rx_space[p] <= 2'($urandom);
    tx_accept <= 2'($urandom);
  end
  initial begin for (int p = 0; p < NP; p++) rx_space[p] = 0; tx_accept = 0; end

  always @(posedge clk) if (!rst) begin
    automatic int g = -1, ng = 0;
    for (int s = 0; s < NP; s++) if (loc_ready[s]) begin g = s; ng++; end
    for (int f = 0; f < NF; f++) if (rem_ready[f]) begin g = NP + f; ng++; end
    `CHECK(ng <= 1, "one grant per cycle")
    `CHECK(rx_valid == (ng == 1), "broadcast valid iff a grant")
    `CHECK(!rem_ready[0], "own FPGA index ignored")
    if (ev_blocked) blocked++;
    if (ev_seq_block) seqb++;
    if (ng == 1 && g >= 0) begin
      automatic net_word_t e = exp_w[g].pop_front();
      `CHECK(rx_word.barrier == e.barrier && rx_word.round == e.round &&
             rx_word.sender == e.sender && rx_word.data == e.data, "word matches source head")
      if (e.barrier) `CHECK(rx_word.count == e.count && rx_word.active == e.active, "barrier count/active stamp")
      `CHECK(rx_space[0][rx_word.round] && rx_space[1][rx_word.round], "receivers have room")
      `CHECK(tx_valid == (g < NP), "only local words go to the outgoing endpoint")
      if (g < NP) begin
        `CHECK(tx_accept[rx_word.round] && tx_src == 1'(g) && tx_word == rx_word, "outgoing endpoint word")
        void'(src_q[g].pop_front());
      end else void'(rem_q.pop_front());
      delivered++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (2000) @(posedge clk);
    `CHECK(delivered == total, "every word delivered once")
    for (int s = 0; s < NS; s++) `CHECK(exp_w[s].size() == 0, "source drained")
    `CHECK(blocked > 0 && seqb > 0, "blocking observed")
    `TB_FINISH
  end
endmodule
