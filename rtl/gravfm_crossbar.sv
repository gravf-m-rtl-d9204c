// gravfm_crossbar: the on-chip network of one FPGA, carrying broadcast
// updates and barriers.
//
// Sources: the update queues of the N_PE local PEs and the inbound streams
// from the other FPGAs (indexed by FPGA number; the own index is ignored).
// Destinations: the network endpoints of all local PEs, which all receive
// every word, and the outgoing endpoint, which receives the words of local
// PEs only (updates from remote FPGAs are broadcast to local PEs only).
//
// Each receiver says, per virtual channel, whether it can take a word now.
// A source is eligible when every local endpoint has room in the channel of
// its head word and, for a local source, the outgoing endpoint accepts that
// channel. A round-robin arbiter grants one eligible source per cycle and its
// word is written to all destinations in that cycle. One full receiver thus
// blocks the channel for everybody, as the paper notes for this broadcast
// network.
//
// For local sources the crossbar counts the updates each PE sent since its
// last barrier and stamps a PE's barrier with that count (every local PE
// receives all of them) and with an active bit (count != 0), used for
// termination. Remote words already carry the count their sender's outgoing
// endpoint stamped for this FPGA. One word per cycle and the arbitration
// policy are this design's choices.
module gravfm_crossbar
  import gravfm_pkg::*;
#(
  parameter int unsigned N_FPGA = 4,
  parameter int unsigned N_PE   = 9,
  localparam int unsigned NS    = N_PE + N_FPGA,
  localparam int unsigned PIW   = $clog2(N_PE > 1 ? N_PE : 2)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [7:0]       fpga_id,
  // local PE update queues
  input  logic             loc_valid [N_PE],
  output logic             loc_ready [N_PE],
  input  update_t          loc_upd   [N_PE],
  // inbound streams from remote FPGAs
  input  logic             rem_valid [N_FPGA],
  output logic             rem_ready [N_FPGA],
  input  net_word_t        rem_word  [N_FPGA],
  // broadcast to the local PE endpoints
  output logic             rx_valid,
  output net_word_t        rx_word,
  input  logic [1:0]       rx_space  [N_PE],
  // to the outgoing endpoint
  output logic             tx_valid,
  output net_word_t        tx_word,
  output logic [PIW-1:0]   tx_src,
  input  logic [1:0]       tx_accept,
  // events
  output logic             ev_blocked,   // a source waited for a full receiver
  output logic             ev_seq_block  // a local word waited for the outgoing channel
);

  logic [CNT_W-1:0] cnt [N_PE];
  logic [1:0]       all_space;
  logic [NS-1:0]    req, grant;
  logic [$clog2(NS)-1:0] gidx;
  logic             any;
  net_word_t        src_word [NS];
  logic [NS-1:0]    src_valid;
  logic [1:0]       tx_ok;

  assign tx_ok = (N_FPGA > 1) ? tx_accept : 2'b11;

  always_comb begin
    all_space = 2'b11;
    for (int unsigned p = 0; p < N_PE; p++) all_space &= rx_space[p];
  end

  always_comb begin
    for (int unsigned s = 0; s < N_PE; s++) begin
      src_valid[s]          = loc_valid[s];
      src_word[s].barrier   = loc_upd[s].barrier;
      src_word[s].round     = loc_upd[s].round;
      src_word[s].active    = (cnt[s] != '0);
      src_word[s].count     = loc_upd[s].barrier ? cnt[s] : '0;
      src_word[s].sender    = loc_upd[s].barrier ? VID_W'(int'(fpga_id) * N_PE + s) : loc_upd[s].sender;
      src_word[s].data      = loc_upd[s].data;
      req[s] = loc_valid[s] && all_space[loc_upd[s].round] && tx_ok[loc_upd[s].round];
    end
    for (int unsigned f = 0; f < N_FPGA; f++) begin
      src_valid[N_PE+f] = rem_valid[f] && (f != int'(fpga_id));
      src_word[N_PE+f]  = rem_word[f];
      req[N_PE+f]       = src_valid[N_PE+f] && all_space[rem_word[f].round];
    end
  end

  gravfm_rr_arbiter #(.N(NS)) u_arb (
    .clk, .rst, .req, .advance (1'b1), .grant, .grant_idx (gidx), .any
  );

  assign rx_valid = any;
  assign rx_word  = src_word[gidx];
  assign tx_valid = any && (int'(gidx) < N_PE) && (N_FPGA > 1);
  assign tx_word  = src_word[gidx];
  assign tx_src   = PIW'(gidx);

  always_comb begin
    for (int unsigned s = 0; s < N_PE; s++)   loc_ready[s] = grant[s];
    for (int unsigned f = 0; f < N_FPGA; f++) rem_ready[f] = grant[N_PE+f];
  end

  assign ev_blocked = |(src_valid & ~req);
  always_comb begin
    ev_seq_block = 1'b0;
    for (int unsigned s = 0; s < N_PE; s++)
      if (loc_valid[s] && all_space[loc_upd[s].round] && !tx_ok[loc_upd[s].round])
        ev_seq_block = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int unsigned s = 0; s < N_PE; s++) cnt[s] <= '0;
    end else begin
      for (int unsigned s = 0; s < N_PE; s++)
        if (grant[s]) cnt[s] <= loc_upd[s].barrier ? '0 : cnt[s] + 1'b1;
    end
  end

  // At most one source is granted per cycle, and only an eligible one.
  assert property (@(posedge clk) disable iff (rst) $onehot0(grant));
  assert property (@(posedge clk) disable iff (rst) (grant & ~req) == '0);

endmodule
