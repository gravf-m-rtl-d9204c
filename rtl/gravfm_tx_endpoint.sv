// gravfm_tx_endpoint: the outgoing off-chip endpoint of one FPGA.
//
// It receives, from the crossbar, every update and barrier of the local PEs
// and forwards them over the point-to-point streams to the other FPGAs:
//   - Virtual channels are sequentialised: the endpoint accepts words of one
//     round only, and switches to the other round once the barriers of all
//     N_PE local PEs for the current round have passed. Words of the next
//     round wait in the crossbar meanwhile.
//   - An update is sent only to the FPGAs the filter bitmap lists for its
//     sender (those hosting neighbours). It is written to all those streams
//     in the same cycle, once all of them have room.
//   - Per local PE and remote FPGA, the endpoint counts the updates it sent;
//     a PE's barrier goes to every remote FPGA carrying the count for that
//     FPGA, so the receivers can check that nothing is missing.
// Pipeline: the filter lookup takes one cycle (stage S), then the word waits
// in stage S until the streams accept it. Stream ports are indexed by FPGA
// number; the own index is never written. in_accept[r] says a word of round
// r can be taken this cycle.
module gravfm_tx_endpoint
  import gravfm_pkg::*;
#(
  parameter int unsigned N_FPGA   = 4,
  parameter int unsigned N_PE     = 9,
  parameter int unsigned V_PER_PE = 512,
  localparam int unsigned PIW     = $clog2(N_PE > 1 ? N_PE : 2)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [7:0]          fpga_id,
  // host write of the filter bitmap
  input  logic                host_filter_we,
  input  logic [31:0]         host_addr,
  input  logic [63:0]         host_wdata,
  // from the crossbar
  input  logic                in_valid,
  input  net_word_t           in_word,
  input  logic [PIW-1:0]      in_src,
  output logic [1:0]          in_accept,
  // streams to the remote FPGAs
  output logic                st_valid [N_FPGA],
  output logic [STREAM_W-1:0] st_data  [N_FPGA],
  input  logic                st_ready [N_FPGA],
  output logic                cur_round,
  // events
  output logic                ev_filtered  // an update was kept from some FPGA
);

  localparam int unsigned BW = $clog2(N_PE + 1);

  logic              s_valid;
  net_word_t         s_word;
  logic [PIW-1:0]    s_src;
  logic [N_FPGA-1:0] mask, own_n, targets;
  logic              all_ready, s_fire, accept;
  logic [CNT_W-1:0]  cnt [N_PE][N_FPGA];
  logic [BW-1:0]     bar_seen;

  gravfm_filter #(.N_FPGA(N_FPGA), .N_PE(N_PE), .V_PER_PE(V_PER_PE)) u_filter (
    .clk, .fpga_id,
    .host_we (host_filter_we), .host_addr, .host_wdata,
    .lookup_en  (accept),
    .lookup_vid (in_word.sender),
    .send_mask  (mask)
  );

  always_comb begin
    for (int unsigned f = 0; f < N_FPGA; f++) own_n[f] = (f != int'(fpga_id));
  end

  assign targets = s_word.barrier ? own_n : mask;

  always_comb begin
    all_ready = 1'b1;
    for (int unsigned f = 0; f < N_FPGA; f++)
      if (targets[f] && !st_ready[f]) all_ready = 1'b0;
  end

  assign s_fire = s_valid && all_ready;

  always_comb begin
    in_accept = '0;
    in_accept[cur_round] = !s_valid || s_fire;
  end
  assign accept = in_valid && in_accept[in_word.round];

  always_comb begin
    for (int unsigned f = 0; f < N_FPGA; f++) begin
      net_word_t w;
      w = s_word;
      if (s_word.barrier) w.count = cnt[s_src][f];
      st_valid[f] = s_fire && targets[f];
      st_data[f]  = word_to_stream(w);
    end
  end

  assign ev_filtered = s_fire && !s_word.barrier && (mask != own_n);

  always_ff @(posedge clk) begin
    if (rst) begin
      s_valid   <= 1'b0;
      cur_round <= 1'b0;
      bar_seen  <= '0;
      for (int unsigned p = 0; p < N_PE; p++)
        for (int unsigned f = 0; f < N_FPGA; f++) cnt[p][f] <= '0;
    end else begin
      if (accept)      s_valid <= 1'b1;
      else if (s_fire) s_valid <= 1'b0;
      if (s_fire) begin
        for (int unsigned f = 0; f < N_FPGA; f++) begin
          if (s_word.barrier)  cnt[s_src][f] <= '0;
          else if (targets[f]) cnt[s_src][f] <= cnt[s_src][f] + 1'b1;
        end
        if (s_word.barrier) begin
          if (bar_seen == BW'(N_PE - 1)) begin
            bar_seen  <= '0;
            cur_round <= ~cur_round;
          end else begin
            bar_seen <= bar_seen + 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      s_word <= in_word;
      s_src  <= in_src;
    end
  end

  // Only words of the current round are accepted.
  assert property (@(posedge clk) disable iff (rst) accept |-> in_word.round == cur_round);

endmodule
