// gravfm_rx_endpoint: the network endpoint in front of one PE, where the
// floating barrier is resolved.
//
// The crossbar delivers every update and barrier of the system to it, tagged
// with its round (virtual channel = superstep parity). Each round has its own
// buffer, so words of the next superstep, which faster PEs may already send,
// never block the current one. The endpoint serves only the buffer of its
// current round:
//   - an update is passed to the PE's scatter module and counted,
//   - a barrier is absorbed: the number of barriers seen, the sum of the
//     update counts they carry and the OR of their active bits are kept.
// When a barrier has arrived from every PE of the system (N_FPGA * N_PE,
// this PE included) and as many updates were received as the barriers
// announced, the round is complete. If any PE was active, one barrier update
// is handed to the PE and the endpoint moves to the other round; if none was,
// the algorithm has ended and terminate is raised instead (no barrier is
// passed on). The count check makes the endpoint correct on networks that
// reorder traffic; with this design's in-order network it always matches
// when the last barrier arrives.
//
// Buffer depth is this design's choice. Interface: in_valid/in_word push
// (in_space[r] says the buffer of round r has room; the crossbar pushes only
// then); out_valid/out_ready/out_upd towards the PE.
module gravfm_rx_endpoint
  import gravfm_pkg::*;
#(
  parameter int unsigned N_FPGA = 4,
  parameter int unsigned N_PE   = 9,
  parameter int unsigned DEPTH  = 16,
  localparam int unsigned N_ALL = N_FPGA * N_PE
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       in_valid,
  input  net_word_t  in_word,
  output logic [1:0] in_space,
  output logic       out_valid,
  input  logic       out_ready,
  output update_t    out_upd,
  output logic       terminate,
  output logic       cur_round,
  // events
  output logic       ev_ahead,      // a word of the next round was buffered
  output logic       ev_count_wait  // all barriers in, updates still missing
);

  localparam int unsigned BW = $clog2(N_ALL + 1);

  logic [1:0]       f_in_ready, f_out_valid, f_out_ready;
  logic [NET_W-1:0] f_out_data [2];
  net_word_t        head;
  logic             head_valid;

  logic [BW-1:0]    bar_cnt;
  logic [CNT_W-1:0] exp_cnt, rcv_cnt;
  logic             any_act;
  logic             all_bar, complete;
  logic             pop, absorb, deliver, close;

  for (genvar c = 0; c < 2; c++) begin : g_chan
    gravfm_fifo #(.WIDTH(NET_W), .DEPTH(DEPTH)) u_buf (
      .clk, .rst,
      .in_valid  (in_valid && in_word.round == c[0]),
      .in_ready  (f_in_ready[c]),
      .in_data   (in_word),
      .out_valid (f_out_valid[c]),
      .out_ready (f_out_ready[c]),
      .out_data  (f_out_data[c]),
      .level     ()
    );
  end

  assign in_space   = f_in_ready;
  assign head       = net_word_t'(f_out_data[cur_round]);
  assign head_valid = f_out_valid[cur_round];

  assign all_bar  = (bar_cnt == BW'(N_ALL));
  assign complete = all_bar && (rcv_cnt == exp_cnt) && !terminate;

  // Round complete: hand the barrier to the PE, or terminate.
  assign close   = complete && any_act && out_ready;
  // Otherwise serve the head of the current round's buffer.
  assign absorb  = !complete && !terminate && head_valid && head.barrier;
  assign deliver = !complete && !terminate && head_valid && !head.barrier && out_ready;
  assign pop     = absorb || deliver;

  assign f_out_ready[0] = pop && (cur_round == 1'b0);
  assign f_out_ready[1] = pop && (cur_round == 1'b1);

  assign out_valid = (complete && any_act) ||
                     (!complete && !terminate && head_valid && !head.barrier);
  assign out_upd   = complete ? '{barrier: 1'b1, round: cur_round, sender: '0, data: '0}
                              : '{barrier: 1'b0, round: head.round, sender: head.sender, data: head.data};

  assign ev_ahead      = in_valid && (in_word.round != cur_round);
  assign ev_count_wait = all_bar && (rcv_cnt != exp_cnt);

  always_ff @(posedge clk) begin
    if (rst) begin
      cur_round <= 1'b0;
      bar_cnt   <= '0;
      exp_cnt   <= '0;
      rcv_cnt   <= '0;
      any_act   <= 1'b0;
      terminate <= 1'b0;
    end else if (close) begin
      cur_round <= ~cur_round;
      bar_cnt   <= '0;
      exp_cnt   <= '0;
      rcv_cnt   <= '0;
      any_act   <= 1'b0;
    end else if (complete && !any_act) begin
      terminate <= 1'b1;
    end else begin
      if (absorb) begin
        bar_cnt <= bar_cnt + 1'b1;
        exp_cnt <= exp_cnt + head.count;
        any_act <= any_act | head.active;
      end
      if (deliver) rcv_cnt <= rcv_cnt + 1'b1;
    end
  end

  // The crossbar only pushes into a buffer with room.
  assert property (@(posedge clk) disable iff (rst) in_valid |-> in_space[in_word.round]);
  // No PE sends more barriers in a round than there are PEs.
  assert property (@(posedge clk) disable iff (rst) absorb |-> !all_bar);

endmodule
