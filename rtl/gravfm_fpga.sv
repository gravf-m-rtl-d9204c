// gravfm_fpga: one FPGA of a GraVF-M multi-FPGA graph processing system.
//
// GraVF-M runs vertex-centric graph algorithms, split into gather, apply and
// scatter kernels, on many processing elements (PEs) spread over several
// FPGAs. Its key idea: instead of sending one message per edge between
// PEs, each PE broadcasts one update per active vertex and every receiving
// PE runs the scatter kernel itself over the edges that end on it. Only
// updates, at most one per vertex and superstep, cross the off-chip network.
//
// This module holds N_PE PEs, the network endpoint of each PE (floating
// barrier, termination), the broadcast crossbar, and the outgoing off-chip
// endpoint with its filter. Off-chip links are 128-bit first-word-fall-
// through streams, one pair per remote FPGA, brought out as ports indexed by
// FPGA number (the own index is unused): the PCIe streams of the evaluation
// platform are vendor IP and not part of this RTL. fpga_id is a strap input
// so that identical copies can be placed on every FPGA.
//
// Operation: with start low, the host port loads each PE's vertex states,
// index and edgelist storage, and the filter bitmap (host_req; bcast writes
// all PEs at once). A start pulse launches the initial apply pass on every
// PE. done rises when every PE's endpoint has detected termination; then the
// host port reads vertex states back (host_rvalid/host_rdata one cycle after
// a read request). msg_count counts gathered messages (traversed edges).
//
// The per-block event outputs (ev_*), the PE superstep counters and the
// endpoint round flags are observation points for simulation and debug;
// they are left unconnected here on purpose.
module gravfm_fpga
  import gravfm_pkg::*;
#(
  parameter int unsigned N_FPGA   = 4,
  parameter int unsigned N_PE     = 9,
  parameter int unsigned V_PER_PE = 512,
  parameter int unsigned E_PER_PE = 32768,
  parameter int unsigned HZ_DEPTH = 4,
  parameter int unsigned RX_DEPTH = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [7:0]          fpga_id,
  input  logic                start,
  // host load / readback
  input  host_req_t           host_req,
  output logic                host_rvalid,
  output logic [63:0]         host_rdata,
  // off-chip streams
  output logic                st_tx_valid [N_FPGA],
  output logic [STREAM_W-1:0] st_tx_data  [N_FPGA],
  input  logic                st_tx_ready [N_FPGA],
  input  logic                st_rx_valid [N_FPGA],
  input  logic [STREAM_W-1:0] st_rx_data  [N_FPGA],
  output logic                st_rx_ready [N_FPGA],
  // status
  output logic                done,
  output logic [N_PE-1:0]     terminated,
  output logic [63:0]         msg_count
);

  localparam int unsigned PIW = $clog2(N_PE > 1 ? N_PE : 2);

  logic running, host_en;

  // PE <-> network
  logic      q_valid [N_PE], q_ready [N_PE];
  update_t   q_upd   [N_PE];
  logic      p_valid [N_PE], p_ready [N_PE];
  update_t   p_upd   [N_PE];
  logic [1:0] rx_space [N_PE];
  vstate_t   pe_rdata [N_PE];
  logic [N_PE-1:0] ev_msg;

  logic      rx_valid;
  net_word_t rx_word;
  logic      tx_valid;
  net_word_t tx_word;
  logic [PIW-1:0] tx_src;
  logic [1:0] tx_accept;
  net_word_t rem_word [N_FPGA];

  always_ff @(posedge clk) begin
    if (rst)        running <= 1'b0;
    else if (start) running <= 1'b1;
  end
  assign host_en = !running || done;

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    logic sel;
    logic [15:0] gid;
    assign sel = host_req.bcast || (host_req.pe == 8'(i));
    assign gid = 16'(int'(fpga_id) * N_PE + i);

    gravfm_pe #(
      .N_FPGA (N_FPGA), .N_PE (N_PE), .V_PER_PE (V_PER_PE),
      .E_PER_PE (E_PER_PE), .HZ_DEPTH (HZ_DEPTH)
    ) u_pe (
      .clk, .rst, .start,
      .pe_gid         (gid),
      .host_en,
      .host_vertex_we (host_en && sel && host_req.we && host_req.target == HOST_VERTEX),
      .host_vertex_re (host_en && sel && host_req.re && host_req.target == HOST_VERTEX),
      .host_index_we  (host_en && sel && host_req.we && host_req.target == HOST_INDEX),
      .host_edge_we   (host_en && sel && host_req.we && host_req.target == HOST_EDGE),
      .host_addr      (host_req.addr),
      .host_wdata     (host_req.wdata),
      .host_rdata     (pe_rdata[i]),
      .in_valid       (p_valid[i]),
      .in_ready       (p_ready[i]),
      .in_upd         (p_upd[i]),
      .out_valid      (q_valid[i]),
      .out_ready      (q_ready[i]),
      .out_upd        (q_upd[i]),
      .level          (),
      .ev_hazard      (),
      .ev_message     (ev_msg[i]),
      .ev_empty_list  ()
    );

    gravfm_rx_endpoint #(.N_FPGA (N_FPGA), .N_PE (N_PE), .DEPTH (RX_DEPTH)) u_rx (
      .clk, .rst,
      .in_valid      (rx_valid),
      .in_word       (rx_word),
      .in_space      (rx_space[i]),
      .out_valid     (p_valid[i]),
      .out_ready     (p_ready[i]),
      .out_upd       (p_upd[i]),
      .terminate     (terminated[i]),
      .cur_round     (),
      .ev_ahead      (),
      .ev_count_wait ()
    );
  end

  for (genvar f = 0; f < N_FPGA; f++) begin : g_rem
    assign rem_word[f] = stream_to_word(st_rx_data[f]);
  end

  gravfm_crossbar #(.N_FPGA (N_FPGA), .N_PE (N_PE)) u_xbar (
    .clk, .rst, .fpga_id,
    .loc_valid (q_valid), .loc_ready (q_ready), .loc_upd (q_upd),
    .rem_valid (st_rx_valid), .rem_ready (st_rx_ready), .rem_word (rem_word),
    .rx_valid, .rx_word, .rx_space,
    .tx_valid, .tx_word, .tx_src, .tx_accept,
    .ev_blocked (), .ev_seq_block ()
  );

  gravfm_tx_endpoint #(.N_FPGA (N_FPGA), .N_PE (N_PE), .V_PER_PE (V_PER_PE)) u_tx (
    .clk, .rst, .fpga_id,
    .host_filter_we (host_en && host_req.we && host_req.target == HOST_FILTER),
    .host_addr      (host_req.addr),
    .host_wdata     (host_req.wdata),
    .in_valid       (tx_valid),
    .in_word        (tx_word),
    .in_src         (tx_src),
    .in_accept      (tx_accept),
    .st_valid       (st_tx_valid),
    .st_data        (st_tx_data),
    .st_ready       (st_tx_ready),
    .cur_round      (),
    .ev_filtered    ()
  );

  assign done = &terminated;

  // host readback: one cycle after the read request
  logic [PIW-1:0] rd_pe;
  always_ff @(posedge clk) begin
    if (rst) host_rvalid <= 1'b0;
    else     host_rvalid <= host_en && host_req.re && host_req.target == HOST_VERTEX;
    rd_pe <= PIW'(host_req.pe);
  end
  assign host_rdata = 64'(pe_rdata[rd_pe]);

  // traversed-edge counter
  always_ff @(posedge clk) begin
    if (rst || start) msg_count <= '0;
    else              msg_count <= msg_count + 64'($countones(ev_msg));
  end

endmodule
