// gravfm_scatter: the scatter module of a PE.
//
// Input: updates broadcast by the network (every update of every PE reaches
// every PE), each followed at the end of a superstep by a barrier update.
// For each update the module
//   1. looks up the sender in the index storage: start and length of the
//      part of the sender's edge list whose destinations are on this PE,
//   2. walks that part of the edgelist storage, one edge per cycle, and
//   3. presents every edge with the update to the scatter kernel, whose
//      output messages go straight to this PE's gather module.
// An update whose sender has no local edges produces nothing (no edge read
// is issued). A barrier update is passed through the kernel as one message
// with the barrier flag set, behind all messages of its superstep.
//
// Pipeline: stage I holds an accepted update while its index read is in
// flight; the edge iterator takes it when idle; stage E holds the edge being
// read and drives the kernel input. The iterator needs one idle cycle after
// the last edge of a list before it takes the next update (the paper's
// "a cycle to reset at the end of each edge list"), so a list of n edges
// costs n + 1 cycles. The whole pipeline stalls on kernel backpressure; the
// RAM outputs hold because their reads are only enabled when the stage they
// feed can move. Edge storage is the BRAM variant (see gravfm_edge_storage).
module gravfm_scatter
  import gravfm_pkg::*;
#(
  parameter int unsigned N_FPGA   = 4,
  parameter int unsigned N_PE     = 9,
  parameter int unsigned V_PER_PE = 512,
  parameter int unsigned E_PER_PE = 32768,
  localparam int unsigned EAW     = $clog2(E_PER_PE),
  localparam int unsigned LW      = $clog2(V_PER_PE)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] pe_gid,        // global number of this PE
  // host load port of the edge storage
  input  logic        host_index_we,
  input  logic        host_edge_we,
  input  logic [31:0] host_addr,
  input  logic [63:0] host_wdata,
  // updates from the network endpoint
  input  logic        in_valid,
  output logic        in_ready,
  input  update_t     in_upd,
  // messages to the gather module
  output logic        out_valid,
  input  logic        out_ready,
  output message_t    out_msg,
  // events
  output logic        ev_empty_list  // an update had no local edges
);

  // ---------------- stage I: index lookup ----------------
  logic     i_valid;
  update_t  i_upd;
  logic     i_take;
  logic     i_accept;

  // ---------------- iterator ----------------
  logic           it_busy;
  update_t        it_upd;
  logic [EAW-1:0] it_addr;
  logic [EAW:0]   it_rem;
  logic [EAW:0]   it_len;

  // ---------------- stage E: edge read ----------------
  logic           e_valid;
  update_t        e_upd;
  logic [EAW:0]   e_len;
  logic           e_adv;
  logic           issue;

  logic [EAW-1:0] idx_start;
  logic [EAW:0]   idx_len;
  logic [LW-1:0]  edge_local;

  logic k_ready;

  assign i_take   = i_valid && !it_busy;
  assign i_accept = in_valid && (!i_valid || i_take);
  assign in_ready = !i_valid || i_take;

  assign e_adv = !e_valid || k_ready;
  assign issue = it_busy && e_adv;

  gravfm_edge_storage #(
    .N_FPGA (N_FPGA), .N_PE (N_PE), .V_PER_PE (V_PER_PE), .E_PER_PE (E_PER_PE)
  ) u_edges (
    .clk,
    .host_index_we, .host_edge_we, .host_addr, .host_wdata,
    .idx_rd_en    (i_accept),
    .idx_rd_vid   (in_upd.sender),
    .idx_start,
    .idx_len,
    .edge_rd_en   (issue && !it_upd.barrier),
    .edge_rd_addr (it_addr),
    .edge_local
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      i_valid <= 1'b0;
      it_busy <= 1'b0;
      e_valid <= 1'b0;
    end else begin
      // stage I
      if (i_accept)    i_valid <= 1'b1;
      else if (i_take) i_valid <= 1'b0;
      // iterator
      if (i_take) begin
        it_busy <= i_upd.barrier || (idx_len != '0);
      end else if (issue && it_rem == 1) begin
        it_busy <= 1'b0;
      end
      // stage E
      if (e_adv) e_valid <= issue;
    end
  end

  always_ff @(posedge clk) begin
    if (i_accept) i_upd <= in_upd;
    if (i_take) begin
      it_upd  <= i_upd;
      it_addr <= idx_start;
      it_rem  <= i_upd.barrier ? (EAW+1)'(1) : idx_len;
      it_len  <= i_upd.barrier ? '0 : idx_len;
    end else if (issue) begin
      it_addr <= it_addr + 1'b1;
      it_rem  <= it_rem - 1'b1;
    end
    if (issue) begin
      e_upd <= it_upd;
      e_len <= it_len;
    end
  end

  assign ev_empty_list = i_take && !i_upd.barrier && (idx_len == '0);

  // ---------------- scatter kernel ----------------
  vid_t neighbor_vid;
  assign neighbor_vid = VID_W'({pe_gid, edge_local} & {(16+LW){1'b1}});

  wcc_scatter_kernel u_kernel (
    .clk,
    .rst,
    .update_in        (e_upd.data),
    .sender_in        (e_upd.sender),
    .round_in         (e_upd.round),
    .barrier_in       (e_upd.barrier),
    .neighbor_in      (neighbor_vid),
    .num_neighbors_in (32'(e_len)),
    .valid_in         (e_valid),
    .ready            (k_ready),
    .message_out      (out_msg.data),
    .neighbor_out     (out_msg.neighbor),
    .sender_out       (out_msg.sender),
    .round_out        (out_msg.round),
    .barrier_out      (out_msg.barrier),
    .valid_out        (out_valid),
    .message_ack      (out_ready)
  );

endmodule
