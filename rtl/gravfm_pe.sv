// gravfm_pe: one GraVF-M processing element.
//
// The PE hosts V_PER_PE vertices and runs the three user kernels on them:
//
//   network -> scatter (index + edgelist storage, scatter kernel)
//           -> gather  (read / hazard, gather kernel, write)  <-> vertex storage
//              apply   (read, apply kernel, write)            <-> vertex storage
//           -> update queue -> network
//
// Updates (and barrier updates) arrive from this PE's network endpoint; the
// scatter module turns each into messages for the edges that end on this
// PE, which the gather module folds into the vertex states. A barrier makes
// the gather module flush and hand the vertex storage to the apply module,
// which issues this superstep's updates plus a barrier into the update queue;
// the queue drains into the on-chip network. Because the scatter stage sits
// at the receiver, only updates (one per active vertex) cross the network,
// never messages (one per edge).
//
// The host port loads edge storage and vertex states and reads states back;
// it may be used only while the PE is not running (host_en). start begins the
// run with the initial apply pass.
module gravfm_pe
  import gravfm_pkg::*;
#(
  parameter int unsigned N_FPGA   = 4,
  parameter int unsigned N_PE     = 9,
  parameter int unsigned V_PER_PE = 512,
  parameter int unsigned E_PER_PE = 32768,
  parameter int unsigned HZ_DEPTH = 4,
  localparam int unsigned LW      = $clog2(V_PER_PE)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  logic [15:0]        pe_gid,
  // host
  input  logic               host_en,
  input  logic               host_vertex_we,
  input  logic               host_vertex_re,
  input  logic               host_index_we,
  input  logic               host_edge_we,
  input  logic [31:0]        host_addr,
  input  logic [63:0]        host_wdata,
  output vstate_t            host_rdata,
  // updates from the network endpoint
  input  logic               in_valid,
  output logic               in_ready,
  input  update_t            in_upd,
  // update queue towards the network
  output logic               out_valid,
  input  logic               out_ready,
  output update_t            out_upd,
  // status and events
  output logic [LEVEL_W-1:0] level,
  output logic               ev_hazard,
  output logic               ev_message,
  output logic               ev_empty_list
);

  logic     m_valid, m_ready;
  message_t m_msg;

  logic          sel_apply, apply_start, apply_round, apply_done;
  logic          g_rd_en, g_wr_en, a_rd_en, a_wr_en;
  logic [LW-1:0] g_rd_addr, g_wr_addr, a_rd_addr, a_wr_addr;
  vstate_t       g_wr_data, a_wr_data, vs_rd_data;

  logic    q_valid, q_ready;
  update_t q_data;

  gravfm_scatter #(
    .N_FPGA (N_FPGA), .N_PE (N_PE), .V_PER_PE (V_PER_PE), .E_PER_PE (E_PER_PE)
  ) u_scatter (
    .clk, .rst, .pe_gid,
    .host_index_we, .host_edge_we, .host_addr, .host_wdata,
    .in_valid, .in_ready, .in_upd,
    .out_valid (m_valid), .out_ready (m_ready), .out_msg (m_msg),
    .ev_empty_list
  );

  gravfm_gather #(.V_PER_PE (V_PER_PE), .HZ_DEPTH (HZ_DEPTH)) u_gather (
    .clk, .rst, .start,
    .in_valid (m_valid), .in_ready (m_ready), .in_msg (m_msg),
    .vs_rd_en (g_rd_en), .vs_rd_addr (g_rd_addr), .vs_rd_data (vs_rd_data),
    .vs_wr_en (g_wr_en), .vs_wr_addr (g_wr_addr), .vs_wr_data (g_wr_data),
    .sel_apply, .apply_start, .apply_round, .apply_done,
    .level, .ev_hazard, .ev_message
  );

  gravfm_apply #(.V_PER_PE (V_PER_PE)) u_apply (
    .clk, .rst, .pe_gid,
    .start (apply_start), .round (apply_round), .done (apply_done),
    .vs_rd_en (a_rd_en), .vs_rd_addr (a_rd_addr), .vs_rd_data (vs_rd_data),
    .vs_wr_en (a_wr_en), .vs_wr_addr (a_wr_addr), .vs_wr_data (a_wr_data),
    .q_valid, .q_ready, .q_data
  );

  gravfm_vertex_storage #(.V_PER_PE (V_PER_PE)) u_vertices (
    .clk, .sel_apply,
    .g_rd_en, .g_rd_addr, .g_wr_en, .g_wr_addr, .g_wr_data,
    .a_rd_en, .a_rd_addr, .a_wr_en, .a_wr_addr, .a_wr_data,
    .host_en,
    .host_we    (host_vertex_we),
    .host_re    (host_vertex_re),
    .host_addr  (host_addr[LW-1:0]),
    .host_wdata (vstate_t'(host_wdata[$bits(vstate_t)-1:0])),
    .rd_data    (vs_rd_data)
  );

  assign host_rdata = vs_rd_data;

  gravfm_update_queue #(.V_PER_PE (V_PER_PE)) u_queue (
    .clk, .rst,
    .in_valid (q_valid), .in_ready (q_ready), .in_data (q_data),
    .out_valid, .out_ready, .out_data (out_upd),
    .level ()
  );

endmodule
