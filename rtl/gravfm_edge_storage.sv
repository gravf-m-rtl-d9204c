// gravfm_edge_storage: the edge data of one PE, split as in the scatter
// module's figure into an index storage and an edgelist storage.
//
// GraVF-M moves the scatter stage to the receiving PE, so a PE keeps, for
// EVERY vertex of the system, the part of that vertex's edge list whose
// destinations live on this PE. The index storage therefore has one entry per
// vertex of the whole system (N_FPGA*N_PE*V_PER_PE), holding the start
// address and length of that local edge-list part; the edgelist storage holds
// the destination of each edge as a local vertex slot (the destination is
// always on this PE). Both are on-chip RAMs with synchronous reads (result one
// cycle after rd_en, held while rd_en = 0).
//
// The paper's main evaluation keeps edge lists in off-chip HMC; it also allows
// BRAM edge storage, which is what is built here. Memory sizes are this
// design's choice (see the parameters). Host writes: index word
// wdata = {len[31:0], start[31:0]}, edge word wdata[LW-1:0] = local slot.
module gravfm_edge_storage
  import gravfm_pkg::*;
#(
  parameter int unsigned N_FPGA   = 4,
  parameter int unsigned N_PE     = 9,
  parameter int unsigned V_PER_PE = 512,
  parameter int unsigned E_PER_PE = 32768,
  localparam int unsigned NV      = N_FPGA * N_PE * V_PER_PE,
  localparam int unsigned IAW     = $clog2(NV),
  localparam int unsigned EAW     = $clog2(E_PER_PE),
  localparam int unsigned LW      = $clog2(V_PER_PE)
) (
  input  logic           clk,
  // host load port
  input  logic           host_index_we,
  input  logic           host_edge_we,
  input  logic [31:0]    host_addr,
  input  logic [63:0]    host_wdata,
  // index lookup (by sender vid)
  input  logic           idx_rd_en,
  input  vid_t           idx_rd_vid,
  output logic [EAW-1:0] idx_start,
  output logic [EAW:0]   idx_len,
  // edge read
  input  logic           edge_rd_en,
  input  logic [EAW-1:0] edge_rd_addr,
  output logic [LW-1:0]  edge_local
);

  logic [2*EAW:0] idx_q;

  gravfm_ram #(.WIDTH(2*EAW+1), .DEPTH(NV)) u_index (
    .clk,
    .wr_en   (host_index_we),
    .wr_addr (host_addr[IAW-1:0]),
    .wr_data ({host_wdata[32 +: EAW+1], host_wdata[EAW-1:0]}),
    .rd_en   (idx_rd_en),
    .rd_addr (idx_rd_vid[IAW-1:0]),
    .rd_data (idx_q)
  );

  assign idx_start = idx_q[EAW-1:0];
  assign idx_len   = idx_q[2*EAW:EAW];

  gravfm_ram #(.WIDTH(LW), .DEPTH(E_PER_PE)) u_edges (
    .clk,
    .wr_en   (host_edge_we),
    .wr_addr (host_addr[EAW-1:0]),
    .wr_data (host_wdata[LW-1:0]),
    .rd_en   (edge_rd_en),
    .rd_addr (edge_rd_addr),
    .rd_data (edge_local)
  );

endmodule
