// gravfm_filter: the remote-neighbour filter of the outgoing endpoint.
//
// A bitmap with one row per vertex of this FPGA and one bit per FPGA: bit f
// of a vertex's row is set when FPGA f hosts at least one of the vertex's
// out-neighbours. The host writes it when it partitions the graph. For an
// update of a local vertex the filter returns the set of remote FPGAs it must
// be sent to (the row with the own FPGA's bit removed), so updates are not
// sent where they could produce no message. The paper sizes the bitmap as
// |V| x n_FPGA; only the rows of vertices owned by this FPGA can ever be
// looked up here, so only those are stored.
//
// Lookup: lookup_en with the sender's vid; send_mask is valid the next cycle
// and holds until the next lookup. Host write: addr = local vertex number
// (pe * V_PER_PE + slot), wdata[N_FPGA-1:0] = row.
module gravfm_filter
  import gravfm_pkg::*;
#(
  parameter int unsigned N_FPGA   = 4,
  parameter int unsigned N_PE     = 9,
  parameter int unsigned V_PER_PE = 512,
  localparam int unsigned NL      = N_PE * V_PER_PE,
  localparam int unsigned AW      = $clog2(NL)
) (
  input  logic              clk,
  input  logic [7:0]        fpga_id,
  input  logic              host_we,
  input  logic [31:0]       host_addr,
  input  logic [63:0]       host_wdata,
  input  logic              lookup_en,
  input  vid_t              lookup_vid,
  output logic [N_FPGA-1:0] send_mask
);

  logic [N_FPGA-1:0] row;
  logic [N_FPGA-1:0] own;
  vid_t              local_idx;

  assign local_idx = lookup_vid - VID_W'(int'(fpga_id) * NL);

  gravfm_ram #(.WIDTH(N_FPGA), .DEPTH(NL)) u_bitmap (
    .clk,
    .wr_en   (host_we),
    .wr_addr (host_addr[AW-1:0]),
    .wr_data (host_wdata[N_FPGA-1:0]),
    .rd_en   (lookup_en),
    .rd_addr (local_idx[AW-1:0]),
    .rd_data (row)
  );

  always_comb begin
    for (int unsigned f = 0; f < N_FPGA; f++) own[f] = (f == int'(fpga_id));
  end

  assign send_mask = row & ~own;

endmodule
