// gravfm_vertex_storage: the vertex state memory of one PE, with the access
// switch between the gather module and the apply module.
//
// One RAM of V_PER_PE vertex states (label, active) with one synchronous read
// port and one write port. sel_apply hands both ports to the apply module,
// otherwise the gather module owns them; the PE flips it only after the
// gather pipeline is flushed, as the paper describes. A host port can load
// initial states and read results while the PE is idle (host_en = 1); the
// host has priority. Read data appear one cycle after the read enable and
// hold until the next read.
module gravfm_vertex_storage
  import gravfm_pkg::*;
#(
  parameter int unsigned V_PER_PE = 512,
  localparam int unsigned LW      = $clog2(V_PER_PE)
) (
  input  logic          clk,
  input  logic          sel_apply,
  // gather module
  input  logic          g_rd_en,
  input  logic [LW-1:0] g_rd_addr,
  input  logic          g_wr_en,
  input  logic [LW-1:0] g_wr_addr,
  input  vstate_t       g_wr_data,
  // apply module
  input  logic          a_rd_en,
  input  logic [LW-1:0] a_rd_addr,
  input  logic          a_wr_en,
  input  logic [LW-1:0] a_wr_addr,
  input  vstate_t       a_wr_data,
  // host
  input  logic          host_en,
  input  logic          host_we,
  input  logic          host_re,
  input  logic [LW-1:0] host_addr,
  input  vstate_t       host_wdata,
  // shared read data
  output vstate_t       rd_data
);

  logic          wr_en, rd_en;
  logic [LW-1:0] wr_addr, rd_addr;
  vstate_t       wr_data;

  always_comb begin
    if (host_en) begin
      wr_en = host_we;  wr_addr = host_addr;  wr_data = host_wdata;
      rd_en = host_re;  rd_addr = host_addr;
    end else if (sel_apply) begin
      wr_en = a_wr_en;  wr_addr = a_wr_addr;  wr_data = a_wr_data;
      rd_en = a_rd_en;  rd_addr = a_rd_addr;
    end else begin
      wr_en = g_wr_en;  wr_addr = g_wr_addr;  wr_data = g_wr_data;
      rd_en = g_rd_en;  rd_addr = g_rd_addr;
    end
  end

  gravfm_ram #(.WIDTH($bits(vstate_t)), .DEPTH(V_PER_PE)) u_ram (
    .clk,
    .wr_en,
    .wr_addr,
    .wr_data (wr_data),
    .rd_en,
    .rd_addr,
    .rd_data (rd_data)
  );

endmodule
