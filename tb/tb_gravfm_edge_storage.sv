// Testbench of gravfm_edge_storage: loads random index entries and edge
// destinations through the host port and reads them back through the two
// lookup ports, including the rule that read data hold while rd_en is low.
`include "tb_check.svh"
module tb_gravfm_edge_storage;
  import gravfm_pkg::*;
  localparam int NF = 2, NP = 2, V = 8, E = 64;
  localparam int NV = NF * NP * V, EAW = $clog2(E), LW = $clog2(V);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 20000)

  logic host_index_we = 0, host_edge_we = 0, idx_rd_en = 0, edge_rd_en = 0;
  logic [31:0] host_addr; logic [63:0] host_wdata;
  vid_t idx_rd_vid; logic [EAW-1:0] idx_start, edge_rd_addr; logic [EAW:0] idx_len;
  logic [LW-1:0] edge_local;

  gravfm_edge_storage #(.N_FPGA(NF), .N_PE(NP), .V_PER_PE(V), .E_PER_PE(E)) dut (.*);

  int st [NV], ln [NV], ed [E];

  initial begin
    for (int v = 0; v < NV; v++) begin
      st[v] = $urandom % E; ln[v] = $urandom % (E + 1);
      @(negedge clk); host_index_we = 1; host_addr = v; host_wdata = {32'(ln[v]), 32'(st[v])};
    end
    for (int e = 0; e < E; e++) begin
      ed[e] = $urandom % V;
      @(negedge clk); host_index_we = 0; host_edge_we = 1; host_addr = e; host_wdata = 64'(ed[e]);
    end
    @(negedge clk); host_edge_we = 0;
    for (int k = 0; k < 200; k++) begin
      int v, e;
      v = $urandom % NV; e = $urandom % E;
      @(negedge clk); idx_rd_en = 1; idx_rd_vid = v; edge_rd_en = 1; edge_rd_addr = e;
      @(negedge clk); idx_rd_en = 0; edge_rd_en = 0; idx_rd_vid = $urandom; edge_rd_addr = $urandom;
      `CHECK(idx_start == st[v] && idx_len == ln[v], "index entry")
      `CHECK(edge_local == ed[e], "edge entry")
      @(negedge clk);
      `CHECK(idx_start == st[v] && edge_local == ed[e], "read data hold without rd_en")
    end
    `TB_FINISH
  end
endmodule
