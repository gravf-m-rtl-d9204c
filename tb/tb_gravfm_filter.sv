// Testbench of gravfm_filter: random bitmap rows for the vertices of one
// FPGA; a lookup by vid must return the row without the own FPGA's bit.
`include "tb_check.svh"
module tb_gravfm_filter;
  import gravfm_pkg::*;
  localparam int NF = 4, NP = 3, V = 8, NL = NP * V;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  `TB_WATCHDOG(clk, 20000)

  logic [7:0] fpga_id = 2;
  logic host_we = 0, lookup_en = 0;
  logic [31:0] host_addr; logic [63:0] host_wdata;
  vid_t lookup_vid; logic [NF-1:0] send_mask;
  gravfm_filter #(.N_FPGA(NF), .N_PE(NP), .V_PER_PE(V)) dut (.*);

  logic [NF-1:0] rows [NL];

  initial begin
    for (int i = 0; i < NL; i++) begin
      rows[i] = $urandom;
      @(negedge clk); host_we = 1; host_addr = i; host_wdata = 64'(rows[i]);
    end
    @(negedge clk); host_we = 0;
    for (int k = 0; k < 300; k++) begin
      automatic int i = $urandom % NL;
      @(negedge clk); lookup_en = 1; lookup_vid = VID_W'(int'(fpga_id) * NL + i);
      @(negedge clk); lookup_en = 0;
      `CHECK(send_mask == (rows[i] & ~(NF'(1) << fpga_id)), "send mask")
    end
    `TB_FINISH
  end
endmodule
