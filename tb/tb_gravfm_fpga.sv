// End-to-end testbench of gravfm_fpga at reduced size: 2 FPGAs of 2 PEs with
// 16 vertices each (64 vertices), running weakly connected components on a
// generated graph and checking labels, message count, barriers and that
// every mechanism of the design occurred.
`include "tb_check.svh"
`define GRAVFM_PARAMS #(.N_FPGA(2), .N_PE(2), .V_PER_PE(16), .E_PER_PE(256))
module tb_gravfm_fpga;
  localparam int NF = 2, NP = 2, V = 16, E = 256;
  localparam int DEG = 3, NC = 3, HUB = 12, MAX_CYC = 400000;
`include "tb_gravfm_sys_body.svh"
endmodule
