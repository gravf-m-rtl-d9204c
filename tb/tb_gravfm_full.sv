// Full-size system testbench: four copies of gravfm_fpga at their default
// parameters (9 PEs of 512 vertices each, 18,432 vertices in all), meshed
// by stream models, running weakly connected components on a generated
// sparse graph. Checks labels, message count, barriers and mechanisms as
// the reduced-size system testbench does.
`include "tb_check.svh"
`define GRAVFM_PARAMS
module tb_gravfm_full;
  localparam int NF = 4, NP = 9, V = 512, E = 32768;
  localparam int DEG = 2, NC = 7, HUB = 64, MAX_CYC = 3000000;
`include "tb_gravfm_sys_body.svh"
endmodule
