// gravfm_ram: simple dual-port on-chip memory (one write port, one read port),
// the block RAM primitive behind every storage in the design.
//
// Reads are synchronous: rd_data shows mem[rd_addr] one cycle after a cycle
// with rd_en = 1 and then holds until the next rd_en, so a pipeline can stall
// simply by not enabling the read. A read and a write of the same address in
// one cycle return the old contents. DEPTH need not be a power of two.
module gravfm_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
