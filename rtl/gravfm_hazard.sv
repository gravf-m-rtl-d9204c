// gravfm_hazard: read-after-write hazard detection of the gather module.
//
// Every vertex slot read by the gather read stage is recorded here until the
// gather kernel's result for it has been written back. The gather kernel
// completes messages in order, so the record is a small FIFO of addresses:
// push on a read, pop on a write-back. A new read must stall while its
// address matches any recorded one (its data would be stale) or while the
// record is full. The paper names this unit and its purpose; the FIFO-with-
// compare structure and DEPTH are this design's choice. With the
// combinational WCC kernel at most one address is outstanding, so a
// message following one for the same vertex waits one cycle.
module gravfm_hazard #(
  parameter int unsigned AW    = 9,
  parameter int unsigned DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [AW-1:0] check_addr,
  output logic          stall,       // check_addr must not be read now
  input  logic          push,        // a read of push_addr is issued
  input  logic [AW-1:0] push_addr,
  input  logic          pop,         // oldest outstanding address written back
  output logic          empty
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [AW-1:0] addr_q  [DEPTH];
  logic [DEPTH-1:0] vld_q;
  logic [PW-1:0] wr_ptr, rd_ptr;
  logic match, full;

  always_comb begin
    match = 1'b0;
    for (int unsigned i = 0; i < DEPTH; i++)
      if (vld_q[i] && addr_q[i] == check_addr) match = 1'b1;
  end

  assign full  = &vld_q;
  assign empty = ~|vld_q;
  assign stall = match | full;

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      vld_q  <= '0;
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (pop) begin
        vld_q[rd_ptr] <= 1'b0;
        rd_ptr        <= incr(rd_ptr);
      end
      if (push) begin
        vld_q[wr_ptr]  <= 1'b1;
        addr_q[wr_ptr] <= push_addr;
        wr_ptr         <= incr(wr_ptr);
      end
    end
  end

  // A push is never made into a full record, a pop never from an empty one.
  assert property (@(posedge clk) disable iff (rst) push |-> !full || pop);
  assert property (@(posedge clk) disable iff (rst) pop |-> !empty);

endmodule
