// gravfm_stream_model: behavioural model of one point-to-point off-chip
// stream between two FPGAs (a first-word-fall-through FIFO with a fixed
// transport latency and randomly idle cycles), for system testbenches. It
// stands in for the inter-FPGA link of the evaluation platform, which is
// vendor IP. A word written at cycle t can be read from cycle t + LATENCY;
// the writer sees ready low while DEPTH words are in flight; with
// STALL_PCT > 0 the model refuses writes in that share of cycles.
module gravfm_stream_model #(
  parameter int unsigned W         = 128,
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned LATENCY   = 8,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         in_ready,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  input  logic         out_ready
);
  logic [W-1:0] q_data [$];
  longint       q_time [$];
  longint       now = 0;
  logic         stall = 1'b0;

  always @(negedge clk) stall <= ($urandom % 100) < STALL_PCT;

  always_comb begin
    in_ready  = !rst && !stall && (q_data.size() < DEPTH);
    out_valid = !rst && q_data.size() != 0 && (now - q_time[0]) >= longint'(LATENCY);
    out_data  = q_data.size() != 0 ? q_data[0] : '0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    if (rst) begin
      q_data.delete(); q_time.delete();
    end else begin
      if (out_valid && out_ready) begin void'(q_data.pop_front()); void'(q_time.pop_front()); end
      if (in_valid && in_ready) begin q_data.push_back(in_data); q_time.push_back(now); end
    end
  end
endmodule
