// gravfm_pkg: types and constants shared by every block of the GraVF-M
// multi-FPGA graph processing design.
//
// The algorithm layouts follow the weakly-connected-components (WCC) example:
// a vertex stores a label and an "active" bit, and updates and messages both
// carry one label (the message layout equals the update layout).
//
// Vertex identifiers are dense: vid = g * V_PER_PE + local, where g is the
// global PE number (fpga * N_PE + pe) and V_PER_PE is a power of two, so the
// low bits of a vid are the vertex's slot in its PE's vertex storage and the
// high bits name the PE. This relabelling is done by the host when it
// partitions the graph; it is this design's choice, the paper does not say how
// vertex IDs map to PEs.
//
// Superstep separation uses two virtual channels ("rounds"), selected by the
// parity of the superstep: a PE can be at most one superstep ahead of any
// other, so one bit is enough.
package gravfm_pkg;

  localparam int unsigned VID_W    = 32;   // vertexidsize
  localparam int unsigned CNT_W    = 32;   // update count carried by a barrier
  localparam int unsigned LEVEL_W  = 16;   // superstep counter given to gather
  localparam int unsigned STREAM_W = 128;  // off-chip stream word (PicoFramework streams are 128 bit)

  typedef logic [VID_W-1:0] vid_t;

  // node_storage_layout = [("label", vertexidsize), ("active", 1)]
  typedef struct packed {
    vid_t label;
    logic active;
  } vstate_t;

  // update_layout = [("label", vertexidsize)]; message_layout = update_layout
  typedef struct packed {
    vid_t label;
  } payload_t;

  // Entry of the update queue: an update issued by apply, or a barrier.
  typedef struct packed {
    logic     barrier;
    logic     round;
    vid_t     sender;
    payload_t data;
  } update_t;

  // Word carried by the on-chip crossbar and the off-chip streams. For a
  // barrier, count is the number of updates of this round the sender sent
  // towards the receiver, and active says whether the sender issued any
  // update at all in the round (termination detection).
  typedef struct packed {
    logic             barrier;
    logic             round;
    logic             active;
    logic [CNT_W-1:0] count;
    vid_t             sender;
    payload_t         data;
  } net_word_t;

  localparam int unsigned NET_W = $bits(net_word_t);

  // Message produced by the scatter kernel and consumed by the gather module.
  typedef struct packed {
    logic     barrier;
    logic     round;
    vid_t     neighbor;
    vid_t     sender;
    payload_t data;
  } message_t;

  // Host load/readback targets.
  typedef enum logic [1:0] {
    HOST_VERTEX = 2'd0,   // vertex storage of one PE (or all)
    HOST_INDEX  = 2'd1,   // index storage of one PE (or all)
    HOST_EDGE   = 2'd2,   // edgelist storage of one PE (or all)
    HOST_FILTER = 2'd3    // remote-FPGA filter bitmap
  } host_target_e;

  typedef struct packed {
    logic         we;
    logic         re;
    host_target_e target;
    logic         bcast;      // write to every PE of the FPGA
    logic [7:0]   pe;         // PE selected when bcast = 0
    logic [31:0]  addr;
    logic [63:0]  wdata;
  } host_req_t;

  function automatic net_word_t stream_to_word(input logic [STREAM_W-1:0] s);
    return net_word_t'(s[NET_W-1:0]);
  endfunction

  function automatic logic [STREAM_W-1:0] word_to_stream(input net_word_t w);
    return {{(STREAM_W-NET_W){1'b0}}, w};
  endfunction

endpackage
