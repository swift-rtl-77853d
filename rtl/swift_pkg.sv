// swift_pkg: types, constants and user functions shared by the Swift graph
// accelerator RTL.
//
// The accelerator runs the edge-centric Gather-Apply-Scatter model. Edges
// carry (source, destination, weight); processing an edge yields a vertex
// update tuple (Value, Dst); applying updates yields active frontiers that are
// exchanged between FPGAs. The (Value, Dst) update format, the global vertex
// IDs and the three algorithms (PageRank, SpMV, HITS) follow the paper. The
// field widths, the iteration tag that marks a source vertex active, and the
// exact Process_Edge / Apply arithmetic are this design's own choices: the
// paper calls these functions user-defined and gives no encoding.
//
// Off-chip memory is modelled as word addressed: one HBM word holds one item
// (an edge, an update, a property or a frontier entry).
package swift_pkg;

  localparam int unsigned VID_W  = 32;   // global vertex ID
  localparam int unsigned PROP_W = 32;   // vertex property / update value
  localparam int unsigned TAG_W  = 8;    // iteration tag of a frontier entry
  localparam int unsigned IVL_W  = 16;   // interval number
  localparam int unsigned ADDR_W = 32;   // HBM word address
  localparam int unsigned MEM_W  = 128;  // HBM word (one item per word)

  typedef logic [VID_W-1:0]  vid_t;
  typedef logic [PROP_W-1:0] prop_t;
  typedef logic [TAG_W-1:0]  tag_t;
  typedef logic [IVL_W-1:0]  ivl_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [MEM_W-1:0]  word_t;

  // Edge as stored in a worker HBM channel.
  typedef struct packed {
    vid_t  src;
    vid_t  dst;
    prop_t weight;
  } edge_t;

  // Vertex update tuple (Value, Dst).
  typedef struct packed {
    prop_t value;
    vid_t  dst;
  } update_t;

  // Source vertex entry held in the frontier HBM and in the VertexProperty
  // buffers. A vertex is active for iteration i when tag >= i.
  typedef struct packed {
    tag_t  tag;
    prop_t prop;
  } src_entry_t;

  // Active frontier: a destination vertex whose property changed.
  typedef struct packed {
    vid_t  vid;
    prop_t prop;
    tag_t  tag;
  } frontier_t;

  // Frontier message on the host DMA streams (C2H export, H2C import).
  // A message with last=1 closes the batch of one interval; has_data=0 marks
  // a message that carries no frontier (an empty batch end).
  typedef struct packed {
    logic      last;
    logic      has_data;
    ivl_t      interval;
    frontier_t f;
  } fmsg_t;

  // Request on an HBM channel port. Reads return rsp_data in request order.
  typedef struct packed {
    logic  we;
    addr_t addr;
    word_t wdata;
  } mem_req_t;

  // Edge (Process_Edge) and vertex (Apply) functions.
  typedef enum logic [1:0] {
    ALGO_PR   = 2'd0,   // res = U_prop,           Apply = sum
    ALGO_SPMV = 2'd1,   // res = E_weight * U_prop, Apply = sum
    ALGO_HITS = 2'd2    // res = U_prop (hub score), Apply = sum (authority)
  } algo_e;

  // Interval states of the decoupled execution model.
  typedef enum logic [3:0] {
    IV_IDLE       = 4'd0,
    IV_IMPORT     = 4'd1,  // ready-for-import: waiting for frontier batches
    IV_PROCESS    = 4'd2,  // ready-for-process
    IV_PROCESSING = 4'd3,  // process-edges + partition-updates running
    IV_APPLY      = 4'd4,  // partitioned, waiting for apply-updates
    IV_APPLYING   = 4'd5,
    IV_EXPORT     = 4'd6,  // ready-for-export
    IV_EXPORTING  = 4'd7,
    IV_DONE       = 4'd8
  } iv_state_e;

  function automatic prop_t process_edge_fn(algo_e algo, prop_t weight, prop_t uprop);
    prop_t r;
    unique case (algo)
      ALGO_SPMV: r = prop_t'(weight * uprop);
      default:   r = uprop;
    endcase
    return r;
  endfunction

  function automatic prop_t apply_fn(algo_e algo, prop_t temp, prop_t res);
    // All three evaluated algorithms accumulate; algo is kept so that other
    // vertex functions can be added here.
    if (algo == ALGO_PR || algo == ALGO_SPMV || algo == ALGO_HITS) return temp + res;
    return temp + res;
  endfunction

endpackage
