// gcn_pkg: constants and types shared by the message-passing GCN training
// accelerator. Sixteen cores sit on a 4-D hypercube; a core id is a 4-bit
// binary coordinate and two cores are neighbours when their ids differ in
// exactly one bit. A node feature is 512 bits (16 FP32 lanes); a network packet
// is that feature plus a 6-bit aggregate node id (518 bits), as in the paper.
// The routing instruction layout is this design's own (see route_instr_t).
package gcn_pkg;
  localparam int unsigned N_CORES   = 16;          // cores on the hypercube
  localparam int unsigned DIMS      = 4;           // hypercube dimensions
  localparam int unsigned CID_W     = 4;           // core id width
  localparam int unsigned LANES     = 16;          // FP32 lanes per feature
  localparam int unsigned FEAT_W    = 32 * LANES;  // 512-bit feature
  localparam int unsigned NID_W     = 6;           // local node id (64 per core)
  localparam int unsigned NODES_PC  = 64;          // nodes per core per subgraph
  localparam int unsigned GROUPS    = 4;           // diagonals routed in parallel
  localparam int unsigned MSGS      = GROUPS * N_CORES; // 64 messages per round
  localparam int unsigned MSG_W     = 6;           // message index width
  localparam int unsigned SLOTS     = 16;          // Transfer Register File slots
  localparam int unsigned SLOT_W    = 4;
  localparam int unsigned MAX_ROWS  = 16;          // routing table rows per round

  localparam logic [31:0] FP_ONE = 32'h3f80_0000;

  typedef logic [CID_W-1:0] cid_t;
  typedef logic [FEAT_W-1:0] feat_t;

  // 518-bit packet of the paper: merged feature and aggregate node id.
  typedef struct packed {
    feat_t            feat;
    logic [NID_W-1:0] agg_id;
  } pkt_t;

  // What a Transfer Register File slot and a link carry: the packet plus the
  // destination core id used by the "Des ID = Tile ID" check.
  typedef struct packed {
    cid_t dest;
    pkt_t pkt;
  } flit_t;

  // Per-core routing instruction for one network cycle. Field names follow the
  // paper (Head, Receive Signal, Open Channel, Send/store channel, Destination
  // ID); slot fields are added because the slots here are addressed explicitly.
  typedef struct packed {
    logic                  head;       // header: merge Block Message for dest_id
    logic [DIMS-1:0]       recv;       // incoming links latched this cycle
    logic [DIMS-1:0]       open_ch;    // outgoing links driven this cycle
    logic [DIMS-1:0][SLOT_W-1:0] send_slot;  // slot driven on each open link
    logic [DIMS-1:0][SLOT_W-1:0] store_slot; // slot written from each incoming link
    cid_t                  dest_id;    // destination of the header's message
  } route_instr_t;

  // Compressed edge of a Block Message (Fig. 7): aggregate node B, neighbour D,
  // edge value, and whether it closes the message for B.
  typedef struct packed {
    cid_t             dst_core;   // A
    cid_t             src_core;   // C
    logic [NID_W-1:0] agg_id;     // B
    logic [NID_W-1:0] nb_id;      // D
    logic [31:0]      val;        // edge value (normalised adjacency entry)
    logic             last;       // last neighbour of this aggregate node
  } bm_entry_t;

  // Operations of the unified compute engine.
  typedef enum logic [1:0] {OP_GEMM, OP_MERGE, OP_AGG} pe_op_t;
endpackage
