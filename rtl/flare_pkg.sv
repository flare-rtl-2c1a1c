// flare_pkg: types and constants shared by the Flare in-network allreduce
// processing unit.
//
// A packet carries N_ELEM 32-bit lanes of payload (256 x 4 B = 1 KiB, the
// packet size the design is dimensioned for) and moves through the unit as
// rows of ROW_ELEMS lanes, one row per clock. The header that travels beside
// the payload holds the EtherType the parser matches on, the identifier of
// the allreduce and the reduction block the packet belongs to. The row width,
// the header field widths and the encodings below are this design's own
// choices; the packet size, the three aggregation algorithms and the
// operator set follow the paper.
package flare_pkg;

  // Payload lane and row geometry.
  localparam int unsigned ELEM_W    = 32;
  localparam int unsigned ROW_ELEMS = 4;                  // lanes per row (16 B)
  localparam int unsigned ROW_W     = ELEM_W * ROW_ELEMS;
  localparam int unsigned N_ELEM    = 256;                // lanes per packet (1 KiB)
  localparam int unsigned PKT_ROWS  = N_ELEM / ROW_ELEMS; // 64 rows per packet

  // Header field widths.
  localparam int unsigned ETYPE_W = 16;
  localparam int unsigned AR_W    = 2;   // up to 4 concurrent allreduces
  localparam int unsigned BLK_W   = 16;  // reduction block identifier

  // Switch ports that can be children or parent in a reduction tree.
  localparam int unsigned NPORTS  = 8;
  localparam int unsigned PORT_W  = $clog2(NPORTS);
  localparam int unsigned LOG2P   = $clog2(NPORTS);       // tree levels

  typedef logic [ROW_W-1:0]  row_t;
  typedef logic [NPORTS-1:0] portmask_t;

  typedef struct packed {
    logic [ETYPE_W-1:0] ethertype;
    logic [AR_W-1:0]    ar_id;
    logic [BLK_W-1:0]   block_id;
  } pkt_hdr_t;

  // Reduction operator applied lane-wise to a row.
  typedef enum logic [2:0] {
    OP_SUM_I32  = 3'd0,
    OP_MIN_I32  = 3'd1,
    OP_MAX_I32  = 3'd2,
    OP_SUM_I16  = 3'd3,   // two packed int16 per lane
    OP_SUM_I8   = 3'd4    // four packed int8 per lane
  } red_op_e;

  // Aggregation algorithm of an allreduce.
  typedef enum logic [1:0] {
    ALG_SINGLE = 2'd0,    // one shared buffer per block, critical section
    ALG_MULTI  = 2'd1,    // B buffers per block, last handler merges them
    ALG_TREE   = 2'd2     // one leaf buffer per port, fixed pairwise tree
  } algo_e;

  // Handler state installed for one allreduce.
  typedef struct packed {
    logic                valid;
    portmask_t           children;   // ports whose packets are reduced
    logic [PORT_W-1:0]   parent;     // port towards the parent switch
    logic                is_root;    // root multicasts to the children
    red_op_e             op;
    algo_e               algo;
    logic [PORT_W:0]     nbuf;       // buffers per block for ALG_MULTI
  } ar_cfg_t;

  // Descriptor of a packet parked in the L2 packet memory.
  typedef struct packed {
    logic [PORT_W-1:0]   port;
    pkt_hdr_t            hdr;
    logic [15:0]         slot;
  } pkt_desc_t;

  // Header of a result packet leaving the processing unit.
  typedef struct packed {
    portmask_t           dest;       // output port(s)
    logic [AR_W-1:0]     ar_id;
    logic [BLK_W-1:0]    block_id;
  } out_hdr_t;

  // Event counters of the processing unit.
  typedef struct packed {
    logic [31:0] processed;    // packets sent to the packet memory
    logic [31:0] bypassed;     // packets sent straight to the routing tables
    logic [31:0] dropped;      // packets dropped, packet memory full
    logic [31:0] sched_stall;  // cycles a descriptor waited for a full cluster queue
    logic [31:0] dup;          // retransmitted packets discarded
    logic [31:0] lock_wait;    // refused buffer lock requests
    logic [31:0] merge;        // buffers merged by the last handler
    logic [31:0] combine;      // tree combine steps
    logic [31:0] results;      // result packets sent
  } stats_t;

  // Requests of a handler unit to its cluster's block table.
  typedef enum logic [2:0] {
    BT_CLAIM = 3'd0,   // register arrival from a port (retransmission check)
    BT_ACQ   = 3'd1,   // lock a free aggregation buffer of the block
    BT_REL   = 3'd2,   // unlock it and mark the port's packet as aggregated
    BT_TREE  = 3'd3,   // tree node finished: combine with partner or stop
    BT_FREE  = 3'd4    // block sent: clear the entry
  } bt_op_e;

  typedef enum logic [1:0] {ACT_NONE, ACT_COPY, ACT_COMBINE} tree_act_e;

  localparam int unsigned BUF_W  = PORT_W;       // buffer index in a block
  localparam int unsigned NODE_N = 2 * NPORTS;   // tree node ready bits

  typedef struct packed {
    bt_op_e              op;
    logic [PORT_W-1:0]   port;
    logic [BUF_W-1:0]    bufi;       // BT_REL: buffer being released
    logic [$clog2(LOG2P+1)-1:0] level; // BT_TREE: level of the finished node
    logic [PORT_W-1:0]   group;      // BT_TREE: its group index at that level
    portmask_t           children;
    algo_e               algo;
    logic [PORT_W:0]     nbuf;
  } bt_req_t;

  typedef struct packed {
    logic                ok;         // claim new / buffer granted / partner ready
    logic                first;      // BT_ACQ: buffer holds no data yet
    logic [BUF_W-1:0]    bufi;       // BT_ACQ: granted buffer
    logic                last;       // BT_REL: all children aggregated
    logic [NPORTS-1:0]   used;       // BT_REL: buffers holding data
    tree_act_e           act;        // BT_TREE: work to do
    logic [BUF_W-1:0]    dst;        // BT_TREE: destination buffer
    logic [BUF_W-1:0]    src;        // BT_TREE: source buffer
  } bt_resp_t;

endpackage
