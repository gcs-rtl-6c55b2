// gcs_pkg -- shared sizes and types of the generalized cache-coherence (GCS) rack.
//
// The rack has NODES compute blades, one programmable switch that holds the cache
// directory, and one memory blade, all exchanging protocol messages of type gcs_msg_t.
// A "line" is a lock line: a directory entry that a thread acquires with S (read) or
// M (write) permission and keeps until it releases it.  Requests that cannot be served
// at once wait in a per-line wait queue kept at one compute blade, the queue holder.
//
// Sizes that follow the paper: NODES = 8 compute blades (the evaluated rack) and a wait
// queue bounded by the number of blades.  Everything else here (line count, data and
// version widths, message encodings, region-list length) is this design's own choice.
// Line data is carried as one DATA_W-bit word per line instead of a 4 KB page.
package gcs_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NODES     = 8;                 // compute blades
  localparam int unsigned PORTS     = NODES + 1;         // blades + memory blade
  localparam int unsigned MEM_PORT  = NODES;             // port index of the memory blade
  localparam int unsigned NODE_W    = $clog2(PORTS);     // id of a blade or the memory
  localparam int unsigned NUM_LINES = 16;                // lock lines tracked by the directory
  localparam int unsigned LINE_W    = $clog2(NUM_LINES);
  localparam int unsigned DATA_W    = 64;                // data carried with a line
  localparam int unsigned VER_W     = 8;                 // forwarded-request version counter
  localparam int unsigned QDEPTH    = NODES;             // wait queue bounded by blade count
  localparam int unsigned QCNT_W    = $clog2(QDEPTH + 1);
  localparam int unsigned SHM_MAX   = 4;                 // regions per line in the shared memory list
  localparam int unsigned ADDR_W    = 48;                // region base address
  localparam int unsigned SIZE_W    = 32;                // region size in bytes

  typedef logic [NODE_W-1:0] node_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [DATA_W-1:0] data_t;
  typedef logic [VER_W-1:0]  ver_t;
  typedef logic [NODES-1:0]  nmask_t;   // one bit per compute blade (sharer list)
  typedef logic [PORTS-1:0]  pmask_t;   // one bit per switch port (multicast)

  // MSI permission of a line
  typedef enum logic [1:0] {
    PERM_I = 2'd0,
    PERM_S = 2'd1,
    PERM_M = 2'd2
  } perm_e;

  // Protocol messages.
  typedef enum logic [3:0] {
    MSG_NONE      = 4'd0,
    MSG_ACQ       = 4'd1,  // blade -> directory: Acquire with perm (S or M)
    MSG_FWD       = 4'd2,  // directory -> queue holder: enqueue requestor req with perm
    MSG_NEXT_WR   = 4'd3,  // directory -> sharers: writer req waits; Inv-Ack on release
    MSG_INV_ACK   = 4'd4,  // blade -> directory: line invalidated at src
    MSG_MEM_RD    = 4'd5,  // directory -> memory: read line, Acquire-Ack to req with perm
    MSG_ACK_DATA  = 4'd6,  // memory -> requestor (via switch): Acquire-Ack with data
    MSG_QXFER_REQ = 4'd7,  // queue holder -> directory: transfer plan + version + data
    MSG_QXFER_DENY= 4'd8,  // directory -> queue holder: version mismatch, retry
    MSG_GRANT     = 4'd9   // directory -> old holder, grantees, memory: transfer approved
  } msg_e;

  // One wait-queue entry: a waiting blade and the permission it asked for.
  typedef struct packed {
    node_t node;
    perm_e perm;
  } qent_t;

  typedef qent_t [QDEPTH-1:0] qarr_t;   // index 0 is the head of the queue

  // Outcome of Algorithm 1 (queue transfer protocol) on a release at the writer.
  typedef enum logic [1:0] {
    PLAN_DROP        = 2'd0,  // queue empty: drop it (case i)
    PLAN_TO_WRITER   = 2'd1,  // head is a writer: queue moves to it (case ii)
    PLAN_READERS_WR  = 2'd2,  // head reader(s), writer behind: queue moves to it (case iii)
    PLAN_READERS     = 2'd3   // only readers: all granted S, queue dropped (case i)
  } plan_e;

  // Network message.  Fields not used by a message type are don't-care (zero).
  typedef struct packed {
    msg_e          mtype;
    node_t         src;       // sender port
    node_t         req;       // requestor / next writer / reply target
    line_t         line;
    perm_e         perm;
    ver_t          ver;       // queue-holder version (MSG_QXFER_REQ)
    data_t         data;
    plan_e         plan;      // MSG_QXFER_REQ / MSG_GRANT
    nmask_t        readers;   // blades granted S by a transfer
    logic          nw_valid;  // a next writer exists (req holds it)
    logic [QCNT_W-1:0] qcnt;  // entries in qarr
    qarr_t         qarr;      // queue carried by a transfer
  } gcs_msg_t;

  // CPU-side lock operations on a compute blade.
  typedef enum logic [1:0] {
    OP_ACQ_S = 2'd0,  // read lock  (pthread_rwlock_rdlock / RwLock::read)
    OP_ACQ_M = 2'd1,  // write lock (pthread_rwlock_wrlock / RwLock::write)
    OP_REL   = 2'd2   // unlock
  } op_e;

endpackage
