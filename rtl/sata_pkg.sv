// sata_pkg: types and constants shared by the SATA scheduler.
//
// The scheduler works on one square tile of a binary TopK selective mask at a
// time (queries are rows, keys are columns). Index fields are sized for tiles of
// up to SF_MAX tokens, which matches the 32x32 compute sub-array the scheduler
// feeds; every module checks that its tile size N fits.
//
// Query tags (HEAD / TAIL / GLOB), head types and the scheduling states follow
// the paper's names. The encodings and the FIFO entry layouts are this design's
// own choice.
package sata_pkg;

  localparam int unsigned SF_MAX = 32;               // largest tile size supported by the index fields
  localparam int unsigned IDX_W  = $clog2(SF_MAX);   // query / key index width
  localparam int unsigned HEAD_W = 8;                // head (tile) counter width on the output streams

  typedef logic [IDX_W-1:0] idx_t;

  // Tag of one query after classification against the heavy size S_h.
  typedef enum logic [1:0] {
    QT_HEAD = 2'd0,   // touches none of the last S_h sorted keys
    QT_TAIL = 2'd1,   // touches none of the first S_h sorted keys
    QT_GLOB = 2'd2    // touches both ends
  } qtype_e;

  // Type of one head (tile) after classification.
  typedef enum logic [1:0] {
    HT_HEAD = 2'd0,   // HEAD queries dominate: major = HEAD, minor = TAIL
    HT_TAIL = 2'd1,   // TAIL queries dominate: major = TAIL, minor = HEAD
    HT_GLOB = 2'd2    // no locality left (S_h conceded to 0): load-then-MAC
  } htype_e;

  // Scheduling FSM states (Sec. "Sparsity-aware inter-head scheduling").
  typedef enum logic [2:0] {
    ST_IDLE     = 3'd0,
    ST_INIT     = 3'd1,   // load major queries of the first head
    ST_INTOHD   = 3'd2,   // MAC first S_h keys, load minor queries
    ST_MIDSTHD  = 3'd3,   // MAC middle keys with every query
    ST_OUTTAHD  = 3'd4,   // MAC last S_h keys, load next head's major queries
    ST_WRAPGQ   = 3'd5,   // GLOB head: load all queries
    ST_WRAPGK   = 3'd6    // GLOB head: MAC all keys
  } sched_state_e;

  // KFIFO entry: key index and its sorted position.
  typedef struct packed {
    idx_t kid;
    idx_t rank;
  } kentry_t;

  // QFIFO entry: query index and its tag.
  typedef struct packed {
    idx_t   qid;
    qtype_e qt;
  } qentry_t;

  // Head-info entry, written once a tile's keys and queries are all in the FIFOs.
  typedef struct packed {
    idx_t       s_h;      // final heavy size
    htype_e     ht;       // head type
    logic [IDX_W:0] n_k;      // keys written to KFIFO (after zero-skip)
    logic [IDX_W:0] n_major;  // major + GLOB queries written first
    logic [IDX_W:0] n_minor;  // minor queries written last
    logic       last;     // last head of the layer
  } hinfo_t;

endpackage
