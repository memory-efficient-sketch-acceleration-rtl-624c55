// hbrick_pkg: configuration and shared types of the HBRICK count-min sketch.
//
// A count-min sketch keeps D counter arrays of W = 2^LOG_W entries. Each array
// is stored as HBRICK buckets of K entries. Every entry owns a W1-bit base
// sub-counter (level A1); entries whose count outgrows W1 bits borrow a W2-bit
// sub-counter from the bucket's small A2 pool (K2 slots packed into one word),
// and then a W3-bit one from the A3 pool (K3 slots). A two-column index bitmap
// (one bit per optional level per entry) says which entries own a slot; the
// slot number is the rank (count of ones below the entry) in that column. A
// per-entry dirty bit marks entries that were evicted to the associative
// memory because a pool was full.
//
// D = 4, W = 2^15 and three levels are the configuration the design is built
// for. The bucket geometry (K = 8, K2 = 4, K3 = 2) copies the worked example
// drawn for the bucket layout. The widths 17/8/7 are this design's choice,
// made by the rule that the base width should match the average entry: a
// stream of 3 million packets of about 780 bytes spread over 2^15 entries puts
// about 72 KB (2^16.1) into each entry, so 17 base bits keep most entries in A1.
// The 32-bit total covers the largest flow seen in backbone traces (29 bits).
// One bucket word is 3*K + K*W1 + K2*W2 + K3*W3 = 206 bits.
package hbrick_pkg;

  // Count-min geometry
  localparam int unsigned CFG_D     = 4;  // hash functions / counter arrays
  localparam int unsigned CFG_LOG_W = 15; // log2 of entries per array

  // HBRICK bucket geometry (three levels)
  localparam int unsigned K      = 8;    // entries per bucket (A1 sub-counters)
  localparam int unsigned K2     = 4;    // A2 sub-counters per bucket
  localparam int unsigned K3     = 2;    // A3 sub-counters per bucket
  localparam int unsigned W1     = 17;   // A1 width
  localparam int unsigned W2     = 8;    // A2 width
  localparam int unsigned W3     = 7;    // A3 width
  localparam int unsigned CNT_W  = W1 + W2 + W3;  // full counter width (32)
  localparam int unsigned LOG_K  = $clog2(K);

  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  // One bucket, all levels side by side in one memory word.
  typedef struct packed {
    logic [K-1:0]       v;    // dirty bit per entry: evicted to the associative memory
    logic [K-1:0]       i3;   // index column: entry owns an A3 slot
    logic [K-1:0]       i2;   // index column: entry owns an A2 slot
    logic [K*W1-1:0]    a1;   // base level, entry j at bits [j*W1 +: W1]
    logic [K2*W2-1:0]   a2;   // packed A2 pool, slot s at bits [s*W2 +: W2]
    logic [K3*W3-1:0]   a3;   // packed A3 pool, slot s at bits [s*W3 +: W3]
  } bucket_t;

  localparam int unsigned BUCKET_W = $bits(bucket_t);

  // Flow key: the five-tuple.
  typedef struct packed {
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port;
    logic [7:0]  proto;
  } five_tuple_t;

  // Per-cycle event flags of one counter array, for monitoring and tests.
  typedef struct packed {
    logic merge;      // DFU folded an access into an in-flight one
    logic expand2;    // an entry grew into the A2 level
    logic expand3;    // an entry grew into the A3 level
    logic evict;      // pool overflow: entry moved to the associative memory
    logic assoc_hit;  // access to an already evicted entry
    logic saturate;   // overflow while the associative memory was full
  } row_events_t;

endpackage
