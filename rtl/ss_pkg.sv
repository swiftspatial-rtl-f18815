// ss_pkg: types and constants shared by every block of the spatial-join
// accelerator.
//
// An R-tree node (or a PBSM tile) is a short list of entries. Each entry is a
// minimum bounding rectangle (MBR) plus a 32-bit identifier: an object id in a
// leaf node, a child-node pointer in a directory node. The join unit has six
// comparators, so MBRs are three-dimensional; two-dimensional data is stored
// with zero front/back coordinates, which makes the last two comparisons
// always true. Coordinates are IEEE-754 single-precision bit patterns; the
// comparison below orders them without a floating-point unit.
//
// Everything the join emits (a result or a future task) is a pair of 32-bit
// identifiers, 8 bytes, as in the paper. Node memory words are 256 bits and hold
// either a node header or one entry. Widths and layouts are this design's own
// choices; the paper gives the 8-byte pair and the six comparisons.
package ss_pkg;

  localparam int unsigned ID_W     = 32;
  localparam int unsigned COORD_W  = 32;
  localparam int unsigned ADDR_W   = 32;
  localparam int unsigned CNT_W    = 8;    // entries in a node: up to 255
  localparam int unsigned NODE_W   = 256;  // node memory word

  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [ID_W-1:0]    id_t;
  typedef logic [ADDR_W-1:0]  addr_t;

  // left/right on x, bottom/top on y, back/front on z
  typedef struct packed {
    coord_t left;
    coord_t right;
    coord_t bottom;
    coord_t top;
    coord_t back;
    coord_t front;
  } mbr_t;

  typedef struct packed {
    mbr_t mbr;
    id_t  id;
  } entry_t;

  // Node header: what the paper calls node metadata. ptr is filled in by the
  // read unit with the node's own pointer.
  typedef struct packed {
    logic             is_leaf;
    logic [CNT_W-1:0] count;
    id_t              ptr;
  } node_meta_t;

  // One beat of the node stream from the read unit to a join unit.
  typedef struct packed {
    logic       is_meta;
    node_meta_t meta;
    entry_t     entry;
  } node_beat_t;

  // A join output: a result (two object ids) or a task (two node pointers).
  typedef struct packed {
    id_t r;
    id_t s;
  } pair_t;

  // A task dispatched by the scheduler to the read unit.
  typedef struct packed {
    pair_t            nodes;
    logic [7:0]       ju;
  } assign_t;

  typedef enum logic {
    MODE_SYNC_TRAVERSAL = 1'b0,
    MODE_PBSM           = 1'b1
  } join_mode_e;

  typedef enum logic {
    POLICY_ROUND_ROBIN = 1'b0,  // static
    POLICY_FIRST_IDLE  = 1'b1   // dynamic
  } sched_policy_e;

  // Total order key of an IEEE-754 single (NaN excluded); -0 maps onto +0.
  function automatic logic [COORD_W-1:0] fp_key(input coord_t a);
    coord_t v;
    v = (a == 32'h8000_0000) ? 32'h0 : a;
    return v[31] ? ~v : (v | 32'h8000_0000);
  endfunction

  function automatic logic fp_ge(input coord_t a, input coord_t b);
    return fp_key(a) >= fp_key(b);
  endfunction

  // Node memory layout: a node pointer p occupies words
  // p*(max_entries+1) (header) .. p*(max_entries+1)+count (entries).
  function automatic logic [NODE_W-1:0] pack_meta(input node_meta_t m);
    return NODE_W'(m);
  endfunction

  function automatic logic [NODE_W-1:0] pack_entry(input entry_t e);
    return NODE_W'(e);
  endfunction

endpackage
