// kanon_pkg: widths, record types and helper functions shared by the
// history-aware trajectory k-anonymization pipeline.
//
// Node IDs are 13 bits because the evaluated map has 4,500 intersections
// (2^13 = 8192 > 4500). Segment counts are unsigned Q16.16 fixed point, as
// the paper specifies for its segment counter. User IDs (16 bits), map
// coordinates (32-bit signed integers, e.g. degrees x 1e7) and edge lengths
// (16-bit) are this design's own choices; the paper does not give them.
package kanon_pkg;

  localparam int unsigned NODE_W  = 13;  // 4,500 nodes in the evaluated map
  localparam int unsigned USER_W  = 16;  // assumed
  localparam int unsigned COORD_W = 32;  // assumed, signed fixed point
  localparam int unsigned WGT_W   = 16;  // edge length, assumed
  localparam int unsigned DIST_W  = 32;  // accumulated path length
  localparam int unsigned CNT_W   = 32;  // Q16.16 segment count
  localparam int unsigned FRAC_W  = 16;  // fractional bits of Q16.16

  typedef logic [NODE_W-1:0]  node_t;
  typedef logic [USER_W-1:0]  user_t;
  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic [WGT_W-1:0]   wgt_t;
  typedef logic [DIST_W-1:0]  dist_t;
  typedef logic [CNT_W-1:0]   q16_t;

  localparam q16_t Q16_ONE = q16_t'(1) << FRAC_W;

  // One raw location record as delivered by the DMA.
  typedef struct packed {
    user_t  user;
    coord_t lat;
    coord_t lon;
  } loc_rec_t;

  // One entry of the history database: a node visited by a user.
  typedef struct packed {
    node_t node;
    user_t user;
  } hist_ent_t;

  // One adjacency entry of the map graph (compressed sparse row).
  typedef struct packed {
    node_t dst;
    wgt_t  len;
  } adj_ent_t;

  // A start/end node pair to be resolved into trajectories.
  typedef struct packed {
    user_t user;
    node_t ns;
    node_t ne;
  } node_pair_t;

  // One node of a selected trajectory, streamed in path order.
  typedef struct packed {
    node_t node;
    q16_t  weight;      // weight of the path this node belongs to
    logic  path_first;  // first node of a path
    logic  path_last;   // last node of a path
    logic  pair_last;   // last node of the last path for this node pair
  } path_node_t;

  // A weighted segment (a, b) with a <= b.
  typedef struct packed {
    node_t a;
    node_t b;
    q16_t  weight;
    logic  pair_last;
  } seg_t;

  // A published segment with its accumulated count.
  typedef struct packed {
    node_t a;
    node_t b;
    q16_t  count;
  } pub_seg_t;

  // Event counters of the whole pipeline, for the host.
  typedef struct packed {
    logic [31:0] records;       // location records accepted
    logic [31:0] pairs;         // start/end node pairs searched
    logic [31:0] stays;         // records that stayed on the previous node
    logic [31:0] new_users;     // records that began a new user's sequence
    logic [31:0] hist_used;     // pairs counted with historical paths
    logic [31:0] sp_used;       // pairs counted with the shortest path
    logic [31:0] no_path;       // pairs with neither
    logic [31:0] hist_dropped;  // historical hits lost to a full path buffer
    logic [31:0] sp_overflow;   // shortest-path searches aborted on overflow
  } kanon_stats_t;

  // Q16.16 reciprocal 1/h, truncated: floor(2^16 / h). h = 0 gives 0.
  function automatic q16_t q16_recip(input int unsigned h);
    if (h == 0) return '0;
    return q16_t'((32'd1 << FRAC_W) / h);
  endfunction

  // Saturating Q16.16 add.
  function automatic q16_t q16_sat_add(input q16_t x, input q16_t y);
    logic [CNT_W:0] s;
    s = {1'b0, x} + {1'b0, y};
    return s[CNT_W] ? '1 : s[CNT_W-1:0];
  endfunction

endpackage
