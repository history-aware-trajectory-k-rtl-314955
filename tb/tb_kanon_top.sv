// tb_kanon_top: end-to-end test of the whole accelerator at reduced sizes.
// Builds a comb-shaped road map (every row a street, rows joined by a few
// cross streets, one node left without roads), a history log of random
// walks, and location records of users who partly retrace history walks,
// partly wander, sometimes stay put and once head for the unreachable
// node. Records are jittered around their nodes. The reference model
// (kanon_ref_pkg) processes the same records; after all records the
// published segments for several k are compared with it, as are the event
// counters. Each mechanism (history used, 1/h weighting with h > 1,
// shortest-path fallback, hop filter taking effect, no path at all, stays,
// user changes, suppression below k, output back-pressure) is counted and
// must occur at least once. Also checks the time per record against the
// scan-dominated bound.
module tb_kanon_top;
  import kanon_pkg::*;
  import kanon_ref_pkg::*;

  // ---- sizes of this run ----
  localparam int R = 12, C = 16;            // map grid
  localparam int NN = R * C;                // nodes
  localparam int NH = 1500;                 // history entries
  localparam int NREC = 160;                // location records
  localparam int XCROSS = 5;                // extra cross streets
  localparam int unsigned P_NODES = 200, P_ADJ = 512, P_HIST = 2048, P_TABLE = 1024;
  localparam int unsigned EAW = $clog2(P_ADJ + 1), HAW = $clog2(P_HIST), HLW = $clog2(P_HIST + 1);
  localparam int WATCHDOG = 5000000;
  localparam bit REQUIRE_ALL = 1'b1;

  logic clk = 1'b0, rst_n = 1'b0;
  logic node_we; node_t node_waddr; coord_t node_wlat, node_wlon;
  logic row_we; logic [15:0] row_waddr; logic [EAW-1:0] row_wdata;
  logic adj_we; logic [EAW-1:0] adj_waddr; adj_ent_t adj_wdata;
  logic hist_we; logic [HAW-1:0] hist_waddr; hist_ent_t hist_wdata;
  logic [15:0] num_nodes; logic [HLW-1:0] hist_len; logic hop_filter_en; logic [7:0] delta_h;
  logic [15:0] k;
  logic loc_valid, loc_ready; loc_rec_t loc;
  logic clear, publish, pub_valid, pub_ready, pub_done, idle;
  pub_seg_t pub_seg;
  kanon_stats_t stats;
  logic [31:0] num_segments, num_published, seg_updates, seg_collisions, seg_dropped;

  kanon_top #(.NUM_NODES(P_NODES), .ADJ_DEPTH(P_ADJ), .HIST_DEPTH(P_HIST), .TABLE_DEPTH(P_TABLE)) dut (.*);

`include "kanon_e2e.svh"

endmodule
