// tb_kanon_top_full: one complete run of the accelerator with every
// parameter at its default: a 4,500-node map with 5,091 roads (10,182
// adjacency entries of 10,200), a 100,000-entry history log (the largest
// size of the throughput evaluation) scanned in full for every pair, and a
// short stream of location records. Stimulus, reference and checks are the
// same as in tb_kanon_top (shared through kanon_e2e.svh); only the history
// search, the shortest-path fallback and the published output are required
// to occur here.
module tb_kanon_top_full;
  import kanon_pkg::*;
  import kanon_ref_pkg::*;

  // ---- sizes of this run ----
  localparam int R = 75, C = 60;            // map grid
  localparam int NN = R * C;                // nodes
  localparam int NH = 100000;                // history entries
  localparam int NREC = 24;                 // location records
  localparam int XCROSS = 8;                // extra cross streets
  localparam int unsigned P_NODES = 4500, P_ADJ = 10200, P_HIST = 100000;
  localparam int unsigned EAW = $clog2(P_ADJ + 1), HAW = $clog2(P_HIST), HLW = $clog2(P_HIST + 1);
  localparam int WATCHDOG = 8000000;
  localparam bit REQUIRE_ALL = 1'b0;

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

  kanon_top dut (.*);

`include "kanon_e2e.svh"

endmodule
