// kanon_top: the programmable-logic part of the history-aware trajectory
// k-anonymization accelerator. Raw location records go in; road segments
// travelled by at least k (fractionally weighted) users come out.
//
// Pipeline, as in the architecture figure of the paper:
//   location records -> node search engine -> pair forming ->
//   trajectory search engine (shortest path || history search, selection)
//   -> segment generator -> segment counter -> published segments.
// The processing system and the DMA of the paper are outside this module:
// the record stream (loc_*) and the published-segment stream (pub_*) are
// the two DMA streams, and the load ports stand for the map and history
// data that the paper preloads with the bitstream.
//
// Pair forming is this design's own, minimal reading of "for each pair of
// approximated start and end nodes": records are expected grouped per user
// in time order, and two consecutive records of the same user that map to
// different nodes form one (start, end) pair. A record on the same node as
// the previous one is counted as a stay; a record of another user starts
// that user's sequence. One pair register decouples node search from the
// trajectory search, so the next record's node search overlaps the current
// pair's history scan.
//
// Timing: a record costs num_nodes + 1 cycles of node search; a pair costs
// hist_len + 2 cycles of history scan (running alongside Dijkstra), then
// one cycle per emitted path node, the segments being counted at about
// three cycles each. clear wipes the count table; publish streams every
// segment with count >= k; both are to be issued while idle is high.
module kanon_top
  import kanon_pkg::*;
#(
  parameter int unsigned NUM_NODES   = 4500,
  parameter int unsigned ADJ_DEPTH   = 10200,
  parameter int unsigned OPEN_MAX    = 256,
  parameter int unsigned HIST_DEPTH  = 100000,
  parameter int unsigned MAX_PATHS   = 32,
  parameter int unsigned PATH_MEM    = 2048,
  parameter int unsigned HOP_CAP     = 255,
  parameter int unsigned TABLE_DEPTH = 8192,
  parameter int unsigned MAX_PROBE   = 8,
  localparam int unsigned EAW = $clog2(ADJ_DEPTH + 1),
  localparam int unsigned HAW = $clog2(HIST_DEPTH),
  localparam int unsigned HLW = $clog2(HIST_DEPTH + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // map and history data
  input  logic           node_we,
  input  node_t          node_waddr,
  input  coord_t         node_wlat,
  input  coord_t         node_wlon,
  input  logic           row_we,
  input  logic [15:0]    row_waddr,
  input  logic [EAW-1:0] row_wdata,
  input  logic           adj_we,
  input  logic [EAW-1:0] adj_waddr,
  input  adj_ent_t       adj_wdata,
  input  logic           hist_we,
  input  logic [HAW-1:0] hist_waddr,
  input  hist_ent_t      hist_wdata,
  // configuration
  input  logic [15:0]    num_nodes,
  input  logic [HLW-1:0] hist_len,
  input  logic           hop_filter_en,
  input  logic [7:0]     delta_h,
  input  logic [15:0]    k,
  // location records (DMA to PL)
  input  logic           loc_valid,
  output logic           loc_ready,
  input  loc_rec_t       loc,
  // commands
  input  logic           clear,
  input  logic           publish,
  // anonymized segments (PL to DMA)
  output logic           pub_valid,
  input  logic           pub_ready,
  output pub_seg_t       pub_seg,
  output logic           pub_done,
  // status
  output logic           idle,
  output kanon_stats_t   stats,
  output logic [31:0]    num_segments,
  output logic [31:0]    num_published,
  output logic [31:0]    seg_updates,
  output logic [31:0]    seg_collisions,
  output logic [31:0]    seg_dropped
);

  localparam int unsigned PCW = $clog2(MAX_PATHS + 1);

  // ---------------- node search ----------------
  logic  nse_valid, nse_ready;
  user_t nse_user;
  node_t nse_node;
  logic  nse_idle;

  node_search_engine #(.NUM_NODES(NUM_NODES)) u_nse (
    .clk, .rst_n, .node_we, .node_waddr, .node_wlat, .node_wlon, .num_nodes,
    .in_valid  (loc_valid),
    .in_ready  (loc_ready),
    .in_rec    (loc),
    .out_valid (nse_valid),
    .out_ready (nse_ready),
    .out_user  (nse_user),
    .out_node  (nse_node)
  );
  assign nse_idle = loc_ready;

  // ---------------- pair forming ----------------
  logic       prev_valid;
  user_t      prev_user;
  node_t      prev_node;
  logic       pend_valid, pair_ready;
  node_pair_t pend;
  logic       nse_take, forms_pair;

  assign nse_ready  = !pend_valid || pair_ready;
  assign nse_take   = nse_valid && nse_ready;
  assign forms_pair = prev_valid && (nse_user == prev_user) && (nse_node != prev_node);

  // ---------------- trajectory search engine ----------------
  logic       tse_valid, tse_ready;
  path_node_t tse_node;
  logic       pair_done, used_hist, used_sp, used_none, sp_ovf;
  logic [PCW-1:0] h_valid;
  logic [15:0] hs_dropped;

  trajectory_search_engine #(
    .NUM_NODES(NUM_NODES), .ADJ_DEPTH(ADJ_DEPTH), .OPEN_MAX(OPEN_MAX),
    .HIST_DEPTH(HIST_DEPTH), .MAX_PATHS(MAX_PATHS), .PATH_MEM(PATH_MEM), .HOP_CAP(HOP_CAP)
  ) u_tse (
    .clk, .rst_n, .row_we, .row_waddr, .row_wdata, .adj_we, .adj_waddr, .adj_wdata,
    .hist_we, .hist_waddr, .hist_wdata, .num_nodes, .hist_len, .hop_filter_en, .delta_h,
    .pair_valid  (pend_valid),
    .pair_ready  (pair_ready),
    .pair        (pend),
    .out_valid   (tse_valid),
    .out_ready   (tse_ready),
    .out_node    (tse_node),
    .pair_done   (pair_done),
    .used_hist   (used_hist),
    .used_sp     (used_sp),
    .used_none   (used_none),
    .h_valid     (h_valid),
    .hs_dropped  (hs_dropped),
    .sp_overflow (sp_ovf)
  );

  // ---------------- segment generator and counter ----------------
  logic sg_valid, sg_ready;
  seg_t sg_seg;
  logic sc_busy;

  segment_generator u_sg (
    .clk, .rst_n,
    .in_valid  (tse_valid),
    .in_ready  (tse_ready),
    .in_node   (tse_node),
    .out_valid (sg_valid),
    .out_ready (sg_ready),
    .out_seg   (sg_seg)
  );

  segment_counter #(.TABLE_DEPTH(TABLE_DEPTH), .MAX_PROBE(MAX_PROBE)) u_sc (
    .clk, .rst_n,
    .in_valid       (sg_valid),
    .in_ready       (sg_ready),
    .in_seg         (sg_seg),
    .clear, .publish, .k,
    .busy           (sc_busy),
    .pub_valid, .pub_ready, .pub_seg, .pub_done,
    .num_segments, .num_published,
    .num_updates    (seg_updates),
    .num_collisions (seg_collisions),
    .dropped        (seg_dropped)
  );

  assign idle = nse_idle && !nse_valid && !pend_valid && pair_ready && !tse_valid
                && !sg_valid && !sc_busy && !loc_valid;

  // ---------------- pair register and statistics ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_valid <= 1'b0;
      prev_user  <= '0;
      prev_node  <= '0;
      pend_valid <= 1'b0;
      pend       <= '0;
      stats      <= '0;
    end else begin
      if (pend_valid && pair_ready) begin
        pend_valid  <= 1'b0;
        stats.pairs <= stats.pairs + 1;
      end
      if (loc_valid && loc_ready) stats.records <= stats.records + 1;
      if (nse_take) begin
        prev_valid <= 1'b1;
        prev_user  <= nse_user;
        prev_node  <= nse_node;
        if (forms_pair) begin
          pend_valid <= 1'b1;
          pend       <= '{user: nse_user, ns: prev_node, ne: nse_node};
        end else if (prev_valid && nse_user == prev_user) begin
          stats.stays <= stats.stays + 1;
        end else begin
          stats.new_users <= stats.new_users + 1;
        end
      end
      if (pair_done) begin
        if (used_hist) stats.hist_used <= stats.hist_used + 1;
        if (used_sp)   stats.sp_used   <= stats.sp_used + 1;
        if (used_none) stats.no_path   <= stats.no_path + 1;
        stats.hist_dropped <= stats.hist_dropped + 32'(hs_dropped);
        if (sp_ovf) stats.sp_overflow <= stats.sp_overflow + 1;
      end
    end
  end

  // commands only while the pipeline is idle
  assert property (@(posedge clk) disable iff (!rst_n) (clear || publish) |-> idle);

endmodule
