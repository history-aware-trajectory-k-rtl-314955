// trajectory_search_engine: turns one start/end node pair into the set of
// weighted trajectories to be counted. It holds the shortest-path search
// (with the map graph), the history search (with the history database)
// and the trajectory selection.
//
// How it works: an accepted pair starts both searches in the same cycle,
// as the paper prescribes. The history search always takes hist_len + 2
// cycles and normally finishes last, so it sets the pace. The history
// search is told to track paths up to HOP_CAP hops; the paper's hop limit
// (shortest-path hops + delta_h) is applied afterwards by the selection
// stage, once the shortest path is known. This gives the same accepted
// paths as the paper's sequential formulation as long as the limit does not
// exceed HOP_CAP; running the two searches in parallel needs this split,
// and it is this design's own arrangement. When both searches are done the
// selection streams the chosen paths.
//
// Interface: pair_* valid/ready in (ready only while idle); out_* is the
// selection's valid/ready node stream; pair_done pulses when a pair is
// finished. Load ports for the map graph and the history pass through.
module trajectory_search_engine
  import kanon_pkg::*;
#(
  parameter int unsigned NUM_NODES  = 4500,
  parameter int unsigned ADJ_DEPTH  = 10200,
  parameter int unsigned OPEN_MAX   = 256,
  parameter int unsigned HIST_DEPTH = 100000,
  parameter int unsigned MAX_PATHS  = 32,
  parameter int unsigned PATH_MEM   = 2048,
  parameter int unsigned HOP_CAP    = 255,
  localparam int unsigned EAW = $clog2(ADJ_DEPTH + 1),
  localparam int unsigned HAW = $clog2(HIST_DEPTH),
  localparam int unsigned HLW = $clog2(HIST_DEPTH + 1),
  localparam int unsigned PCW = $clog2(MAX_PATHS + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // map and history load ports
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
  // node pairs in
  input  logic           pair_valid,
  output logic           pair_ready,
  input  node_pair_t     pair,
  // selected path nodes out
  output logic           out_valid,
  input  logic           out_ready,
  output path_node_t     out_node,
  // per-pair status
  output logic           pair_done,
  output logic           used_hist,
  output logic           used_sp,
  output logic           used_none,
  output logic [PCW-1:0] h_valid,
  output logic [15:0]    hs_dropped,
  output logic           sp_overflow
);

  localparam int unsigned PAW = $clog2(PATH_MEM);
  localparam int unsigned PIW = $clog2(MAX_PATHS);

  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_SELECT} state_t;
  state_t state;

  logic go;
  logic sp_busy, sp_done, sp_found, sp_fin;
  logic [7:0] sp_hops, sp_path_idx;
  dist_t sp_len;
  node_t sp_path_node;
  logic hs_busy, hs_done, hs_fin;
  logic [PCW-1:0] hs_num_paths;
  logic [PIW-1:0] hs_path_sel;
  logic [PAW-1:0] hs_path_base, hs_node_addr;
  logic [7:0] hs_path_hops;
  node_t hs_node_data;
  logic sel_start, sel_busy, sel_done;

  assign pair_ready = (state == S_IDLE);
  assign go         = pair_valid && pair_ready;

  shortest_path_search #(
    .NUM_NODES(NUM_NODES), .ADJ_DEPTH(ADJ_DEPTH), .OPEN_MAX(OPEN_MAX), .MAX_HOPS(255)
  ) u_sp (
    .clk, .rst_n, .row_we, .row_waddr, .row_wdata, .adj_we, .adj_waddr, .adj_wdata,
    .num_nodes,
    .start     (go),
    .s         (pair.ns),
    .e         (pair.ne),
    .busy      (sp_busy),
    .done      (sp_done),
    .found     (sp_found),
    .overflow  (sp_overflow),
    .hops      (sp_hops),
    .path_len  (sp_len),
    .path_idx  (sp_path_idx),
    .path_node (sp_path_node)
  );

  history_search #(
    .HIST_DEPTH(HIST_DEPTH), .MAX_PATHS(MAX_PATHS), .PATH_MEM(PATH_MEM)
  ) u_hs (
    .clk, .rst_n, .hist_we, .hist_waddr, .hist_wdata,
    .start       (go),
    .ns          (pair.ns),
    .ne          (pair.ne),
    .max_hop     (8'(HOP_CAP)),
    .hist_len,
    .busy        (hs_busy),
    .done        (hs_done),
    .num_paths   (hs_num_paths),
    .num_dropped (hs_dropped),
    .path_sel    (hs_path_sel),
    .path_base   (hs_path_base),
    .path_hops   (hs_path_hops),
    .node_addr   (hs_node_addr),
    .node_data   (hs_node_data)
  );

  trajectory_select #(.MAX_PATHS(MAX_PATHS), .PATH_MEM(PATH_MEM)) u_sel (
    .clk, .rst_n,
    .start        (sel_start),
    .hop_filter_en,
    .delta_h,
    .busy         (sel_busy),
    .done         (sel_done),
    .hs_num_paths,
    .hs_path_sel,
    .hs_path_base,
    .hs_path_hops,
    .hs_node_addr,
    .hs_node_data,
    .sp_found,
    .sp_hops,
    .sp_path_idx,
    .sp_path_node,
    .out_valid,
    .out_ready,
    .out_node,
    .used_hist,
    .used_sp,
    .used_none,
    .h_valid
  );

  assign sel_start = (state == S_SEARCH) && (sp_fin || sp_done) && (hs_fin || hs_done);
  assign pair_done = sel_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      sp_fin <= 1'b0;
      hs_fin <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (go) begin
          sp_fin <= 1'b0;
          hs_fin <= 1'b0;
          state  <= S_SEARCH;
        end
        S_SEARCH: begin
          if (sp_done) sp_fin <= 1'b1;
          if (hs_done) hs_fin <= 1'b1;
          if (sel_start) state <= S_SELECT;
        end
        S_SELECT: if (sel_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // both searches are idle whenever a new pair is accepted
  assert property (@(posedge clk) disable iff (!rst_n) go |-> !sp_busy && !hs_busy && !sel_busy);

endmodule
