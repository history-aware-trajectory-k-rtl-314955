// trajectory_select: candidate trajectory determination. After the
// shortest-path and history searches for one node pair have finished, this
// block decides which paths are counted and streams their nodes, each
// tagged with the path's weight, to the segment generator.
//
// Rule (from the paper): if one or more valid historical paths were found
// (h > 0) all of them are used and each carries the weight 1/h; otherwise
// the shortest path is used with weight 1. With the hop filter enabled a
// historical path is valid only if its hop count does not exceed the
// shortest path's hop count plus delta_h (the paper uses delta_h = 5).
//
// How it works: a first pass over the stored paths counts the valid ones
// (one path per cycle) and forms 1/h in Q16.16 (truncated); a second pass
// streams the nodes of every valid path, one node per accepted cycle, with
// first/last markers per path and pair_last on the very last node. The
// search results are read through asynchronous read ports.
//
// This design's own choices: when no shortest path exists the hop filter
// has no baseline and accepts every historical path; when neither kind of
// path exists nothing is emitted and used_none is reported.
//
// Interface: pulse start; out_* is a valid/ready stream; done pulses one
// cycle after the last node is accepted (or after the count pass if
// nothing is emitted). used_hist/used_sp/used_none and h_valid describe
// the last decision.
module trajectory_select
  import kanon_pkg::*;
#(
  parameter int unsigned MAX_PATHS = 32,
  parameter int unsigned PATH_MEM  = 2048,
  localparam int unsigned PAW = $clog2(PATH_MEM),
  localparam int unsigned PIW = $clog2(MAX_PATHS),
  localparam int unsigned PCW = $clog2(MAX_PATHS + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           hop_filter_en,
  input  logic [7:0]     delta_h,
  output logic           busy,
  output logic           done,
  // history search results
  input  logic [PCW-1:0] hs_num_paths,
  output logic [PIW-1:0] hs_path_sel,
  input  logic [PAW-1:0] hs_path_base,
  input  logic [7:0]     hs_path_hops,
  output logic [PAW-1:0] hs_node_addr,
  input  node_t          hs_node_data,
  // shortest path results
  input  logic           sp_found,
  input  logic [7:0]     sp_hops,
  output logic [7:0]     sp_path_idx,
  input  node_t          sp_path_node,
  // selected path nodes
  output logic           out_valid,
  input  logic           out_ready,
  output path_node_t     out_node,
  // decision
  output logic           used_hist,
  output logic           used_sp,
  output logic           used_none,
  output logic [PCW-1:0] h_valid
);

  typedef enum logic [2:0] {S_IDLE, S_COUNT, S_HFIND, S_HEMIT, S_SPEMIT, S_DONE} state_t;
  state_t state;

  logic [PCW-1:0] p;           // path being examined
  logic [PCW-1:0] emitted;     // valid paths already streamed
  logic [7:0]     i;           // node index within the path
  q16_t           weight;

  logic path_ok;
  always_comb begin
    path_ok = !hop_filter_en || !sp_found ||
              ({1'b0, hs_path_hops} <= {1'b0, sp_hops} + {1'b0, delta_h});
  end

  assign hs_path_sel  = PIW'(p);
  assign hs_node_addr = hs_path_base + PAW'(i);
  assign sp_path_idx  = i;
  assign busy         = (state != S_IDLE);

  always_comb begin
    out_valid = 1'b0;
    out_node  = '0;
    out_node.weight = weight;
    if (state == S_HEMIT) begin
      out_valid           = 1'b1;
      out_node.node       = hs_node_data;
      out_node.path_first = (i == 8'd0);
      out_node.path_last  = (i == hs_path_hops);
      out_node.pair_last  = (i == hs_path_hops) && (emitted + 1'b1 == h_valid);
    end else if (state == S_SPEMIT) begin
      out_valid           = 1'b1;
      out_node.node       = sp_path_node;
      out_node.path_first = (i == 8'd0);
      out_node.path_last  = (i == sp_hops);
      out_node.pair_last  = (i == sp_hops);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      p         <= '0;
      emitted   <= '0;
      i         <= '0;
      weight    <= '0;
      done      <= 1'b0;
      used_hist <= 1'b0;
      used_sp   <= 1'b0;
      used_none <= 1'b0;
      h_valid   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          p         <= '0;
          h_valid   <= '0;
          used_hist <= 1'b0;
          used_sp   <= 1'b0;
          used_none <= 1'b0;
          state     <= S_COUNT;
        end
        S_COUNT: begin
          if (p < hs_num_paths) begin
            if (path_ok) h_valid <= h_valid + 1'b1;
            p <= p + 1'b1;
          end else begin
            p       <= '0;
            i       <= '0;
            emitted <= '0;
            if (h_valid != '0) begin
              weight    <= q16_recip(32'(h_valid));
              used_hist <= 1'b1;
              state     <= S_HFIND;
            end else if (sp_found) begin
              weight    <= Q16_ONE;
              used_sp   <= 1'b1;
              state     <= S_SPEMIT;
            end else begin
              used_none <= 1'b1;
              state     <= S_DONE;
            end
          end
        end
        S_HFIND: begin
          if (p >= hs_num_paths || emitted == h_valid) state <= S_DONE;
          else if (path_ok) begin
            i     <= '0;
            state <= S_HEMIT;
          end else p <= p + 1'b1;
        end
        S_HEMIT: if (out_ready) begin
          if (i == hs_path_hops) begin
            emitted <= emitted + 1'b1;
            p       <= p + 1'b1;
            state   <= S_HFIND;
          end else i <= i + 1'b1;
        end
        S_SPEMIT: if (out_ready) begin
          if (i == sp_hops) state <= S_DONE;
          else i <= i + 1'b1;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a node offered on the output stream stays until it is taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_node);
  endproperty
  assert property (p_hold);

endmodule
