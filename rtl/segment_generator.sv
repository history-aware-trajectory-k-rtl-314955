// segment_generator: decomposes the selected trajectories into segments.
// A segment is the smallest unit of a trajectory: two neighbouring nodes
// of a path. Every path of n + 1 nodes yields n segments, each carrying the
// weight of its path (1 for a shortest path, 1/h for each of h
// historical paths).
//
// How it works: the generator remembers the previous node of the current
// path; each later node of the same path forms the segment (previous,
// current). A path's first node produces no segment. The two node IDs are
// put in ascending order, so a road stretch is counted the same whichever
// way it was travelled; treating segments as undirected is this design's
// own reading (the paper defines a segment only as two neighbouring nodes).
// pair_last is passed on with the segment made from the pair's last node.
//
// Interface: valid/ready node stream in, valid/ready segment stream out,
// one output register. in_ready is high when the register is empty or is
// being emptied, so the generator sustains one node per cycle.
module segment_generator
  import kanon_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  path_node_t in_node,
  output logic       out_valid,
  input  logic       out_ready,
  output seg_t       out_seg
);

  node_t prev;
  logic  have_prev;
  logic  take, emit;

  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;
  assign emit     = take && !in_node.path_first && have_prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev      <= '0;
      have_prev <= 1'b0;
      out_valid <= 1'b0;
      out_seg   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        prev      <= in_node.node;
        have_prev <= !in_node.path_last;
        if (emit) begin
          out_valid         <= 1'b1;
          out_seg.a         <= (prev <= in_node.node) ? prev : in_node.node;
          out_seg.b         <= (prev <= in_node.node) ? in_node.node : prev;
          out_seg.weight    <= in_node.weight;
          out_seg.pair_last <= in_node.pair_last;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_seg));

endmodule
