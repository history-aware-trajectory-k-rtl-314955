// node_search_engine: node approximation. Each incoming location record
// (user, latitude, longitude) is mapped to the nearest intersection of the
// digital map, turning raw positions into node IDs.
//
// How it works: the node coordinates sit in a block RAM (the "Map Data" of
// the architecture figure), loaded through the node_we write port. For each
// record the engine reads node 0 .. num_nodes-1, one per cycle, computes
// the squared Euclidean distance dlat^2 + dlon^2 in full precision and
// keeps the first node with the smallest distance.
//
// The paper states only the function ("mapped to its nearest
// representative node"); its predecessor used hash tables, which are not
// described. The exhaustive scan is this design's own, simplest choice.
//
// Interface: valid/ready on both sides. in_ready is high only when idle.
// Timing: out_valid rises num_nodes + 1 cycles after the accepting clock edge; the result is
// held until out_ready.
module node_search_engine
  import kanon_pkg::*;
#(
  parameter int unsigned NUM_NODES = 4500
) (
  input  logic         clk,
  input  logic         rst_n,
  // map load port
  input  logic         node_we,
  input  node_t        node_waddr,
  input  coord_t       node_wlat,
  input  coord_t       node_wlon,
  input  logic [15:0]  num_nodes,   // nodes in use, 1 .. NUM_NODES
  // location records in
  input  logic         in_valid,
  output logic         in_ready,
  input  loc_rec_t     in_rec,
  // nearest node out
  output logic         out_valid,
  input  logic         out_ready,
  output user_t        out_user,
  output node_t        out_node
);

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_OUT} state_t;
  state_t state;

  localparam int unsigned AW = $clog2(NUM_NODES);
  localparam int unsigned D_W = 2*COORD_W + 2;

  loc_rec_t       rec;
  logic [15:0]    raddr;
  logic           rd_pend;     // a read was issued last cycle
  node_t          rd_idx;      // index of the data now on rdata
  logic           last_pend;   // it is the final node
  logic [63:0]    rdata;
  logic [D_W-1:0] best_d;
  node_t          best_n;
  logic           have_best;

  sdp_ram #(.DEPTH(NUM_NODES), .WIDTH(64)) u_nodes (
    .clk   (clk),
    .we    (node_we),
    .waddr (AW'(node_waddr)),
    .wdata ({node_wlat, node_wlon}),
    .re    (state == S_SCAN && !last_pend),
    .raddr (AW'(raddr)),
    .rdata (rdata)
  );

  // distance of the node on rdata to the current record
  logic signed [COORD_W:0] dlat, dlon;
  logic signed [D_W-1:0] wlat, wlon;
  logic [D_W-1:0] d;
  always_comb begin
    dlat = {rec.lat[COORD_W-1], rec.lat} - {rdata[63], rdata[63:32]};
    dlon = {rec.lon[COORD_W-1], rec.lon} - {rdata[31], rdata[31:0]};
    wlat = D_W'(dlat);
    wlon = D_W'(dlon);
    d    = unsigned'(wlat * wlat) + unsigned'(wlon * wlon);
  end

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_OUT);
  assign out_user  = rec.user;
  assign out_node  = best_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      rec       <= '0;
      raddr     <= '0;
      rd_pend   <= 1'b0;
      rd_idx    <= '0;
      last_pend <= 1'b0;
      best_d    <= '0;
      best_n    <= '0;
      have_best <= 1'b0;
    end else begin
      rd_pend <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          rec       <= in_rec;
          raddr     <= '0;
          have_best <= 1'b0;
          state     <= S_SCAN;
        end
        S_SCAN: begin
          // issue a read each cycle until the last node is requested
          if (!last_pend) begin
            rd_pend   <= 1'b1;
            rd_idx    <= node_t'(raddr);
            last_pend <= (raddr + 16'd1 >= num_nodes);
            raddr     <= raddr + 16'd1;
          end
          if (rd_pend) begin
            if (!have_best || d < best_d) begin
              best_d    <= d;
              best_n    <= rd_idx;
              have_best <= 1'b1;
            end
            if (last_pend) begin
              last_pend <= 1'b0;
              state     <= S_OUT;
            end
          end
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
