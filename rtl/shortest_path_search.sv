// shortest_path_search: Dijkstra shortest path between a start and an end
// node of the road graph. Produces the node sequence of the path, its hop
// count (which sets the hop limit of the history search) and its length.
//
// How it works: the map graph is stored in compressed-sparse-row form,
// row_ptr[v] .. row_ptr[v+1]-1 indexing the adjacency entries (dst, len)
// leaving node v; both tables are loaded through write ports ("Map Data").
// A search first clears the per-node seen/settled flags (num_nodes cycles),
// then runs Dijkstra with an open list of at most OPEN_MAX (node, distance)
// entries: each step scans the list for the smallest distance (first one
// wins a tie), removes it, skips it if already settled, and otherwise
// settles it and relaxes its outgoing edges, one edge per cycle, appending
// improved neighbours to the list (stale duplicates are skipped later). The
// search stops as soon as the end node is settled; the path is then traced
// back through the prev[] table into a path buffer.
//
// The paper names Dijkstra's algorithm and the outputs (node sequence and
// hop count) but not the hardware behind it; the open-list organisation,
// the CSR map format and the buffer sizes are this design's own choices.
// An open-list overflow or a path longer than MAX_HOPS ends the search
// with found = 0 and sets overflow. The per-node tables use asynchronous
// reads (distributed RAM on an FPGA).
//
// Interface: pulse start with s, e and num_nodes; done pulses when the
// search ends. found, hops, path_len and the path read port (path_idx 0 is the
// start node, path_idx = hops the end node) stay valid until the next start.
module shortest_path_search
  import kanon_pkg::*;
#(
  parameter int unsigned NUM_NODES = 4500,
  parameter int unsigned ADJ_DEPTH = 10200,
  parameter int unsigned OPEN_MAX  = 256,
  parameter int unsigned MAX_HOPS  = 255,
  localparam int unsigned EAW = $clog2(ADJ_DEPTH + 1),
  localparam int unsigned OAW = $clog2(OPEN_MAX + 1),
  localparam int unsigned OIW = $clog2(OPEN_MAX),
  localparam int unsigned RIW = $clog2(NUM_NODES + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // map load ports
  input  logic           row_we,
  input  logic [15:0]    row_waddr,   // 0 .. NUM_NODES
  input  logic [EAW-1:0] row_wdata,
  input  logic           adj_we,
  input  logic [EAW-1:0] adj_waddr,
  input  adj_ent_t       adj_wdata,
  input  logic [15:0]    num_nodes,
  // search command
  input  logic           start,
  input  node_t          s,
  input  node_t          e,
  output logic           busy,
  output logic           done,
  // results
  output logic           found,
  output logic           overflow,
  output logic [7:0]     hops,
  output dist_t          path_len,
  input  logic [7:0]     path_idx,
  output node_t          path_node
);

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_SEED, S_POP, S_SCAN, S_TAKE, S_RELAX, S_BT} state_t;
  state_t state;

  // map
  logic [EAW-1:0] row_ptr [NUM_NODES + 1];
  adj_ent_t       adj     [ADJ_DEPTH];
  // per-node search state
  dist_t          ndist   [NUM_NODES];
  node_t          nprev   [NUM_NODES];
  logic           nseen   [NUM_NODES];
  logic           nvis    [NUM_NODES];
  // open list
  node_t          onode   [OPEN_MAX];
  dist_t          odist   [OPEN_MAX];
  logic [OAW-1:0] ocnt;
  // path buffer, end node first
  node_t          prev_path [MAX_HOPS + 1];

  always_ff @(posedge clk) begin
    if (row_we && (32'(row_waddr) <= NUM_NODES)) row_ptr[RIW'(row_waddr)] <= row_wdata;
    if (adj_we && (32'(adj_waddr) < ADJ_DEPTH)) adj[adj_waddr] <= adj_wdata;
  end

  node_t          r_s, r_e, u, cur;
  logic [15:0]    ci;
  logic [OAW-1:0] j;
  logic [OIW-1:0] bi;
  dist_t          bd, du;
  logic [EAW-1:0] eidx, eend;
  logic [8:0]     k;

  // relaxation of the current edge
  adj_ent_t ed;
  dist_t    nd;
  logic     improve;
  always_comb begin
    ed      = adj[eidx];
    nd      = du + dist_t'(ed.len);
    improve = !nvis[ed.dst] && (!nseen[ed.dst] || nd < ndist[ed.dst]);
  end

  assign busy      = (state != S_IDLE);
  assign path_node = prev_path[hops - path_idx];

  always_ff @(posedge clk) begin
    unique case (state)
      S_CLR: begin
        nseen[node_t'(ci)] <= 1'b0;
        nvis[node_t'(ci)]  <= 1'b0;
      end
      S_SEED: begin
        ndist[r_s] <= '0;
        nprev[r_s] <= r_s;
        nseen[r_s] <= 1'b1;
        onode[0]   <= r_s;
        odist[0]   <= '0;
      end
      S_TAKE: begin
        onode[bi] <= onode[OIW'(ocnt - 1'b1)];
        odist[bi] <= odist[OIW'(ocnt - 1'b1)];
        if (!nvis[onode[bi]]) nvis[onode[bi]] <= 1'b1;
      end
      S_RELAX: if (eidx < eend && improve) begin
        ndist[ed.dst] <= nd;
        nprev[ed.dst] <= u;
        nseen[ed.dst] <= 1'b1;
        if (32'(ocnt) < OPEN_MAX) begin
          onode[OIW'(ocnt)] <= ed.dst;
          odist[OIW'(ocnt)] <= nd;
        end
      end
      S_BT: if (32'(k) <= MAX_HOPS) prev_path[k[7:0]] <= cur;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      found    <= 1'b0;
      overflow <= 1'b0;
      hops     <= '0;
      path_len     <= '0;
      r_s      <= '0;
      r_e      <= '0;
      u        <= '0;
      cur      <= '0;
      ci       <= '0;
      j        <= '0;
      bi       <= '0;
      bd       <= '0;
      du       <= '0;
      eidx     <= '0;
      eend     <= '0;
      k        <= '0;
      ocnt     <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          r_s      <= s;
          r_e      <= e;
          ci       <= '0;
          found    <= 1'b0;
          overflow <= 1'b0;
          hops     <= '0;
          state    <= S_CLR;
        end
        S_CLR: begin
          ci <= ci + 16'd1;
          if (ci + 16'd1 >= num_nodes) state <= S_SEED;
        end
        S_SEED: begin
          ocnt  <= OAW'(1);
          state <= S_POP;
        end
        S_POP: begin
          if (ocnt == '0) begin
            done  <= 1'b1;        // end node unreachable
            state <= S_IDLE;
          end else begin
            bi    <= '0;
            bd    <= odist[0];
            j     <= OAW'(1);
            state <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (j < ocnt) begin
            if (odist[OIW'(j)] < bd) begin
              bi <= OIW'(j);
              bd <= odist[OIW'(j)];
            end
            j <= j + 1'b1;
          end else begin
            state <= S_TAKE;
          end
        end
        S_TAKE: begin
          ocnt <= ocnt - 1'b1;
          u    <= onode[bi];
          du   <= bd;
          if (nvis[onode[bi]]) begin
            state <= S_POP;       // stale duplicate
          end else if (onode[bi] == r_e) begin
            path_len  <= bd;
            cur   <= r_e;
            k     <= '0;
            state <= S_BT;
          end else begin
            eidx  <= row_ptr[RIW'(onode[bi])];
            eend  <= row_ptr[RIW'(32'(onode[bi]) + 1)];
            state <= S_RELAX;
          end
        end
        S_RELAX: begin
          if (eidx < eend) begin
            eidx <= eidx + 1'b1;
            if (improve) begin
              if (32'(ocnt) < OPEN_MAX) begin
                ocnt <= ocnt + 1'b1;
              end else begin
                overflow <= 1'b1;
                done     <= 1'b1;
                state    <= S_IDLE;
              end
            end
          end else begin
            state <= S_POP;
          end
        end
        S_BT: begin
          if (32'(k) > MAX_HOPS) begin
            overflow <= 1'b1;      // path longer than the buffer
            done     <= 1'b1;
            state    <= S_IDLE;
          end else if (cur == r_s) begin
            hops  <= k[7:0];
            found <= 1'b1;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            cur <= nprev[cur];
            k   <= k + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the open list never holds more than OPEN_MAX entries
  assert property (@(posedge clk) disable iff (!rst_n) 32'(ocnt) <= OPEN_MAX);

endmodule
