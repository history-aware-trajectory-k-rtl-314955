// history_search: history-based trajectory search (Algorithm 1 of the
// method). The history database is one time-ordered log of (node, user)
// entries in block RAM ("History Data"). For a start node ns and an end
// node ne the whole log is scanned once, one entry per clock cycle.
//
// A small state machine follows the scan. When an entry visits ns it
// starts tracking: it latches that entry's user and appends the following
// nodes of the same user to a temporary path. Tracking stops when the user
// changes, when the log returns to ns (the entry is then examined again as
// a new start, as the algorithm's outer loop would) or when the path
// already holds max_hop hops. Reaching ne within these limits makes the
// path a hit: it is kept in the path buffer and the hit counter rises.
// This follows the paper's algorithm and its single linear BRAM access;
// the run time is hist_len + 2 cycles whatever the contents.
//
// Storage of the hits is this design's own: a flat node buffer of
// PATH_MEM entries plus a table of (base, hops) for up to MAX_PATHS paths.
// A hit that does not fit is counted in num_dropped and not stored.
//
// Interface: load entries through hist_we; pulse start with ns, ne,
// max_hop and hist_len; done pulses when the scan is complete. Results
// (num_paths, num_dropped, the path table and the node buffer, read
// asynchronously) stay valid until the next start.
module history_search
  import kanon_pkg::*;
#(
  parameter int unsigned HIST_DEPTH = 100000,
  parameter int unsigned MAX_PATHS  = 32,
  parameter int unsigned PATH_MEM   = 2048,
  localparam int unsigned HAW = $clog2(HIST_DEPTH),
  localparam int unsigned HLW = $clog2(HIST_DEPTH + 1),
  localparam int unsigned PAW = $clog2(PATH_MEM),
  localparam int unsigned PIW = $clog2(MAX_PATHS),
  localparam int unsigned PCW = $clog2(MAX_PATHS + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // history load port
  input  logic           hist_we,
  input  logic [HAW-1:0] hist_waddr,
  input  hist_ent_t      hist_wdata,
  // search command
  input  logic           start,
  input  node_t          ns,
  input  node_t          ne,
  input  logic [7:0]     max_hop,
  input  logic [HLW-1:0] hist_len,
  output logic           busy,
  output logic           done,
  // results
  output logic [PCW-1:0] num_paths,
  output logic [15:0]    num_dropped,
  input  logic [PIW-1:0] path_sel,
  output logic [PAW-1:0] path_base,
  output logic [7:0]     path_hops,
  input  logic [PAW-1:0] node_addr,
  output node_t          node_data
);

  // ---------------- history BRAM and linear scan ----------------
  logic [HLW-1:0] scan_addr;
  logic           scanning;
  logic           ent_valid, ent_last;
  hist_ent_t      ent;
  logic           issue;

  assign issue = scanning && (scan_addr < hist_len);

  sdp_ram #(.DEPTH(HIST_DEPTH), .WIDTH($bits(hist_ent_t))) u_hist (
    .clk   (clk),
    .we    (hist_we),
    .waddr (hist_waddr),
    .wdata (hist_wdata),
    .re    (issue),
    .raddr (HAW'(scan_addr)),
    .rdata (ent)
  );

  // ---------------- result storage ----------------
  node_t          pnode [PATH_MEM];
  logic [PAW-1:0] ptab_base [MAX_PATHS];
  logic [7:0]     ptab_hops [MAX_PATHS];

  assign path_base = ptab_base[path_sel];
  assign path_hops = ptab_hops[path_sel];
  assign node_data = pnode[node_addr];

  // ---------------- tracking state machine ----------------
  node_t          r_ns, r_ne;
  logic [7:0]     r_max;
  logic           tracking, nospace;
  user_t          cur_user;
  logic [7:0]     hops;
  logic [PAW:0]   base;          // first free slot of the node buffer

  // combinational evaluation of the entry on the BRAM output
  logic           brk, cont, hit, newstart;
  logic [7:0]     hops_n;
  logic [PAW:0]   app_pos;
  always_comb begin
    brk      = tracking && ((ent.user != cur_user) || (ent.node == r_ns) || (hops >= r_max));
    cont     = tracking && !brk;
    hops_n   = hops + 8'd1;
    app_pos  = base + (PAW+1)'(hops_n);
    hit      = cont && (ent.node == r_ne);
    newstart = (!tracking || brk) && (ent.node == r_ns);
  end

  logic wr_en;
  logic [PAW-1:0] wr_pos;
  always_comb begin
    wr_en  = 1'b0;
    wr_pos = '0;
    if (ent_valid && cont && !nospace && (app_pos < (PAW+1)'(PATH_MEM))) begin
      wr_en = 1'b1; wr_pos = PAW'(app_pos);
    end else if (ent_valid && newstart && (base < (PAW+1)'(PATH_MEM))) begin
      wr_en = 1'b1; wr_pos = PAW'(base);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) pnode[wr_pos] <= ent.node;
  end

  logic commit;
  assign commit = ent_valid && hit && !nospace && (app_pos < (PAW+1)'(PATH_MEM))
                  && (num_paths < PCW'(MAX_PATHS));

  always_ff @(posedge clk) begin
    if (commit) begin
      ptab_base[PIW'(num_paths)] <= PAW'(base);
      ptab_hops[PIW'(num_paths)] <= hops_n;
    end
  end

  assign busy = scanning || ent_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scan_addr   <= '0;
      scanning    <= 1'b0;
      ent_valid   <= 1'b0;
      ent_last    <= 1'b0;
      done        <= 1'b0;
      r_ns        <= '0;
      r_ne        <= '0;
      r_max       <= '0;
      tracking    <= 1'b0;
      nospace     <= 1'b0;
      cur_user    <= '0;
      hops        <= '0;
      base        <= '0;
      num_paths   <= '0;
      num_dropped <= '0;
    end else begin
      done      <= 1'b0;
      ent_valid <= issue;
      ent_last  <= issue && (scan_addr + 1'b1 >= hist_len);
      if (start && !busy) begin
        r_ns        <= ns;
        r_ne        <= ne;
        r_max       <= max_hop;
        scan_addr   <= '0;
        scanning    <= 1'b1;
        tracking    <= 1'b0;
        base        <= '0;
        num_paths   <= '0;
        num_dropped <= '0;
        if (hist_len == '0) begin
          scanning <= 1'b0;
          done     <= 1'b1;
        end
      end else if (issue) begin
        scan_addr <= scan_addr + 1'b1;
        if (scan_addr + 1'b1 >= hist_len) scanning <= 1'b0;
      end

      if (ent_valid) begin
        if (cont) begin
          hops <= hops_n;
          if (app_pos >= (PAW+1)'(PATH_MEM)) nospace <= 1'b1;
          if (hit) begin
            tracking <= 1'b0;
            if (commit) begin
              num_paths <= num_paths + 1'b1;
              base      <= app_pos + 1'b1;
            end else begin
              num_dropped <= num_dropped + 16'd1;
            end
          end
        end else if (newstart) begin
          tracking <= 1'b1;
          cur_user <= ent.user;
          hops     <= '0;
          nospace  <= (base >= (PAW+1)'(PATH_MEM));
        end else if (brk) begin
          tracking <= 1'b0;
        end
        if (ent_last) begin
          done     <= 1'b1;
          tracking <= 1'b0;    // a path still open at the end of the log is no hit
        end
      end
    end
  end

  // tracking never holds more hops than the limit allows
  assert property (@(posedge clk) disable iff (!rst_n) tracking |-> hops <= r_max);

endmodule
