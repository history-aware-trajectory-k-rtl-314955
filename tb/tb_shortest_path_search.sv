// tb_shortest_path_search: random directed road graphs in CSR form; every
// search is checked against a reference Dijkstra (plain O(V^2)) in the
// testbench: reachability, path length, and that the returned node
// sequence starts at s, ends at e, follows existing edges and adds up to
// the reported length. A second instance with a tiny open list must
// report overflow on some searches and otherwise agree with the reference.
module tb_shortest_path_search;
  import kanon_pkg::*;
  localparam int unsigned NN = 40, AD = 200;
  localparam int unsigned EAW = $clog2(AD + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic row_we, adj_we; logic [15:0] row_waddr; logic [EAW-1:0] row_wdata, adj_waddr;
  adj_ent_t adj_wdata; logic [15:0] num_nodes;
  logic start; node_t s, e;
  logic busy, done, found, overflow; logic [7:0] hops; dist_t path_len;
  logic [7:0] path_idx; node_t path_node;
  logic busy2, done2, found2, overflow2; logic [7:0] hops2; dist_t path_len2; node_t path_node2;

  shortest_path_search #(.NUM_NODES(NN), .ADJ_DEPTH(AD)) dut (.*);
  shortest_path_search #(.NUM_NODES(NN), .ADJ_DEPTH(AD), .OPEN_MAX(3)) dut_small (
    .clk, .rst_n, .row_we, .row_waddr, .row_wdata, .adj_we, .adj_waddr, .adj_wdata,
    .num_nodes, .start, .s, .e, .busy(busy2), .done(done2), .found(found2),
    .overflow(overflow2), .hops(hops2), .path_len(path_len2), .path_idx, .path_node(path_node2));
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int w [NN][NN];        // edge length, 0 = no edge
  int rdist [NN];
  int n_unreach = 0, n_small_ovf = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void ref_dijkstra(int src, int n);
    bit vis [NN];
    for (int i = 0; i < n; i++) begin rdist[i] = -1; vis[i] = 0; end
    rdist[src] = 0;
    for (int it = 0; it < n; it++) begin
      int b = -1;
      for (int i = 0; i < n; i++)
        if (!vis[i] && rdist[i] >= 0 && (b < 0 || rdist[i] < rdist[b])) b = i;
      if (b < 0) break;
      vis[b] = 1;
      for (int v = 0; v < n; v++)
        if (w[b][v] > 0 && (rdist[v] < 0 || rdist[b] + w[b][v] < rdist[v])) rdist[v] = rdist[b] + w[b][v];
    end
  endfunction

  task automatic run_search(input int a, input int b, input int n);
    int sum;
    s = node_t'(a); e = node_t'(b);
    start = 1; @(posedge clk); #1 start = 0;
    fork
      while (!done) @(posedge clk);
      while (!done2) @(posedge clk);
    join
    #1;
    check(found == (rdist[b] >= 0), $sformatf("found %0d for %0d->%0d", found, a, b));
    check(!overflow, "no overflow with the full open list");
    if (rdist[b] < 0) n_unreach++;
    if (found && rdist[b] >= 0) begin
      check(int'(path_len) == rdist[b], $sformatf("path_len %0d expected %0d", path_len, rdist[b]));
      sum = 0;
      path_idx = 0; #1;
      check(int'(path_node) == a, "path starts at s");
      for (int i = 1; i <= int'(hops); i++) begin
        int pa = int'(path_node);
        path_idx = 8'(i); #1;
        check(w[pa][int'(path_node)] > 0, $sformatf("edge %0d->%0d exists", pa, path_node));
        sum += w[pa][int'(path_node)];
      end
      check(int'(path_node) == b, "path ends at e");
      check(sum == rdist[b], "path length adds up");
    end
    if (overflow2) n_small_ovf++;
    else begin
      check(found2 == (rdist[b] >= 0), "small instance reachability");
      if (found2) check(int'(path_len2) == rdist[b], "small instance distance");
    end
  endtask

  initial begin
    row_we = 0; adj_we = 0; row_waddr = '0; row_wdata = '0; adj_waddr = '0; adj_wdata = '0;
    start = 0; s = '0; e = '0; path_idx = '0; num_nodes = 16'(NN);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 12; g++) begin
      int n, ptr;
      n = (g < 10) ? NN : 12;
      num_nodes = 16'(n);
      // random graph: a ring-like backbone plus random chords, sparse enough for AD
      for (int i = 0; i < NN; i++) for (int j = 0; j < NN; j++) w[i][j] = 0;
      for (int i = 0; i < n; i++) begin
        if (g % 3 != 2 || i != n/2) w[i][(i+1)%n] = 1 + $urandom_range(999);
        for (int c = 0; c < 3; c++) begin
          int j;
          j = $urandom_range(n-1);
          if (j != i) w[i][j] = 1 + $urandom_range(999);
        end
      end
      if (g == 11) for (int i = 0; i < n; i++) w[i][n-1] = 0;   // node n-1 unreachable
      ptr = 0;
      for (int i = 0; i < n; i++) begin
        row_we = 1; row_waddr = 16'(i); row_wdata = EAW'(ptr);
        @(negedge clk); row_we = 0;
        for (int j = 0; j < n; j++) if (w[i][j] > 0) begin
          adj_we = 1; adj_waddr = EAW'(ptr); adj_wdata.dst = node_t'(j); adj_wdata.len = wgt_t'(w[i][j]);
          @(negedge clk); adj_we = 0; ptr++;
        end
      end
      row_we = 1; row_waddr = 16'(n); row_wdata = EAW'(ptr);
      @(negedge clk); row_we = 0;
      for (int q = 0; q < 15; q++) begin
        int a, b;
        a = $urandom_range(n-1);
        b = (q == 0) ? a : (q == 1 ? n - 1 : $urandom_range(n-1));
        ref_dijkstra(a, n);
        run_search(a, b, n);
        @(negedge clk);
      end
    end
    check(n_small_ovf > 0, "open-list overflow exercised");
    check(n_unreach > 0, "unreachable end node exercised");
    $display("unreachable=%0d small_overflow=%0d", n_unreach, n_small_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
