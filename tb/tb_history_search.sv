// tb_history_search: random history logs over a small node alphabet (so
// that start/end matches, user changes, loops back to the start node and
// hop-limit cut-offs all happen often) are scanned by the DUT and by a
// direct transcription of the paper's nested-loop algorithm in the
// testbench. Checks the hit count, every stored path node by node, the
// dropped-hit count when the small result buffer overflows, and the
// deterministic scan time of hist_len + 2 cycles from start to done.
module tb_history_search;
  import kanon_pkg::*;
  localparam int unsigned HD = 400, MP = 6, PM = 48;
  localparam int unsigned HAW = $clog2(HD), HLW = $clog2(HD+1);
  localparam int unsigned PAW = $clog2(PM), PIW = $clog2(MP), PCW = $clog2(MP+1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic hist_we; logic [HAW-1:0] hist_waddr; hist_ent_t hist_wdata;
  logic start, busy, done;
  node_t ns, ne; logic [7:0] max_hop; logic [HLW-1:0] hist_len;
  logic [PCW-1:0] num_paths; logic [15:0] num_dropped;
  logic [PIW-1:0] path_sel; logic [PAW-1:0] path_base; logic [7:0] path_hops;
  logic [PAW-1:0] node_addr; node_t node_data;

  history_search #(.HIST_DEPTH(HD), .MAX_PATHS(MP), .PATH_MEM(PM)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int hn [HD]; int hu [HD];
  // reference results
  int ref_paths [$][$];
  int ref_dropped;
  int n_overflow_cases = 0, n_hits = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Algorithm 1 with the storage limits of the result buffer
  task automatic reference(input int s, input int e, input int mh, input int len);
    int base = 0;
    ref_paths.delete();
    ref_dropped = 0;
    for (int i = 0; i < len; i++) begin
      if (hn[i] == s) begin
        int cur [$];
        int cu = hu[i], c = 0;
        cur.push_back(s);
        for (int j = i + 1; j < len; j++) begin
          if (hu[j] != cu || hn[j] == s || c >= mh) break;
          c++;
          cur.push_back(hn[j]);
          if (hn[j] == e) begin
            if (ref_paths.size() < MP && base + c < PM) begin
              ref_paths.push_back(cur);
              base += c + 1;
            end else ref_dropped++;
            break;
          end
        end
      end
    end
  endtask

  initial begin
    hist_we = 0; hist_waddr = '0; hist_wdata = '0; start = 0;
    ns = '0; ne = '0; max_hop = '0; hist_len = '0; path_sel = '0; node_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int len, alpha, u, lat, s, e, mh;
      // build a log: runs of one user walking over an alphabet of nodes
      alpha = (t < 20) ? 6 : 12;
      len = (t == 0) ? 1 : (t < 5 ? 20 : HD - $urandom_range(50));
      u = 0;
      for (int i = 0; i < HD; i++) begin
        if ($urandom_range(7) == 0) u = $urandom_range(5);
        hn[i] = $urandom_range(alpha - 1);
        hu[i] = u;
        hist_we = 1; hist_waddr = HAW'(i);
        hist_wdata.node = node_t'(hn[i]); hist_wdata.user = user_t'(u);
        @(negedge clk);
      end
      hist_we = 0;
      for (int q = 0; q < 4; q++) begin
        s = $urandom_range(alpha - 1);
        do e = $urandom_range(alpha - 1); while (e == s);
        mh = (q == 3) ? 255 : $urandom_range(8);
        reference(s, e, mh, len);
        ns = node_t'(s); ne = node_t'(e); max_hop = 8'(mh); hist_len = HLW'(len);
        start = 1;
        @(posedge clk); #1 start = 0;
        lat = 1;
        while (!done) begin @(posedge clk); #1 lat++; end
        check(lat == len + 2, $sformatf("scan time %0d for %0d entries", lat, len));
        check(int'(num_paths) == ref_paths.size(),
              $sformatf("hits %0d expected %0d (t=%0d q=%0d)", num_paths, ref_paths.size(), t, q));
        check(int'(num_dropped) == ref_dropped, $sformatf("dropped %0d expected %0d", num_dropped, ref_dropped));
        if (ref_dropped > 0) n_overflow_cases++;
        n_hits += ref_paths.size();
        for (int p = 0; p < ref_paths.size() && p < int'(num_paths); p++) begin
          path_sel = PIW'(p);
          #1;
          check(int'(path_hops) == ref_paths[p].size() - 1, $sformatf("path %0d hops", p));
          for (int k = 0; k < ref_paths[p].size(); k++) begin
            node_addr = PAW'(int'(path_base) + k);
            #1;
            check(int'(node_data) == ref_paths[p][k], $sformatf("path %0d node %0d", p, k));
          end
        end
        @(negedge clk);
      end
    end
    check(n_overflow_cases > 0, "buffer overflow case exercised");
    check(n_hits > 50, "enough hits exercised");
    $display("hits=%0d overflow_cases=%0d", n_hits, n_overflow_cases);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
