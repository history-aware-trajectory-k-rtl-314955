// tb_trajectory_search_engine: a small grid road map with random edge
// lengths and a history log of random walks by several users. Node pairs
// are taken partly from the history (so that historical hits exist) and
// partly at random. For each pair the emitted path-node stream is compared
// with the reference model (Dijkstra, the paper's history loop with
// maxHop = shortest hops + delta_h, the selection rule and 1/h weights).
// Pairs whose shortest path is not unique are not compared. Also checks
// that a pair takes at least hist_len cycles (the history scan dominates).
module tb_trajectory_search_engine;
  import kanon_pkg::*;
  import kanon_ref_pkg::*;
  localparam int unsigned NN = 64, AD = 256, HD = 600, MP = 32, PM = 2048;
  localparam int unsigned EAW = $clog2(AD + 1), HAW = $clog2(HD), HLW = $clog2(HD + 1);
  localparam int unsigned PCW = $clog2(MP + 1);
  localparam int GR = 8;   // 8 x 8 grid

  logic clk = 1'b0, rst_n = 1'b0;
  logic row_we, adj_we, hist_we;
  logic [15:0] row_waddr; logic [EAW-1:0] row_wdata, adj_waddr; adj_ent_t adj_wdata;
  logic [HAW-1:0] hist_waddr; hist_ent_t hist_wdata;
  logic [15:0] num_nodes; logic [HLW-1:0] hist_len; logic hop_filter_en; logic [7:0] delta_h;
  logic pair_valid, pair_ready; node_pair_t pair;
  logic out_valid, out_ready; path_node_t out_node;
  logic pair_done, used_hist, used_sp, used_none, sp_overflow;
  logic [PCW-1:0] h_valid; logic [15:0] hs_dropped;

  trajectory_search_engine #(.NUM_NODES(NN), .ADJ_DEPTH(AD), .HIST_DEPTH(HD),
                             .MAX_PATHS(MP), .PATH_MEM(PM)) dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) out_ready <= ($urandom_range(4) != 0);

  int checks = 0, failures = 0, n_hist = 0, n_sp = 0, n_skip = 0, n_filt_diff = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nb(int v);   // random grid neighbour
    int r = v / GR, c = v % GR;
    forever begin
      case ($urandom_range(3))
        0: if (r > 0) return v - GR;
        1: if (r < GR-1) return v + GR;
        2: if (c > 0) return v - 1;
        default: if (c < GR-1) return v + 1;
      endcase
    end
  endfunction

  initial begin
    int ptr;
    row_we = 0; adj_we = 0; hist_we = 0; row_waddr = '0; row_wdata = '0; adj_waddr = '0;
    adj_wdata = '0; hist_waddr = '0; hist_wdata = '0; pair_valid = 0; pair = '0;
    num_nodes = 16'(NN); hist_len = HLW'(HD); hop_filter_en = 1; delta_h = 8'd5;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // grid map, both directions, symmetric random lengths
    n_nodes = NN;
    clear_graph();
    for (int v = 0; v < NN; v++) begin
      int r, c;
      r = v / GR; c = v % GR;
      if (c < GR-1) begin int l; l = 1000 + $urandom_range(50000); add_edge(v, v+1, l); add_edge(v+1, v, l); end
      if (r < GR-1) begin int l; l = 1000 + $urandom_range(50000); add_edge(v, v+GR, l); add_edge(v+GR, v, l); end
    end
    ptr = 0;
    for (int v = 0; v < NN; v++) begin
      row_we = 1; row_waddr = 16'(v); row_wdata = EAW'(ptr); @(negedge clk); row_we = 0;
      foreach (adj_dst[v][k]) begin
        adj_we = 1; adj_waddr = EAW'(ptr);
        adj_wdata.dst = node_t'(adj_dst[v][k]); adj_wdata.len = wgt_t'(adj_len[v][k]);
        @(negedge clk); adj_we = 0; ptr++;
      end
    end
    row_we = 1; row_waddr = 16'(NN); row_wdata = EAW'(ptr); @(negedge clk); row_we = 0;
    // history: random walks, users change every 10..40 entries
    hist_node.delete(); hist_user.delete();
    begin
      int u, v, left;
      u = 0; v = $urandom_range(NN-1); left = 0;
      for (int i = 0; i < HD; i++) begin
        if (left == 0) begin u++; v = $urandom_range(NN-1); left = 10 + $urandom_range(30); end
        else v = nb(v);
        left--;
        hist_node.push_back(v); hist_user.push_back(u % 7);   // user IDs recur
        hist_we = 1; hist_waddr = HAW'(i); hist_wdata.node = node_t'(v); hist_wdata.user = user_t'(u % 7);
        @(negedge clk); hist_we = 0;
      end
    end
    for (int t = 0; t < 60; t++) begin
      int s, e, kind, cyc;
      longint w;
      int paths [$][$];
      path_node_t exp [$];
      exp.delete();
      if (t % 3 != 2) begin
        int i;
        i = $urandom_range(HD - 12);
        s = hist_node[i];
        e = hist_node[i + 2 + $urandom_range(8)];
        if (e == s) e = (s + 1) % NN;
      end else begin
        s = $urandom_range(NN-1);
        do e = $urandom_range(NN-1); while (e == s);
      end
      hop_filter_en = (t % 4 != 3);
      kind = select(s, e, hop_filter_en, 5, 255, paths, w);
      if (hop_filter_en) begin
        int p2 [$][$];
        history(s, e, 255, p2);
        if (p2.size() != paths.size()) n_filt_diff++;
      end
      foreach (paths[p]) foreach (paths[p][k]) begin
        path_node_t x;
        x.node = node_t'(paths[p][k]); x.weight = q16_t'(w);
        x.path_first = (k == 0); x.path_last = (k == paths[p].size() - 1);
        x.pair_last = x.path_last && (p == paths.size() - 1);
        exp.push_back(x);
      end
      pair.user = user_t'(t); pair.ns = node_t'(s); pair.ne = node_t'(e);
      pair_valid = 1;
      do @(posedge clk); while (!pair_ready);
      #1 pair_valid = 0;
      begin
        int got;
        got = 0; cyc = 0;
        while (!pair_done) begin
          @(posedge clk); cyc++;
          if (out_valid && out_ready) begin
            if (sp_unique && got < exp.size())
              check(out_node == exp[got], $sformatf("pair %0d node %0d: %p vs %p", t, got, out_node, exp[got]));
            got++;
          end
        end
        if (sp_unique) begin
          check(got == exp.size(), $sformatf("pair %0d: %0d nodes, expected %0d (kind %0d hs %0d sp %0d h %0d sphops %0d)", t, got, exp.size(), kind, used_hist, used_sp, h_valid, sp_hops));
          check(used_hist == (kind == 1) && used_sp == (kind == 2), $sformatf("pair %0d decision", t));
        end else n_skip++;
        check(cyc >= HD, $sformatf("pair %0d took %0d cycles", t, cyc));
      end
      if (kind == 1) n_hist++; else if (kind == 2) n_sp++;
      @(negedge clk);
    end
    check(n_hist > 5 && n_sp > 5, "both decisions exercised");
    check(n_filt_diff > 0, "hop filter removed a path at least once");
    $display("hist=%0d sp=%0d skipped=%0d filter_effective=%0d", n_hist, n_sp, n_skip, n_filt_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
