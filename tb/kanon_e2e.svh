// kanon_e2e.svh: body of the end-to-end testbenches (stimulus, reference
// run, checks), shared by the reduced-size and the full-size test. The
// including module declares the DUT signals, the sizes R, C, NN, NH, NREC,
// XCROSS, WATCHDOG, REQUIRE_ALL (every mechanism must occur) and instantiates kanon_top as dut.

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int ISO;                                    // node without roads
  int rec_node [$], rec_user [$];
  // mechanism counters
  int m_hist = 0, m_multi = 0, m_sp = 0, m_none = 0, m_filter = 0, m_stay = 0, m_newuser = 0;
  int m_suppressed = 0, m_published = 0, m_backpressure = 0, m_ambiguous = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd_nb(int v);
    return adj_dst[v][$urandom_range(adj_dst[v].size() - 1)];
  endfunction

  task automatic build_map();
    int ptr;
    bit has_cross [];
    has_cross = new [C];
    n_nodes = NN;
    ISO = NN - 1;
    clear_graph();
    for (int c = 0; c < C; c++) has_cross[c] = (c == 0);
    for (int x = 0; x < XCROSS; x++) has_cross[1 + $urandom_range(C - 3)] = 1;
    for (int v = 0; v < NN; v++) begin
      int r, c, l;
      r = v / C; c = v % C;
      if (c < C - 1 && v + 1 != ISO) begin
        l = 1000 + $urandom_range(50000); add_edge(v, v + 1, l); add_edge(v + 1, v, l);
      end
      if (r < R - 1 && has_cross[c] && v + C != ISO) begin
        l = 1000 + $urandom_range(50000); add_edge(v, v + C, l); add_edge(v + C, v, l);
      end
    end
    ptr = 0;
    for (int v = 0; v < NN; v++) begin
      node_we = 1; node_waddr = node_t'(v);
      node_lat[v] = 356000000 + (v / C) * 1000; node_lon[v] = 1396000000 + (v % C) * 1000;
      node_wlat = coord_t'(node_lat[v]); node_wlon = coord_t'(node_lon[v]);
      row_we = 1; row_waddr = 16'(v); row_wdata = EAW'(ptr);
      @(negedge clk); node_we = 0; row_we = 0;
      for (int j = 0; j < adj_dst[v].size(); j++) begin
        adj_we = 1; adj_waddr = EAW'(ptr);
        adj_wdata.dst = node_t'(adj_dst[v][j]); adj_wdata.len = wgt_t'(adj_len[v][j]);
        @(negedge clk); adj_we = 0; ptr++;
      end
    end
    row_we = 1; row_waddr = 16'(NN); row_wdata = EAW'(ptr);
    @(negedge clk); row_we = 0;
    $display("map: %0d nodes, %0d adjacency entries", NN, ptr);
  endtask

  task automatic build_history();
    int u, v, left;
    hist_node.delete(); hist_user.delete();
    u = 0; v = 0; left = 0;
    for (int i = 0; i < NH; i++) begin
      if (left == 0) begin
        u++; left = 10 + $urandom_range(30);
        do v = $urandom_range(NN - 1); while (v == ISO);
      end else v = rnd_nb(v);
      left--;
      hist_node.push_back(v); hist_user.push_back(u % 50);
      hist_we = 1; hist_waddr = HAW'(i);
      hist_wdata.node = node_t'(v); hist_wdata.user = user_t'(u % 50);
      @(negedge clk); hist_we = 0;
    end
  endtask

  // the node sequence of the location records, grouped by user
  task automatic build_records();
    int u;
    u = 1000;
    while (rec_node.size() < NREC) begin
      int style, n, v;
      u++;
      style = $urandom_range(2);
      n = 2 + $urandom_range(5);
      if (style == 0) begin                   // retrace a history walk
        int i;
        i = $urandom_range(NH - 20);
        v = hist_node[i];
        for (int q = 0; q < n; q++) begin
          rec_node.push_back(v); rec_user.push_back(u);
          i += 1 + $urandom_range(3);
          if (hist_user[i] != hist_user[i - 1]) break;
          v = hist_node[i];
        end
      end else begin                          // wander, sometimes stay
        do v = $urandom_range(NN - 1); while (v == ISO);
        for (int q = 0; q < n; q++) begin
          rec_node.push_back(v); rec_user.push_back(u);
          if ($urandom_range(4) != 0) repeat (1 + $urandom_range(3)) v = rnd_nb(v);
        end
      end
      if (u == 1003) begin rec_node.push_back(ISO); rec_user.push_back(u); end
    end
  endtask

  // run the reference over the records
  task automatic reference_run(output int e_pairs, output int e_hist, output int e_sp,
                               output int e_none, output int e_stay, output int e_new);
    e_pairs = 0; e_hist = 0; e_sp = 0; e_none = 0; e_stay = 0; e_new = 0;
    seg_count.delete();
    for (int r = 0; r < rec_node.size(); r++) begin
      if (r > 0 && rec_user[r] == rec_user[r - 1]) begin
        if (rec_node[r] == rec_node[r - 1]) e_stay++;
        else begin
          int paths [$][$], kind, p2 [$][$];
          longint w;
          e_pairs++;
          kind = select(rec_node[r - 1], rec_node[r], 1'b1, 5, 255, paths, w);
          if (sp_found && !sp_unique) m_ambiguous++;
          if (kind == 1) begin
            e_hist++;
            if (paths.size() > 1) m_multi++;
          end else if (kind == 2) e_sp++;
          else e_none++;
          history(rec_node[r - 1], rec_node[r], 255, p2);
          if (p2.size() != paths.size() && kind != 0) m_filter++;
          count_paths(paths, w);
        end
      end else e_new++;
    end
  endtask

  task automatic run_publish(input int kk);
    int npub, nexp;
    longint seen [longint];
    k = 16'(kk);
    @(negedge clk);
    publish = 1; @(negedge clk); publish = 0;
    npub = 0;
    while (!pub_done) begin
      pub_ready = ($urandom_range(3) != 0);
      @(posedge clk);
      if (pub_valid && !pub_ready) m_backpressure++;
      if (pub_valid && pub_ready) begin
        longint key;
        key = longint'(pub_seg.a) * 65536 + pub_seg.b;
        npub++;
        check(seg_count.exists(key) && seg_count[key] == longint'(pub_seg.count)
              && seg_count[key] >= longint'(kk) * 65536,
              $sformatf("k=%0d published (%0d,%0d) count %h", kk, pub_seg.a, pub_seg.b, pub_seg.count));
        check(!seen.exists(key), "published once");
        seen[key] = 1;
      end
      #1;
    end
    nexp = 0;
    foreach (seg_count[key]) if (seg_count[key] >= longint'(kk) * 65536) nexp++;
    check(npub == nexp, $sformatf("k=%0d: %0d segments published, expected %0d", kk, npub, nexp));
    m_published += npub;
    m_suppressed += seg_count.size() - nexp;
    $display("k=%0d: %0d of %0d segments published", kk, npub, seg_count.size());
    @(negedge clk);
  endtask

  initial begin
    int e_pairs, e_hist, e_sp, e_none, e_stay, e_new;
    longint t0, t1;
    node_we = 0; node_waddr = '0; node_wlat = '0; node_wlon = '0;
    row_we = 0; row_waddr = '0; row_wdata = '0; adj_we = 0; adj_waddr = '0; adj_wdata = '0;
    hist_we = 0; hist_waddr = '0; hist_wdata = '0;
    num_nodes = 16'(NN); hist_len = HLW'(NH); hop_filter_en = 1; delta_h = 8'd5; k = 16'd1;
    loc_valid = 0; loc = '0; clear = 0; publish = 0; pub_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    build_map();
    build_history();
    build_records();
    reference_run(e_pairs, e_hist, e_sp, e_none, e_stay, e_new);
    $display("records=%0d pairs=%0d hist=%0d sp=%0d none=%0d stays=%0d", rec_node.size(), e_pairs, e_hist, e_sp, e_none, e_stay);
    while (!idle) @(negedge clk);
    t0 = $time;
    for (int r = 0; r < rec_node.size(); r++) begin
      loc.user = user_t'(rec_user[r]);
      loc.lat = coord_t'(node_lat[rec_node[r]] + $urandom_range(600) - 300);
      loc.lon = coord_t'(node_lon[rec_node[r]] + $urandom_range(600) - 300);
      loc_valid = 1;
      do @(posedge clk); while (!loc_ready);
      #1 loc_valid = 0;
    end
    @(negedge clk);
    while (!idle) @(negedge clk);
    t1 = $time;
    begin
      longint cyc, bound;
      cyc = (t1 - t0) / 10;
      // an unreachable end node makes Dijkstra settle the whole map, which
      // may outlast the history scan; allow it NN pops of up to 64 cycles
      bound = longint'(rec_node.size()) * (NN + 4) + longint'(e_pairs) * (NH + 3 + 600)
              + longint'(e_none) * NN * 64;
      $display("processing took %0d cycles (bound %0d), %0d cycles per record", cyc, bound, cyc / rec_node.size());
      check(cyc <= bound, "processing time within the scan-dominated bound");
      check(cyc >= longint'(e_pairs) * NH, "every pair scanned the whole history");
    end
    check(int'(stats.records) == rec_node.size(), "records counter");
    check(int'(stats.pairs) == e_pairs, $sformatf("pairs %0d expected %0d", stats.pairs, e_pairs));
    check(int'(stats.hist_used) == e_hist, $sformatf("history used %0d expected %0d", stats.hist_used, e_hist));
    check(int'(stats.sp_used) == e_sp, $sformatf("shortest used %0d expected %0d", stats.sp_used, e_sp));
    check(int'(stats.no_path) == e_none, "no-path counter");
    check(int'(stats.stays) == e_stay, "stay counter");
    check(int'(stats.new_users) == e_new, "new-user counter");
    check(int'(stats.hist_dropped) == 0 && int'(stats.sp_overflow) == 0 && int'(seg_dropped) == 0,
          "no buffer overflow");
    check(int'(num_segments) == seg_count.size(), $sformatf("distinct segments %0d expected %0d", num_segments, seg_count.size()));
    m_hist = int'(stats.hist_used); m_sp = int'(stats.sp_used); m_none = int'(stats.no_path);
    m_stay = int'(stats.stays); m_newuser = int'(stats.new_users);
    run_publish(1);
    run_publish(2);
    run_publish(4);
    check(m_ambiguous == 0, "all shortest paths unique (reference is exact)");
    check(m_hist > 0, "history paths used");
    if (REQUIRE_ALL) begin
    check(m_multi > 0, "several history paths with weight 1/h");
    check(m_sp > 0, "shortest-path fallback");
    check(m_filter > 0, "hop filter removed a history path");
    check(m_none > 0, "pair without any path");
    check(m_stay > 0, "record on the same node");
    check(m_newuser > 0, "user change");
    check(m_suppressed > 0, "segments suppressed below k");
    check(m_published > 0, "segments published");
    check(m_backpressure > 0, "output back-pressure");
    end
    $display("mechanisms: hist=%0d multi=%0d sp=%0d filter=%0d none=%0d stay=%0d newuser=%0d suppressed=%0d published=%0d backpressure=%0d collisions=%0d",
             m_hist, m_multi, m_sp, m_filter, m_none, m_stay, m_newuser, m_suppressed, m_published, m_backpressure, seg_collisions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
