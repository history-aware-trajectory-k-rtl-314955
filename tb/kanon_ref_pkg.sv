// kanon_ref_pkg: reference model of the history-aware k-anonymization
// method, written directly from the algorithm description and used by the
// testbenches to work out expected results independently of the RTL.
// It holds a map graph (adjacency lists), node coordinates and a history
// log in package variables, and offers: nearest node, Dijkstra with a
// uniqueness test for the shortest path, the history search as the
// paper's nested loops with maxHop = shortest hops + delta_h, the
// candidate selection, and weighted segment counting into an associative
// array keyed by the ordered node pair.
package kanon_ref_pkg;

  localparam int MAXN = 4500;

  int     n_nodes;
  longint node_lat [MAXN];
  longint node_lon [MAXN];
  int     adj_dst [MAXN][$];
  int     adj_len [MAXN][$];
  int     hist_node [$];
  int     hist_user [$];

  // results of the last dijkstra() call
  int     sp_found, sp_unique, sp_hops, sp_len;
  int     sp_path [$];

  // segment counts, key = a * 65536 + b with a <= b
  longint seg_count [longint];

  function automatic void clear_graph();
    for (int i = 0; i < MAXN; i++) begin
      adj_dst[i].delete();
      adj_len[i].delete();
    end
  endfunction

  function automatic void add_edge(int a, int b, int len);
    adj_dst[a].push_back(b);
    adj_len[a].push_back(len);
  endfunction

  function automatic int nearest(longint la, longint lo);
    longint best = -1; int bi = 0;
    for (int i = 0; i < n_nodes; i++) begin
      longint dx = la - node_lat[i];
      longint dy = lo - node_lon[i];
      longint dd = dx*dx + dy*dy;
      if (best < 0 || dd < best) begin best = dd; bi = i; end
    end
    return bi;
  endfunction

  // Dijkstra from s to e. Also counts shortest paths to detect ties.
  function automatic void dijkstra(int s, int e);
    longint d [] = new [n_nodes];
    int     pv [] = new [n_nodes];
    int     cnt [] = new [n_nodes];
    bit     vis [] = new [n_nodes];
    for (int i = 0; i < n_nodes; i++) begin d[i] = -1; vis[i] = 0; cnt[i] = 0; end
    d[s] = 0; pv[s] = s; cnt[s] = 1;
    forever begin
      int b = -1;
      for (int i = 0; i < n_nodes; i++)
        if (!vis[i] && d[i] >= 0 && (b < 0 || d[i] < d[b])) b = i;
      if (b < 0 || b == e) break;
      vis[b] = 1;
      for (int k = 0; k < adj_dst[b].size(); k++) begin
        int v;
        longint nd;
        v = adj_dst[b][k];
        nd = d[b] + adj_len[b][k];
        if (!vis[v]) begin
          if (d[v] < 0 || nd < d[v]) begin d[v] = nd; pv[v] = b; cnt[v] = cnt[b]; end
          else if (nd == d[v]) cnt[v] += cnt[b];
        end
      end
    end
    sp_path.delete();
    sp_found = (d[e] >= 0);
    sp_unique = sp_found && (cnt[e] == 1);
    sp_len = int'(d[e]);
    sp_hops = 0;
    if (sp_found) begin
      int c = e;
      sp_path.push_front(c);
      while (c != s) begin c = pv[c]; sp_path.push_front(c); end
      sp_hops = sp_path.size() - 1;
    end
  endfunction

  // Algorithm 1: all historical paths from s to e within max_hop hops
  function automatic void history(int s, int e, int max_hop, ref int paths [$][$]);
    paths.delete();
    for (int i = 0; i < hist_node.size(); i++) begin
      if (hist_node[i] == s) begin
        int cur [$];
        int cu = hist_user[i], c = 0;
        cur.push_back(s);
        for (int j = i + 1; j < hist_node.size(); j++) begin
          if (hist_user[j] != cu || hist_node[j] == s || c >= max_hop) break;
          c++;
          cur.push_back(hist_node[j]);
          if (hist_node[j] == e) begin
            paths.push_back(cur);
            break;
          end
        end
      end
    end
  endfunction

  // Candidate selection: paths to count and their Q16.16 weight.
  // Returns 1 = history used, 2 = shortest path used, 0 = nothing.
  function automatic int select(int s, int e, bit filter_en, int delta_h, int hop_cap,
                                ref int paths [$][$], ref longint weight);
    int mh;
    dijkstra(s, e);
    mh = (filter_en && sp_found) ? sp_hops + delta_h : hop_cap;
    if (mh > hop_cap) mh = hop_cap;
    history(s, e, mh, paths);
    if (paths.size() > 0) begin
      weight = 65536 / paths.size();
      return 1;
    end
    if (sp_found) begin
      paths.push_back(sp_path);
      weight = 65536;
      return 2;
    end
    weight = 0;
    return 0;
  endfunction

  function automatic void count_paths(ref int paths [$][$], input longint weight);
    foreach (paths[p]) for (int k = 1; k < paths[p].size(); k++) begin
      int a = paths[p][k-1], b = paths[p][k];
      longint key = (a <= b) ? longint'(a) * 65536 + b : longint'(b) * 65536 + a;
      if (!seg_count.exists(key)) seg_count[key] = 0;
      seg_count[key] += weight;
      if (seg_count[key] > 64'hFFFF_FFFF) seg_count[key] = 64'hFFFF_FFFF;
    end
  endfunction

endpackage
