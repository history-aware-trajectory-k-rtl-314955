// tb_trajectory_select: the search results are modelled by arrays in the
// testbench. Random cases (no history hits, hits that pass or fail the hop
// filter, filter on/off, no shortest path) are run with a randomly stalling
// consumer; the emitted node stream, its weights (1 or 1/h in Q16.16),
// path markers and the decision flags are compared with an independently
// built expected stream.
module tb_trajectory_select;
  import kanon_pkg::*;
  localparam int unsigned MP = 8, PM = 128;
  localparam int unsigned PAW = $clog2(PM), PIW = $clog2(MP), PCW = $clog2(MP + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, hop_filter_en, busy, done;
  logic [7:0] delta_h;
  logic [PCW-1:0] hs_num_paths, h_valid;
  logic [PIW-1:0] hs_path_sel; logic [PAW-1:0] hs_path_base, hs_node_addr;
  logic [7:0] hs_path_hops; node_t hs_node_data;
  logic sp_found; logic [7:0] sp_hops, sp_path_idx; node_t sp_path_node;
  logic out_valid, out_ready; path_node_t out_node;
  logic used_hist, used_sp, used_none;

  int pbase [MP]; int phops [MP]; int pmem [PM]; int spp [256];

  assign hs_path_base = PAW'(pbase[hs_path_sel]);
  assign hs_path_hops = 8'(phops[hs_path_sel]);
  assign hs_node_data = node_t'(pmem[hs_node_addr]);
  assign sp_path_node = node_t'(spp[sp_path_idx]);

  trajectory_select #(.MAX_PATHS(MP), .PATH_MEM(PM)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_hist = 0, n_sp = 0, n_none = 0, n_filtered = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= ($urandom_range(3) != 0);

  initial begin
    start = 0; hop_filter_en = 0; delta_h = 8'd5; hs_num_paths = '0; sp_found = 0; sp_hops = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int np, base, hv, spf, sph, wexp;
      path_node_t exp [$];
      exp.delete();
      np = $urandom_range(MP);
      if (t % 7 == 0) np = 0;
      spf = (t % 11 != 5);
      sph = 1 + $urandom_range(9);
      hop_filter_en = $urandom_range(1);
      delta_h = 8'($urandom_range(6));
      base = 0;
      for (int p = 0; p < np; p++) begin
        pbase[p] = base; phops[p] = 1 + $urandom_range(14);
        for (int k = 0; k <= phops[p]; k++) pmem[base + k] = $urandom_range(4499);
        base += phops[p] + 1;
      end
      for (int k = 0; k <= sph; k++) spp[k] = $urandom_range(4499);
      hs_num_paths = PCW'(np); sp_found = spf[0]; sp_hops = 8'(sph);
      // expected stream
      hv = 0;
      for (int p = 0; p < np; p++)
        if (!hop_filter_en || !spf || phops[p] <= sph + int'(delta_h)) hv++;
        else n_filtered++;
      if (hv > 0) begin
        int e;
        e = 0;
        wexp = 65536 / hv;
        for (int p = 0; p < np; p++)
          if (!hop_filter_en || !spf || phops[p] <= sph + int'(delta_h)) begin
            e++;
            for (int k = 0; k <= phops[p]; k++) begin
              path_node_t x;
              x.node = node_t'(pmem[pbase[p] + k]); x.weight = q16_t'(wexp);
              x.path_first = (k == 0); x.path_last = (k == phops[p]);
              x.pair_last = (k == phops[p]) && (e == hv);
              exp.push_back(x);
            end
          end
      end else if (spf) begin
        for (int k = 0; k <= sph; k++) begin
          path_node_t x;
          x.node = node_t'(spp[k]); x.weight = 32'h0001_0000;
          x.path_first = (k == 0); x.path_last = (k == sph); x.pair_last = (k == sph);
          exp.push_back(x);
        end
      end
      start = 1; @(posedge clk); #1 start = 0;
      begin
        int got;
        got = 0;
        while (!done) begin
          @(posedge clk);
          if (out_valid && out_ready) begin
            if (got < exp.size()) check(out_node == exp[got], $sformatf("case %0d node %0d: %p vs %p", t, got, out_node, exp[got]));
            got++;
          end
        end
        check(got == exp.size(), $sformatf("case %0d: %0d nodes, expected %0d", t, got, exp.size()));
      end
      #1;
      check(used_hist == (hv > 0), "used_hist");
      check(used_sp == (hv == 0 && spf), "used_sp");
      check(used_none == (hv == 0 && !spf), "used_none");
      check(int'(h_valid) == hv, "h_valid");
      if (hv > 0) n_hist++; else if (spf) n_sp++; else n_none++;
      @(negedge clk);
    end
    check(n_hist > 0 && n_sp > 0 && n_none > 0 && n_filtered > 0, "all decisions exercised");
    $display("hist=%0d sp=%0d none=%0d filtered=%0d", n_hist, n_sp, n_none, n_filtered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
