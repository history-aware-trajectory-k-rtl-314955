// tb_node_search_engine: loads a random set of node coordinates, sends
// random location records and compares the returned node with a
// brute-force nearest-node search done in the testbench (first node wins
// on a tie). Also checks the per-record latency of num_nodes + 1 cycles and
// that a stalled output holds its value.
module tb_node_search_engine;
  import kanon_pkg::*;
  localparam int unsigned NN = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  logic node_we;
  node_t node_waddr;
  coord_t node_wlat, node_wlon;
  logic [15:0] num_nodes;
  logic in_valid, in_ready, out_valid, out_ready;
  loc_rec_t in_rec;
  user_t out_user;
  node_t out_node;
  coord_t mlat [NN], mlon [NN];
  int checks = 0, failures = 0;

  node_search_engine #(.NUM_NODES(NN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_nearest(coord_t la, coord_t lo, int n);
    longint best = -1; int bi = 0;
    for (int i = 0; i < n; i++) begin
      longint dx = longint'(la) - longint'(mlat[i]);
      longint dy = longint'(lo) - longint'(mlon[i]);
      longint dd = dx*dx + dy*dy;
      if (best < 0 || dd < best) begin best = dd; bi = i; end
    end
    return bi;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    node_we = 0; node_waddr = '0; node_wlat = '0; node_wlon = '0;
    in_valid = 0; in_rec = '0; out_ready = 1; num_nodes = 16'(NN);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NN; i++) begin
      mlat[i] = coord_t'($urandom_range(400000)) + 356000000;
      mlon[i] = coord_t'($urandom_range(400000)) + 1396000000;
      if (i == 7) begin mlat[i] = mlat[3]; mlon[i] = mlon[3]; end // duplicate: tie
      node_we = 1; node_waddr = node_t'(i); node_wlat = mlat[i]; node_wlon = mlon[i];
      @(negedge clk);
    end
    node_we = 0;
    for (int r = 0; r < 60; r++) begin
      int n, exp, lat;
      n = (r < 40) ? NN : 1 + $urandom_range(NN-1);
      num_nodes = 16'(n);
      if (r % 5 == 0) begin
        in_rec.lat = mlat[3] + 5; in_rec.lon = mlon[3] - 3;
      end else begin
        in_rec.lat = coord_t'($urandom_range(420000)) + 355990000;
        in_rec.lon = coord_t'($urandom_range(420000)) + 1395990000;
      end
      in_rec.user = user_t'($urandom);
      exp = ref_nearest(in_rec.lat, in_rec.lon, n);
      out_ready = (r % 3 != 0);
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      #1 in_valid = 0;
      lat = 0;
      while (!out_valid) begin @(posedge clk); #1 lat++; end
      check(lat == n + 1, $sformatf("latency %0d for %0d nodes", lat, n));
      if (!out_ready) begin
        repeat (4) @(posedge clk);
        #1 check(out_valid && out_node == node_t'(exp), "held output");
        out_ready = 1;
      end
      check(out_node == node_t'(exp), $sformatf("record %0d: node %0d expected %0d", r, out_node, exp));
      check(out_user == in_rec.user, "user id");
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
