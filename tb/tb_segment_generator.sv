// tb_segment_generator: streams random paths (including one-node paths)
// with random stalls on both sides and checks that the segments come out
// in order, with ascending node order, the path's weight and pair_last.
// Also checks one node per cycle when the consumer never stalls.
module tb_segment_generator;
  import kanon_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  path_node_t in_node;
  seg_t out_seg;

  segment_generator dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  seg_t exp [$];
  path_node_t src [$];
  bit stall_mode = 1;

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

  // build the stimulus and the expected segments
  initial begin
    for (int p = 0; p < 400; p++) begin
      int len;
      q16_t w;
      node_t prv;
      len = (p % 13 == 0) ? 1 : 2 + $urandom_range(10);
      w = q16_t'($urandom_range(65536));
      for (int k = 0; k < len; k++) begin
        path_node_t x;
        x.node = node_t'($urandom_range(4499));
        x.weight = w;
        x.path_first = (k == 0); x.path_last = (k == len - 1);
        x.pair_last = x.path_last && (p % 3 == 2);
        src.push_back(x);
        if (k > 0) begin
          seg_t s;
          s.a = (prv <= x.node) ? prv : x.node;
          s.b = (prv <= x.node) ? x.node : prv;
          s.weight = w; s.pair_last = x.pair_last;
          exp.push_back(s);
        end
        prv = x.node;
      end
    end
  end

  always @(negedge clk) out_ready <= stall_mode ? ($urandom_range(2) != 0) : 1'b1;

  int got = 0, cyc = 0, burst_cyc = 0, burst_segs = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (got < exp.size()) check(out_seg == exp[got], $sformatf("segment %0d: %p vs %p", got, out_seg, exp[got]));
    got++;
  end

  initial begin
    int n;
    in_valid = 0; in_node = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    n = 0;
    while (n < src.size()) begin
      if (n == src.size() / 2) stall_mode = 0;
      in_valid = stall_mode ? ($urandom_range(3) != 0) : 1'b1;
      in_node = src[n];
      @(posedge clk);
      if (in_valid && in_ready) n++;
      if (!stall_mode) burst_cyc++;
      #1;
    end
    in_valid = 0;
    repeat (10) @(posedge clk);
    check(got == exp.size(), $sformatf("%0d segments, expected %0d", got, exp.size()));
    check(burst_cyc == src.size() - src.size() / 2, $sformatf("unstalled: %0d cycles for %0d nodes", burst_cyc, src.size() - src.size()/2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
