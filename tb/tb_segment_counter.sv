// tb_segment_counter: random weighted segments drawn from a small set of
// node pairs are counted by two instances: a roomy one (probing may cover
// the whole table, so nothing is dropped) checked exactly against an
// associative-array reference, and a tiny one that must drop segments and
// keep updates + drops equal to the segments sent. Publication is checked
// for several k (the published set and every count), saturation of the
// Q16.16 count, clear, and the 2-cycle read-modify-write of a home hit.
module tb_segment_counter;
  import kanon_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, clear, publish, busy, pub_valid, pub_ready, pub_done;
  seg_t in_seg; logic [15:0] k; pub_seg_t pub_seg;
  logic [31:0] num_segments, num_published, num_updates, num_collisions, dropped;
  logic in_ready2, busy2, pub_valid2, pub_done2;
  pub_seg_t pub_seg2;
  logic [31:0] num_segments2, num_published2, num_updates2, num_collisions2, dropped2;

  segment_counter #(.TABLE_DEPTH(256), .MAX_PROBE(256)) dut (.*, .in_valid(in_valid && in_ready2));
  segment_counter #(.TABLE_DEPTH(16), .MAX_PROBE(2)) dut_small (
    .clk, .rst_n, .in_valid(in_valid && in_ready), .in_ready(in_ready2), .in_seg, .clear, .publish,
    .k, .busy(busy2), .pub_valid(pub_valid2), .pub_ready(1'b1), .pub_seg(pub_seg2), .pub_done(pub_done2),
    .num_segments(num_segments2), .num_published(num_published2), .num_updates(num_updates2),
    .num_collisions(num_collisions2), .dropped(dropped2));
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint refc [longint];
  int sent = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // both instances must be ready together so that they see the same stream
  task automatic send(input int a, input int b, input longint w);
    longint key;
    in_seg.a = node_t'(a); in_seg.b = node_t'(b); in_seg.weight = q16_t'(w); in_seg.pair_last = 0;
    in_valid = 1;
    do @(posedge clk); while (!(in_ready && in_ready2));
    #1 in_valid = 0;
    key = longint'(a) * 65536 + b;
    if (!refc.exists(key)) refc[key] = 0;
    refc[key] += w;
    if (refc[key] > 64'hFFFF_FFFF) refc[key] = 64'hFFFF_FFFF;
    sent++;
  endtask

  task automatic do_publish(input int kk);
    int npub, nexp;
    longint seen [longint];
    k = 16'(kk);
    while (busy || busy2) @(posedge clk);
    publish = 1; @(posedge clk); #1 publish = 0;
    npub = 0;
    while (!pub_done) begin
      pub_ready = ($urandom_range(2) != 0);
      @(posedge clk);
      if (pub_valid && pub_ready) begin
        longint key = longint'(pub_seg.a) * 65536 + pub_seg.b;
        npub++;
        check(refc.exists(key) && refc[key] == longint'(pub_seg.count) && refc[key] >= longint'(kk) * 65536,
              $sformatf("published (%0d,%0d) count %h", pub_seg.a, pub_seg.b, pub_seg.count));
        check(!seen.exists(key), "published once");
        seen[key] = 1;
      end
      #1;
    end
    nexp = 0;
    foreach (refc[key]) if (refc[key] >= longint'(kk) * 65536) nexp++;
    #1;
    check(npub == nexp, $sformatf("k=%0d: %0d published, expected %0d", kk, npub, nexp));
    check(int'(num_published) == nexp, "num_published");
    check(int'(num_segments) == refc.size(), $sformatf("num_segments %0d expected %0d", num_segments, refc.size()));
    while (busy2) @(posedge clk);
  endtask

  initial begin
    int lat;
    in_valid = 0; in_seg = '0; clear = 0; publish = 0; k = '0; pub_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      refc.delete(); sent = 0;
      while (busy || busy2) @(posedge clk);
      @(negedge clk);
      for (int n = 0; n < 1500; n++) begin
        int a, b;
        a = $urandom_range(11); b = a + $urandom_range(5);
        send(a * 97, b * 89 + 1, (n % 3 == 0) ? 65536 : 65536 / (1 + $urandom_range(7)));
      end
      // saturation
      send(4000, 4001, 64'hF000_0000);
      send(4000, 4001, 64'hF000_0000);
      // a count of exactly 3.0 must be published for k = 3
      send(4100, 4101, 64'h0003_0000);
      // latency of an update that hits at its home address
      send(4000, 4001, 1);
      lat = 0;
      while (busy) begin @(posedge clk); lat++; end
      check(lat <= 2, $sformatf("home update took %0d cycles", lat));
      check(int'(num_collisions) > 0, "collisions exercised");
      check(int'(dropped) == 0, "no drops in the roomy table");
      check(int'(num_updates) == sent, "roomy table counted every segment");
      while (busy2) @(posedge clk);
      check(int'(dropped2) > 0, "small table dropped segments");
      check(int'(num_updates2 + dropped2) == sent, "small table: updates + drops = sent");
      do_publish(0);
      do_publish(3);
      do_publish(30);
      do_publish(120);
      do_publish(65535);
      clear = 1; @(posedge clk); #1 clear = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
