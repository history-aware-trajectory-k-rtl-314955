// tb_sdp_ram: self-checking test of the block-RAM template. Writes random
// words, reads them back one cycle later, checks read-old-data on a
// same-address read/write collision and that the read register holds when
// read enable is low.
module tb_sdp_ram;
  localparam int unsigned DEPTH = 100;
  localparam int unsigned WIDTH = 29;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic [WIDTH-1:0] got, input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      we = 1; waddr = AW'(i); wdata = WIDTH'($urandom); model[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 300; n++) begin
      int a = $urandom_range(DEPTH-1);
      logic [WIDTH-1:0] old;
      re = 1; raddr = AW'(a);
      // random concurrent write elsewhere or to the same address
      we = $urandom_range(1);
      waddr = ($urandom_range(3) == 0) ? AW'(a) : AW'($urandom_range(DEPTH-1));
      wdata = WIDTH'($urandom);
      @(negedge clk);
      old = model[a];
      check(rdata, old, "read");
      if (we) model[waddr] = wdata;
      we = 0; re = 0;
      @(negedge clk);
      check(rdata, old, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
