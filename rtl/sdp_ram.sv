// sdp_ram: simple dual-port block RAM, one write port and one read port on
// the same clock, one cycle of read latency (the read data for the address
// presented in cycle t appears in cycle t+1). Read-during-write to the same
// address returns the old contents. This is the inference template used for
// every on-chip memory of the accelerator: the map data, the history
// database and the segment-count table. The paper stores these in FPGA
// block RAM; the port arrangement and the read-old-data behaviour are this
// design's own choices. The contents are not reset: the map and history
// are loaded through the write port, and the segment table is cleared by
// its owner.
module sdp_ram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end

endmodule
