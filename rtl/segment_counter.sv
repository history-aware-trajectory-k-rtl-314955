// segment_counter: history-aware segment counting and publication. Holds
// one Q16.16 fixed-point traversal count per road segment in block RAM and,
// on request, publishes every segment whose count has reached k.
//
// From the paper: counts are 32-bit Q16.16 values in BRAM, each segment
// (a, b) is hashed to the BRAM address holding its count, shortest paths
// add 1 and historical paths add 1/h, and only segments with count >= k
// are published.
//
// This design's own choices: each table word holds a valid bit, the node
// pair (a, b) as a tag and the count, so that hash collisions are detected;
// a collision is resolved by linear probing over at most MAX_PROBE
// consecutive words, and a segment that finds no room is dropped and
// counted in dropped. The hash is an XOR/shift fold of a and b. Counts
// saturate at the top of the Q16.16 range. After reset (and on clear) the
// table is wiped, one word per cycle, before segments are accepted.
//
// Timing: an update is a read-modify-write: 2 cycles for a segment found
// at its home address, plus one per extra probe, plus one idle cycle
// between updates. Publication reads the whole table, 2 cycles per word
// plus the cycles an emitted segment waits for pub_ready; pub_done pulses
// at the end, with num_published and num_segments (distinct segments in
// the table) valid for the data retention rate.
//
// Interface: in_* valid/ready segment stream; clear and publish are
// one-cycle commands accepted while idle; k is the integer threshold.
module segment_counter
  import kanon_pkg::*;
#(
  parameter int unsigned TABLE_DEPTH = 8192,
  parameter int unsigned MAX_PROBE   = 8,
  localparam int unsigned TAW = $clog2(TABLE_DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  seg_t        in_seg,
  input  logic        clear,
  input  logic        publish,
  input  logic [15:0] k,
  output logic        busy,
  output logic        pub_valid,
  input  logic        pub_ready,
  output pub_seg_t    pub_seg,
  output logic        pub_done,
  output logic [31:0] num_segments,
  output logic [31:0] num_published,
  output logic [31:0] num_updates,
  output logic [31:0] num_collisions,
  output logic [31:0] dropped
);

  typedef struct packed {
    logic  valid;
    node_t a;
    node_t b;
    q16_t  count;
  } entry_t;

  typedef enum logic [2:0] {S_CLEAR, S_IDLE, S_CMP, S_PRD, S_PCHK, S_POUT} state_t;
  state_t state;

  logic           we, re;
  logic [TAW-1:0] waddr, raddr;
  entry_t         wdata, rdata;

  sdp_ram #(.DEPTH(TABLE_DEPTH), .WIDTH($bits(entry_t))) u_table (
    .clk, .we, .waddr, .wdata, .re, .raddr, .rdata
  );

  function automatic logic [TAW-1:0] seg_hash(node_t a, node_t b);
    logic [31:0] x;
    x = (32'(a) << 5) ^ 32'(b) ^ (32'(b) >> 7) ^ (32'(a) >> 9);
    return TAW'(x);
  endfunction

  logic [TAW-1:0] idx;         // clear / publish index, probe address
  logic [7:0]     probe;
  seg_t           cur;
  q16_t           kq;

  logic accept, hit, empty;
  assign in_ready = (state == S_IDLE) && !clear && !publish;
  assign accept   = in_valid && in_ready;
  assign hit      = rdata.valid && rdata.a == cur.a && rdata.b == cur.b;
  assign empty    = !rdata.valid;
  assign busy     = (state != S_IDLE);
  assign kq       = {k, 16'h0000};

  // memory port control
  always_comb begin
    we    = 1'b0;
    waddr = idx;
    wdata = '0;
    re    = 1'b0;
    raddr = idx;
    unique case (state)
      S_CLEAR: we = 1'b1;
      S_IDLE: if (accept) begin
        re    = 1'b1;
        raddr = seg_hash(in_seg.a, in_seg.b);
      end
      S_CMP: begin
        if (hit) begin
          we    = 1'b1;
          wdata = '{valid: 1'b1, a: cur.a, b: cur.b, count: q16_sat_add(rdata.count, cur.weight)};
        end else if (empty) begin
          we    = 1'b1;
          wdata = '{valid: 1'b1, a: cur.a, b: cur.b, count: cur.weight};
        end else if (32'(probe) + 1 < MAX_PROBE) begin
          re    = 1'b1;
          raddr = idx + 1'b1;
        end
      end
      S_PRD: re = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_CLEAR;
      idx            <= '0;
      probe          <= '0;
      cur            <= '0;
      pub_valid      <= 1'b0;
      pub_seg        <= '0;
      pub_done       <= 1'b0;
      num_segments   <= '0;
      num_published  <= '0;
      num_updates    <= '0;
      num_collisions <= '0;
      dropped        <= '0;
    end else begin
      pub_done <= 1'b0;
      unique case (state)
        S_CLEAR: begin
          idx <= idx + 1'b1;
          if (32'(idx) == TABLE_DEPTH - 1) begin
            idx   <= '0;
            state <= S_IDLE;
          end
        end
        S_IDLE: begin
          if (clear) begin
            idx            <= '0;
            num_segments   <= '0;
            num_updates    <= '0;
            num_collisions <= '0;
            dropped        <= '0;
            state          <= S_CLEAR;
          end else if (publish) begin
            idx           <= '0;
            num_published <= '0;
            state         <= S_PRD;
          end else if (accept) begin
            cur   <= in_seg;
            idx   <= seg_hash(in_seg.a, in_seg.b);
            probe <= '0;
            state <= S_CMP;
          end
        end
        S_CMP: begin
          if (hit || empty) begin
            num_updates <= num_updates + 1;
            if (empty) num_segments <= num_segments + 1;
            state <= S_IDLE;
          end else begin
            num_collisions <= num_collisions + 1;
            if (32'(probe) + 1 < MAX_PROBE) begin
              probe <= probe + 1'b1;
              idx   <= idx + 1'b1;
            end else begin
              dropped <= dropped + 1;
              state   <= S_IDLE;
            end
          end
        end
        S_PRD: state <= S_PCHK;
        S_PCHK: begin
          if (rdata.valid && rdata.count >= kq) begin
            pub_valid <= 1'b1;
            pub_seg   <= '{a: rdata.a, b: rdata.b, count: rdata.count};
            state     <= S_POUT;
          end else if (32'(idx) == TABLE_DEPTH - 1) begin
            pub_done <= 1'b1;
            state    <= S_IDLE;
          end else begin
            idx   <= idx + 1'b1;
            state <= S_PRD;
          end
        end
        S_POUT: if (pub_ready) begin
          pub_valid     <= 1'b0;
          num_published <= num_published + 1;
          if (32'(idx) == TABLE_DEPTH - 1) begin
            pub_done <= 1'b1;
            state    <= S_IDLE;
          end else begin
            idx   <= idx + 1'b1;
            state <= S_PRD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   pub_valid && !pub_ready |=> pub_valid && $stable(pub_seg));

endmodule
