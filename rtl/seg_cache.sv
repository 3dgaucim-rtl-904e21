// seg_cache: on-chip SRAM buffer for Gaussian parameters, split by depth.
//
// The buffer (KB kilobytes) is divided into NSEG equal segments, one per depth
// bucket of the sorter. A Gaussian fetched from DRAM is placed in the segment of its
// depth bucket, so a lookup first narrows the search to that segment and then does a
// 2-way set-associative tag compare inside it. A line holds one Gaussian record of
// REC_W 64-bit words. Sets within a segment are indexed by the low bits of the
// Gaussian id; the tag is the full id; each set keeps one LRU bit.
//
// Interface
//   lookup   lk_valid, lk_seg, lk_gid  -> next cycle lk_done, lk_hit, lk_line.
//            On a miss the LRU way of the set is allocated to lk_gid at once (its old
//            content is evicted) and lk_line names it; the caller must then write the
//            record's words through the write port before reading them.
//   write    wr_valid, wr_line, wr_word, wr_data (one word per cycle)
//   read     rd_valid, rd_line, rd_word -> rd_data next cycle
//   counters hits, misses (since reset)
//   ready    low for NSEG*SETS cycles after reset while the tag memory is cleared
//            one set per cycle; lookups must wait for it.
//
// From the accelerator description: 256 KB, N = 8 equal segments chosen by depth,
// 2-way associative lookup inside a segment. This design's choices: the record size,
// set indexing, LRU replacement, allocate-on-miss, and the port timing.
module seg_cache #(
  parameter int unsigned KB    = 256,
  parameter int unsigned NSEG  = 8,
  parameter int unsigned REC_W = 8,
  localparam int unsigned LINES = KB * 1024 / (REC_W * 8),
  localparam int unsigned SETS  = LINES / NSEG / 2,
  localparam int unsigned LW    = $clog2(LINES),
  localparam int unsigned SW    = $clog2(SETS),
  localparam int unsigned GW_   = $clog2(NSEG),
  localparam int unsigned RW    = $clog2(REC_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          lk_valid,
  input  logic [GW_-1:0] lk_seg,
  input  logic [31:0]   lk_gid,
  output logic          lk_done,
  output logic          lk_hit,
  output logic [LW-1:0] lk_line,
  input  logic          wr_valid,
  input  logic [LW-1:0] wr_line,
  input  logic [RW-1:0] wr_word,
  input  logic [63:0]   wr_data,
  input  logic          rd_valid,
  input  logic [LW-1:0] rd_line,
  input  logic [RW-1:0] rd_word,
  output logic [63:0]   rd_data,
  output logic [31:0]   hits,
  output logic [31:0]   misses,
  output logic          ready
);

  // line index = {segment, set, way}
  typedef struct packed {
    logic        lru;      // way to replace next
    logic        v1;
    logic [31:0] t1;
    logic        v0;
    logic [31:0] t0;
  } tagset_t;

  logic [63:0] data [LINES * REC_W];
  tagset_t     tags [NSEG * SETS];

  logic [SW-1:0]      set;
  logic [GW_+SW-1:0]  tidx;
  tagset_t            ts;
  assign set  = lk_gid[SW-1:0];
  assign tidx = {lk_seg, set};
  assign ts   = tags[tidx];

  logic h0, h1;
  assign h0 = ts.v0 && (ts.t0 == lk_gid);
  assign h1 = ts.v1 && (ts.t1 == lk_gid);

  // tag clearing after reset
  logic [GW_+SW:0] clr;
  assign ready = clr[GW_+SW];

  always_ff @(posedge clk) begin
    if (wr_valid) data[{wr_line, wr_word}] <= wr_data;
    if (rd_valid) rd_data <= data[{rd_line, rd_word}];
    if (!ready) tags[clr[GW_+SW-1:0]] <= '0;
    else if (lk_valid) begin
      tagset_t n;
      n = ts;
      if (h0 || h1) n.lru = !h1;
      else if (ts.lru) begin n.t1 = lk_gid; n.v1 = 1'b1; n.lru = 1'b0; end
      else             begin n.t0 = lk_gid; n.v0 = 1'b1; n.lru = 1'b1; end
      tags[tidx] <= n;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr     <= '0;
      lk_done <= 1'b0;
      lk_hit  <= 1'b0;
      lk_line <= '0;
      hits    <= '0;
      misses  <= '0;
    end else begin
      if (!ready) clr <= clr + 1'b1;
      lk_done <= lk_valid && ready;
      if (lk_valid && ready) begin
        lk_hit  <= h0 || h1;
        lk_line <= {lk_seg, set, (h0 || h1) ? h1 : ts.lru};
        if (h0 || h1) hits   <= hits + 1'b1;
        else          misses <= misses + 1'b1;
      end
    end
  end

endmodule
