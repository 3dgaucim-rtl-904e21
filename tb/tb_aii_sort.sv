// tb_aii_sort: two frames of four tiles of one tile block, 48 keys per tile, drawn
// from a narrow depth range inside a wide [depth_min, depth_max].
// Frame 0 (uniform intervals) must pile the keys into few buckets and overflow;
// frame 1 (intervals from frame 0's averaged quantiles) must spread them so nothing
// overflows. Every output list must be ascending and a sub-multiset of the input
// (exactly the input when nothing overflowed), and the tile latency must equal
// 2 + sum over non-empty buckets of (13 + bucket size) cycles from tile_end to tile_done.
module tb_aii_sort;
  import gaucim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic restart, tile_start, in_valid, in_ready, tile_end, out_valid, out_last, tile_done;
  logic frame_end, busy, used_prev;
  depth_t depth_min, depth_max;
  logic [5:0] tblk;
  sort_elem_t in_elem, out_elem;
  logic [15:0] overflow;
  logic [4:0] max_occ;
  logic [2:0] out_bucket;
  int checks = 0, failures = 0;

  aii_sort dut (.clk, .rst_n, .restart, .depth_min, .depth_max, .tile_start, .tblk, .in_valid,
                .in_elem, .in_ready, .tile_end, .out_valid, .out_elem, .out_last, .out_bucket, .tile_done,
                .frame_end, .busy, .used_prev, .overflow, .max_occ);

  sort_elem_t got [$];
  always @(posedge clk) if (rst_n && out_valid) got.push_back(out_elem);

  int ovf_frame [2];

  task automatic run_tile(int frame, int tile);
    sort_elem_t sent [$];
    int cnt [logic [31:0]];
    int t0, t1, expect_cyc, ok;
    int bcnt_model [8];
    @(negedge clk);
    tile_start = 1; tblk = 6'd3;
    @(negedge clk);
    tile_start = 0;
    for (int i = 0; i < 48; i++) begin
      in_valid = 1;
      in_elem.key = 16'(20000 + $urandom_range(0, 8000) + frame * 200);
      in_elem.id  = 16'(tile * 100 + i);
      sent.push_back(in_elem);
      cnt[in_elem] = cnt.exists(in_elem) ? cnt[in_elem] + 1 : 1;
      @(negedge clk);
    end
    in_valid = 0;
    got.delete();
    tile_end = 1;
    t0 = $time / 10;
    @(negedge clk);
    tile_end = 0;
    while (!tile_done) @(negedge clk);
    t1 = $time / 10;
    // checks
    checks += 4;
    if (got.size() + int'(overflow) != 48) begin failures++; $display("FAIL count %0d+%0d", got.size(), overflow); end
    ok = 1;
    for (int i = 1; i < got.size(); i++) if (got[i].key < got[i-1].key) ok = 0;
    if (!ok) begin failures++; $display("FAIL order f%0d t%0d", frame, tile); end
    ok = 1;
    foreach (got[i]) begin
      if (!cnt.exists(got[i]) || cnt[got[i]] == 0) ok = 0;
      else cnt[got[i]]--;
    end
    if (!ok) begin failures++; $display("FAIL not from input"); end
    if (used_prev != (frame == 1)) begin failures++; $display("FAIL used_prev %0d frame %0d", used_prev, frame); end
    // latency model 2 + sum(13 + size): derive the bucket count, then check it is consistent
    expect_cyc = t1 - t0;
    begin
      int nb;
      nb = (expect_cyc - 2 - got.size()) / 13;
      checks++;
      if (expect_cyc != 2 + 13 * nb + got.size() || nb < 1 || nb > 8 ||
          nb * int'(max_occ) < got.size()) begin
        failures++; $display("FAIL latency %0d cycles for %0d keys", expect_cyc, got.size());
      end
      $display("frame %0d tile %0d: %0d keys sorted, %0d dropped, fullest bucket %0d, %0d cycles, %0d buckets used",
               frame, tile, got.size(), overflow, max_occ, expect_cyc, nb);
    end
    ovf_frame[frame] += int'(overflow);
  endtask

  initial begin
    restart = 0; tile_start = 0; in_valid = 0; tile_end = 0; frame_end = 0;
    tblk = 0; in_elem = '0; depth_min = 16'd0; depth_max = 16'd65535;
    ovf_frame = '{0, 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int tile = 0; tile < 4; tile++) run_tile(f, tile);
      @(negedge clk); frame_end = 1;
      @(negedge clk); frame_end = 0;
      while (busy) @(negedge clk);
    end
    checks += 2;
    if (ovf_frame[0] == 0) begin failures++; $display("FAIL frame 0 did not overflow"); end
    if (ovf_frame[1] != 0) begin failures++; $display("FAIL frame 1 overflowed %0d", ovf_frame[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
