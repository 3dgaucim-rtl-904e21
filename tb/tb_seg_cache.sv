// tb_seg_cache: random lookups from a small pool of Gaussian ids in random segments.
// A reference model of the 2-way LRU sets predicts hit or miss and the way used.
// On a miss the record is written (word w of id g = {g, w}); on a hit every word is
// read back and compared. Segments are kept apart: the same id in two segments
// occupies two lines.
module tb_seg_cache;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int REC_W = 8, SETS = 256;
  logic ready, lk_valid, lk_done, lk_hit, wr_valid, rd_valid;
  logic [2:0] lk_seg;
  logic [31:0] lk_gid, hits, misses;
  logic [11:0] lk_line, wr_line, rd_line;
  logic [2:0] wr_word, rd_word;
  logic [63:0] wr_data, rd_data;
  int checks = 0, failures = 0;

  seg_cache dut (.clk, .rst_n, .lk_valid, .lk_seg, .lk_gid, .lk_done, .lk_hit, .lk_line,
                 .wr_valid, .wr_line, .wr_word, .wr_data, .rd_valid, .rd_line, .rd_word, .rd_data,
                 .hits, .misses, .ready);

  // model: per (seg, set) the ids of way 0/1 (-1 empty) and the LRU way
  longint mtag [8][SETS][2];
  int     mlru [8][SETS];
  int     nh = 0, nm = 0;

  initial begin
    lk_valid = 0; wr_valid = 0; rd_valid = 0; lk_seg = 0; lk_gid = 0;
    wr_line = 0; wr_word = 0; wr_data = 0; rd_line = 0; rd_word = 0;
    for (int s = 0; s < 8; s++) for (int i = 0; i < SETS; i++) begin
      mtag[s][i][0] = -1; mtag[s][i][1] = -1; mlru[s][i] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    checks++;
    if (ready) begin failures++; $display("FAIL ready during clearing"); end
    while (!ready) @(negedge clk);
    for (int it = 0; it < 1500; it++) begin
      int seg, set, way, exp_hit;
      logic [31:0] gid;
      seg = $urandom_range(0, 1) * 5;                  // two segments
      gid = 32'($urandom_range(0, 3)) * SETS + 32'($urandom_range(0, 3)) + 32'(seg == 5 ? 0 : 0);
      set = int'(gid) % SETS;
      exp_hit = 0; way = mlru[seg][set];
      for (int w = 0; w < 2; w++) if (mtag[seg][set][w] == longint'(gid)) begin exp_hit = 1; way = w; end
      if (!exp_hit) mtag[seg][set][way] = gid;
      mlru[seg][set] = 1 - way;
      if (exp_hit) nh++; else nm++;
      @(negedge clk);
      lk_valid = 1; lk_seg = 3'(seg); lk_gid = gid;
      @(negedge clk);
      lk_valid = 0;
      checks++;
      if (!lk_done || lk_hit != exp_hit[0] || lk_line != {3'(seg), 8'(set), 1'(way)}) begin
        failures++; $display("FAIL lookup gid %0d seg %0d hit %0d/%0d line %h", gid, seg, lk_hit, exp_hit, lk_line);
      end
      if (!lk_hit) begin
        for (int w = 0; w < REC_W; w++) begin
          wr_valid = 1; wr_line = lk_line; wr_word = 3'(w); wr_data = {gid, 32'(w + seg * 16)};
          @(negedge clk);
        end
        wr_valid = 0;
      end else begin
        for (int w = 0; w < REC_W; w++) begin
          rd_valid = 1; rd_line = lk_line; rd_word = 3'(w);
          @(negedge clk);
          rd_valid = 0;
          checks++;
          if (rd_data != {gid, 32'(w + seg * 16)}) begin failures++; $display("FAIL data gid %0d w %0d", gid, w); end
        end
      end
    end
    checks++;
    if (hits != 32'(nh) || misses != 32'(nm) || nh == 0 || nm == 0) begin
      failures++; $display("FAIL counters %0d/%0d %0d/%0d", hits, nh, misses, nm);
    end
    $display("hits %0d misses %0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
