// tb_atg_grouping: three frames on the 8 x 8 block grid.
// Frame 0 feeds random Gaussian boxes, frame 1 the same boxes with a quarter of them
// moved, frame 2 repeats frame 1 exactly. A reference model recomputes the link
// strengths, the per-block thresholds, the kept links and the connected groups;
// after every grouping each block's label must equal the smallest block index of its
// group. Frame 1 must raise deformation flags and merge fewer links than frame 0;
// frame 2 must raise no flag and merge nothing. Cycle counts are printed.
module tb_atg_grouping;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int GW = 8, GH = 8, T = 64, K = 3, UTH = 128;
  logic restart, frame_start, g_valid, group_start, busy, done;
  logic [2:0] x0, x1, y0, y1;
  logic [5:0] label [T];
  logic [15:0] flags, merged, groups;
  int checks = 0, failures = 0;

  atg_grouping dut (.clk, .rst_n, .restart, .frame_start, .g_valid, .x0, .x1, .y0, .y1,
                    .group_start, .busy, .done, .label, .flags, .merged, .groups);

  int bx0 [300], bx1 [300], by0 [300], by1 [300];
  int str [T][4];
  int merged_f [3], flags_f [3];

  function automatic int lok(int n, int d);
    int x = n % GW, y = n / GW;
    case (d)
      0: return x + 1 < GW;
      1: return y + 1 < GH;
      2: return (x + 1 < GW) && (y + 1 < GH);
      default: return (x > 0) && (y + 1 < GH);
    endcase
  endfunction
  function automatic int ldst(int n, int d);
    case (d) 0: return n + 1; 1: return n + GW; 2: return n + GW + 1; default: return n + GW - 1; endcase
  endfunction
  function automatic int inb(int n, int g);
    int x = n % GW, y = n / GW;
    return x >= bx0[g] && x <= bx1[g] && y >= by0[g] && y <= by1[g];
  endfunction

  task automatic ref_check(int frame);
    int thr [T];
    int kp [T][4];
    int lbl [T];
    int changed;
    for (int n = 0; n < T; n++) for (int d = 0; d < 4; d++) str[n][d] = 0;
    for (int g = 0; g < 300; g++)
      if (bx0[g] != bx1[g] || by0[g] != by1[g])
        for (int n = 0; n < T; n++) for (int d = 0; d < 4; d++) if (lok(n, d)) begin
          int ia = inb(n, g), ib = inb(ldst(n, d), g);
          if (ia && ib) str[n][d]++;
          else if (ia != ib) str[n][d]--;
        end
    for (int n = 0; n < T; n++) begin
      int v [$];
      int m, up, lo, x, y;
      x = n % GW; y = n / GW;
      for (int d = 0; d < 4; d++) if (lok(n, d)) v.push_back(str[n][d]);
      if (x > 0) v.push_back(str[n-1][0]);
      if (y > 0) v.push_back(str[n-GW][1]);
      if (x > 0 && y > 0) v.push_back(str[n-GW-1][2]);
      if (x + 1 < GW && y > 0) v.push_back(str[n-GW+1][3]);
      v.sort();
      m  = (K < v.size()) ? K : v.size();
      lo = v[(m - 1) / 2];
      up = v[v.size() - 1 - (m - 1) / 2];
      thr[n] = (((up - lo) * UTH) >>> 8) + lo;
    end
    for (int n = 0; n < T; n++) for (int d = 0; d < 4; d++)
      kp[n][d] = lok(n, d) && str[n][d] > 0 && str[n][d] >= thr[n] && str[n][d] >= thr[ldst(n, d)];
    for (int n = 0; n < T; n++) lbl[n] = n;
    changed = 1;
    while (changed) begin
      changed = 0;
      for (int n = 0; n < T; n++) for (int d = 0; d < 4; d++) if (kp[n][d]) begin
        int m = ldst(n, d);
        if (lbl[n] != lbl[m]) begin
          int mn = (lbl[n] < lbl[m]) ? lbl[n] : lbl[m];
          lbl[n] = mn; lbl[m] = mn; changed = 1;
        end
      end
    end
    checks++;
    begin
      int bad = 0;
      for (int n = 0; n < T; n++) if (int'(label[n]) != lbl[n]) bad++;
      if (bad) begin failures++; $display("FAIL frame %0d: %0d labels differ", frame, bad); end
    end
  endtask

  task automatic run_frame(int frame);
    int t0;
    @(negedge clk); frame_start = 1;
    @(negedge clk); frame_start = 0;
    for (int g = 0; g < 300; g++) begin
      g_valid = 1; x0 = 3'(bx0[g]); x1 = 3'(bx1[g]); y0 = 3'(by0[g]); y1 = 3'(by1[g]);
      @(negedge clk);
    end
    g_valid = 0;
    group_start = 1; t0 = $time / 10;
    @(negedge clk); group_start = 0;
    while (!done) @(negedge clk);
    $display("frame %0d: %0d groups, %0d flags, %0d links merged, %0d cycles", frame, groups, flags,
             merged, $time / 10 - t0);
    merged_f[frame] = merged; flags_f[frame] = flags;
    ref_check(frame);
  endtask

  initial begin
    restart = 0; frame_start = 0; g_valid = 0; group_start = 0; x0 = 0; x1 = 0; y0 = 0; y1 = 0;
    // clustered boxes: mostly 2x1 / 1x2 / 2x2 footprints
    for (int g = 0; g < 300; g++) begin
      bx0[g] = $urandom_range(0, 6); by0[g] = $urandom_range(0, 6);
      bx1[g] = bx0[g] + (((bx0[g] / 2) % 2 == 0) ? 1 : 0);
      by1[g] = by0[g] + (((by0[g] / 3) % 2 == 1) ? 1 : $urandom_range(0, 1) * (g % 5 == 0));
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_frame(0);
    for (int g = 0; g < 300; g += 4) begin
      bx0[g] = $urandom_range(0, 6); bx1[g] = bx0[g] + 1; by0[g] = $urandom_range(0, 7); by1[g] = by0[g];
    end
    run_frame(1);
    run_frame(2);
    checks += 3;
    if (flags_f[1] == 0) begin failures++; $display("FAIL no deformation flag in frame 1"); end
    if (merged_f[1] >= merged_f[0]) begin failures++; $display("FAIL frame 1 merged %0d >= %0d", merged_f[1], merged_f[0]); end
    if (flags_f[2] != 0 || merged_f[2] != 0) begin failures++; $display("FAIL frame 2 not idle"); end
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
