// atg_grouping: adaptive tile grouping with knowledge of the previous frame.
//
// The screen is a GW x GH grid of tile blocks. Every block is linked to its eight
// neighbours; each link (stored once, as the E, S, SE and SW link of its upper/left
// block) carries a signed connection strength. The unit works in three steps per frame.
//
// 1. Intersection testing. For every Gaussian that covers two or more blocks the
//    caller gives its block bounding box (x0..x1, y0..y1). Links with both ends inside
//    the box are enhanced (+1), links with exactly one end inside are suppressed (-1),
//    the rest are idle. All links update in parallel, one Gaussian per cycle.
// 2. Threshold check. For every block the K highest and K lowest strengths of its
//    links are found; their medians are the block's upper and lower bound and
//        threshold = (upper - lower) * UTH / 256 + lower.
//    A link is kept when its strength is positive and reaches the thresholds of both
//    its blocks. One block per cycle.
// 3. Grouping with a union-find forest (parent pointers, the smaller index is the
//    root). First frame (or after restart): every block starts alone and every kept
//    link is merged. Later frames: a link whose kept/removed decision differs from the
//    previous frame raises a deformation flag. Groups that lost a link are dissolved
//    (their blocks start alone again); all other groups keep their previous shape.
//    Only links that were newly kept or touch a dissolved block are merged.
//    Finally each block's label (its root) is written to `label`.
//
// Interface: frame_start clears the strengths; g_valid + box feeds step 1 (accepted
// while idle); group_start runs steps 2 and 3 (busy high), done pulses at the end.
// Counters for the last grouping: flags (deformation flags), merged (links taken
// through union-find), groups (number of groups).
// Timing: step 2 takes GW*GH cycles, step 3 one cycle per link slot (4*GW*GH)
// plus one per pointer hop, per merged link and per block.
//
// From the accelerator description: tile-to-tile connection strengths enhanced on
// shared boundaries and suppressed on others, threshold equation with K highest and
// K lowest medians and user threshold 0.5, union-find grouping, deformation flags
// and regrouping only of flagged regions, block-level (tile block) links, the
// eight-neighbour links drawn in the figures. This design's choices: K = 3, the
// +1/-1 steps, which Gaussians count, the per-block threshold, the keep rule, the
// grid size, dissolving whole groups on a lost link.
module atg_grouping #(
  parameter int unsigned GW  = 8,
  parameter int unsigned GH  = 8,
  parameter int unsigned K   = 3,
  parameter int unsigned UTH = 128,                 // user threshold, Q0.8 (0.5)
  localparam int unsigned T  = GW * GH,
  localparam int unsigned NW = $clog2(T),
  localparam int unsigned XW = $clog2(GW),
  localparam int unsigned YW = $clog2(GH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          restart,
  input  logic          frame_start,
  input  logic          g_valid,
  input  logic [XW-1:0] x0,
  input  logic [XW-1:0] x1,
  input  logic [YW-1:0] y0,
  input  logic [YW-1:0] y1,
  input  logic          group_start,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] label [T],
  output logic [15:0]   flags,
  output logic [15:0]   merged,
  output logic [15:0]   groups
);

  localparam int unsigned E  = 4 * T;
  localparam int unsigned EW = $clog2(E);

  typedef logic signed [15:0] str_t;

  // ---- link geometry ----
  function automatic logic link_ok(int n, int d);
    int x, y;
    x = n % int'(GW); y = n / int'(GW);
    case (d)
      0: return x + 1 < int'(GW);
      1: return y + 1 < int'(GH);
      2: return (x + 1 < int'(GW)) && (y + 1 < int'(GH));
      default: return (x > 0) && (y + 1 < int'(GH));
    endcase
  endfunction
  function automatic int link_dst(int n, int d);
    case (d)
      0: return n + 1;
      1: return n + int'(GW);
      2: return n + int'(GW) + 1;
      default: return n + int'(GW) - 1;
    endcase
  endfunction

  str_t strength [T][4];
  logic keep_prev [T][4];
  logic have_prev;
  str_t thr [T];

  // ---- step 1: intersection testing ----
  function automatic logic in_box(int n, logic [XW-1:0] ax0, logic [XW-1:0] ax1,
                                  logic [YW-1:0] ay0, logic [YW-1:0] ay1);
    int x, y;
    x = n % int'(GW); y = n / int'(GW);
    return (x >= int'(ax0)) && (x <= int'(ax1)) && (y >= int'(ay0)) && (y <= int'(ay1));
  endfunction

  function automatic str_t sat_add(str_t a, int inc);
    if (inc > 0 && a == 16'sh7FFF) return a;
    if (inc < 0 && a == -16'sh8000) return a;
    return a + 16'(inc);
  endfunction

  logic multi;
  assign multi = (x1 != x0) || (y1 != y0);

  // ---- step 2: per-block threshold (combinational for block `tcur`) ----
  typedef enum logic [3:0] {S_IDLE, S_THR, S_MARK, S_RESET, S_SCAN, S_FA, S_FB, S_COMP, S_CF,
                            S_DONE} state_t;
  state_t state;

  logic [NW-1:0] tcur;      // block index in S_THR / S_COMP
  logic [EW-1:0] ecur;      // link slot in S_MARK / S_SCAN

  str_t inc_val [8];
  logic inc_ok  [8];
  always_comb begin
    int n;
    n = int'(tcur);
    for (int d = 0; d < 4; d++) begin
      inc_ok[d]  = link_ok(n, d);
      inc_val[d] = inc_ok[d] ? strength[n][d] : '0;
    end
    // links owned by neighbours: W (neighbour's E), N (S), NW (SE), NE (SW)
    inc_ok[4]  = (n % int'(GW)) > 0;
    inc_val[4] = inc_ok[4] ? strength[(n - 1) % int'(T)][0] : '0;
    inc_ok[5]  = n >= int'(GW);
    inc_val[5] = inc_ok[5] ? strength[(n - int'(GW) + int'(T)) % int'(T)][1] : '0;
    inc_ok[6]  = (n % int'(GW)) > 0 && n >= int'(GW);
    inc_val[6] = inc_ok[6] ? strength[(n - int'(GW) - 1 + int'(T)) % int'(T)][2] : '0;
    inc_ok[7]  = (n % int'(GW)) + 1 < int'(GW) && n >= int'(GW);
    inc_val[7] = inc_ok[7] ? strength[(n - int'(GW) + 1 + int'(T)) % int'(T)][3] : '0;
  end

  str_t thr_n;
  always_comb begin
    int   cnt, rk_hi, rk_lo, hi_sel, lo_sel;
    str_t upper, lower;
    logic signed [31:0] diff;
    cnt = 0;
    for (int i = 0; i < 8; i++) if (inc_ok[i]) cnt++;
    // median of the K highest: the element of descending rank (min(K,cnt)-1)/2
    hi_sel = ((int'(K) < cnt ? int'(K) : cnt) - 1) / 2;
    lo_sel = hi_sel;
    upper = '0; lower = '0;
    for (int i = 0; i < 8; i++) begin
      rk_hi = 0; rk_lo = 0;
      for (int j = 0; j < 8; j++) if (inc_ok[i] && inc_ok[j] && j != i) begin
        if (inc_val[j] > inc_val[i] || (inc_val[j] == inc_val[i] && j < i)) rk_hi++;
        if (inc_val[j] < inc_val[i] || (inc_val[j] == inc_val[i] && j < i)) rk_lo++;
      end
      if (inc_ok[i] && rk_hi == hi_sel) upper = inc_val[i];
      if (inc_ok[i] && rk_lo == lo_sel) lower = inc_val[i];
    end
    diff  = (32'(upper) - 32'(lower)) * 32'(UTH);
    thr_n = 16'((diff >>> 8) + 32'(lower));
  end

  // keep decision of every link (parallel)
  logic keep [T][4];
  always_comb begin
    for (int n = 0; n < int'(T); n++)
      for (int d = 0; d < 4; d++) begin
        int m;
        m = link_dst(n, d) % int'(T);
        keep[n][d] = link_ok(n, d) && (strength[n][d] > 16'sd0) &&
                     (strength[n][d] >= thr[n]) && (strength[n][d] >= thr[m]);
      end
  end

  // ---- step 3: union-find ----
  logic [NW-1:0] parent [T];
  logic          dirty_lbl [T];
  logic [NW-1:0] fa, fb;           // pointer chase cursors

  logic [NW-1:0] e_a, e_b;
  logic [1:0]    e_d;
  logic          e_ok, e_keep, e_flag, e_take;
  always_comb begin
    e_a    = NW'(ecur >> 2);
    e_d    = ecur[1:0];
    e_ok   = link_ok(int'(e_a), int'(e_d));
    e_b    = NW'(link_dst(int'(e_a), int'(e_d)) % int'(T));
    e_keep = keep[e_a][e_d];
    e_flag = have_prev && e_ok && (e_keep != keep_prev[e_a][e_d]);
    // merge: every kept link on a fresh frame; else newly kept links and kept links
    // touching a dissolved group
    e_take = e_ok && e_keep &&
             (!have_prev || e_flag || dirty_lbl[label[e_a]] || dirty_lbl[label[e_b]]);
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      have_prev <= 1'b0;
      tcur      <= '0;
      ecur      <= '0;
      fa        <= '0;
      fb        <= '0;
      done      <= 1'b0;
      flags     <= '0;
      merged    <= '0;
      groups    <= '0;
      for (int n = 0; n < int'(T); n++) begin
        thr[n]       <= '0;
        parent[n]    <= NW'(n);
        label[n]     <= NW'(n);
        dirty_lbl[n] <= 1'b0;
        for (int d = 0; d < 4; d++) begin strength[n][d] <= '0; keep_prev[n][d] <= 1'b0; end
      end
    end else begin
      done <= 1'b0;
      if (restart) have_prev <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (frame_start) begin
            for (int n = 0; n < int'(T); n++) for (int d = 0; d < 4; d++) strength[n][d] <= '0;
          end else if (g_valid && multi) begin
            for (int n = 0; n < int'(T); n++)
              for (int d = 0; d < 4; d++) if (link_ok(n, d)) begin
                logic ia, ib;
                ia = in_box(n, x0, x1, y0, y1);
                ib = in_box(link_dst(n, d) % int'(T), x0, x1, y0, y1);
                if (ia && ib)      strength[n][d] <= sat_add(strength[n][d], 1);
                else if (ia ^ ib)  strength[n][d] <= sat_add(strength[n][d], -1);
              end
          end else if (group_start) begin
            tcur   <= '0;
            flags  <= '0;
            merged <= '0;
            groups <= '0;
            state  <= S_THR;
          end
        end

        S_THR: begin
          thr[tcur] <= thr_n;
          if (tcur == NW'(T - 1)) begin
            ecur  <= '0;
            for (int n = 0; n < int'(T); n++) dirty_lbl[n] <= 1'b0;
            state <= (have_prev && !restart) ? S_MARK : S_RESET;
            if (restart) have_prev <= 1'b0;
          end else tcur <= tcur + 1'b1;
        end

        // later frames: count flags, mark groups that lost a link
        S_MARK: begin
          if (e_flag) begin
            flags <= flags + 1'b1;
            if (!e_keep) dirty_lbl[label[e_a]] <= 1'b1;
          end
          if (ecur == EW'(E - 1)) state <= S_RESET;
          else ecur <= ecur + 1'b1;
        end

        S_RESET: begin
          for (int n = 0; n < int'(T); n++)
            if (!have_prev || dirty_lbl[label[n]]) parent[n] <= NW'(n);
            else                                   parent[n] <= label[n];
          ecur  <= '0;
          state <= S_SCAN;
        end

        S_SCAN: begin
          if (e_take) begin
            fa    <= e_a;
            fb    <= e_b;
            state <= S_FA;
          end else if (ecur == EW'(E - 1)) begin
            tcur  <= '0;
            state <= S_COMP;
          end else ecur <= ecur + 1'b1;
        end

        S_FA: begin                    // find root of a
          if (parent[fa] != fa) fa <= parent[fa];
          else state <= S_FB;
        end

        S_FB: begin                    // find root of b, then link
          if (parent[fb] != fb) fb <= parent[fb];
          else begin
            if (fa != fb) begin
              merged <= merged + 1'b1;
              if (fa < fb) parent[fb] <= fa;
              else         parent[fa] <= fb;
            end
            if (ecur == EW'(E - 1)) begin
              tcur  <= '0;
              state <= S_COMP;
            end else begin
              ecur  <= ecur + 1'b1;
              state <= S_SCAN;
            end
          end
        end

        S_COMP: begin                  // label every block with its root
          fa    <= tcur;
          state <= S_CF;
        end

        S_CF: begin
          if (parent[fa] != fa) fa <= parent[fa];
          else begin
            label[tcur] <= fa;
            if (fa == tcur) groups <= groups + 1'b1;
            if (tcur == NW'(T - 1)) state <= S_DONE;
            else begin
              tcur  <= tcur + 1'b1;
              state <= S_COMP;
            end
          end
        end

        S_DONE: begin
          for (int n = 0; n < int'(T); n++) for (int d = 0; d < 4; d++) keep_prev[n][d] <= keep[n][d];
          have_prev <= 1'b1;
          done      <= 1'b1;
          state     <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
