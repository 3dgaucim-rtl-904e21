// tb_gaucim_top: end-to-end run of the accelerator top at its default sizes
// (12 DCIM macros = 36 pixel lanes, 256 KB buffer, 4x4x4x4 culling grids, 8 buckets,
// 8x8 tile blocks). One pass through every mechanism:
//   * frustum culling of a partitioned scene held in a DRAM model, with pointer records
//     skipped (central grid visible) and fetched (central grid culled);
//   * tile grouping over two frames, the second with moved footprints (deformation
//     flags, selective regrouping);
//   * sorting a skewed tile list on frame 0 (uniform intervals, bucket overflow) and on
//     frame 1 (intervals learnt from frame 0, no overflow), twice in frame 1;
//   * buffer lookups of every sorted Gaussian in its depth segment (misses, then hits);
//   * blending 36 pixels against 6 Gaussians in the DCIM macros.
// Values are checked against reference models; each mechanism is counted and a
// mechanism that never happened counts as a failure.
module tb_gaucim_top;
  import gaucim_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NC = 64, NG = 256, REC_W = 8, LANES = 36, T = 64;

  logic restart = 0;
  // DR-FC
  logic tab_we = 0; logic [7:0] tab_idx = 0; logic [31:0] tab_start = 0, tab_end = 0;
  logic fc_start = 0; logic [15:0] fc_t = 0;
  logic signed [15:0] fc_pn [6][3]; logic signed [31:0] fc_pd [6];
  logic fc_busy, fc_done, dram_req_valid, dram_req_ready, dram_rd_valid, rec_valid, rec_sop;
  logic [31:0] dram_req_addr, fc_words; logic [15:0] dram_req_len, fc_visible, fc_skipped, fc_fetched;
  logic [63:0] dram_rd_data, rec_data;
  // ATG
  logic tg_frame_start = 0, tg_valid = 0, tg_group_start = 0, tg_busy, tg_done;
  logic [2:0] tg_x0 = 0, tg_x1 = 0, tg_y0 = 0, tg_y1 = 0;
  logic [5:0] tg_label [T]; logic [15:0] tg_flags, tg_merged, tg_groups;
  // sort
  depth_t depth_min = 0, depth_max = 16'hFFFF;
  logic so_tile_start = 0, so_in_valid = 0, so_tile_end = 0, so_frame_end = 0;
  logic [5:0] so_tblk = 0; sort_elem_t so_in_elem = '0;
  logic so_in_ready, so_out_valid, so_out_last, so_tile_done, so_busy, so_used_prev;
  sort_elem_t so_out_elem; logic [2:0] so_out_bucket; logic [15:0] so_overflow; logic [4:0] so_max_occ;
  // buffer
  logic buf_ready, buf_lk_done, buf_lk_hit; logic [11:0] buf_lk_line;
  logic buf_wr_valid = 0, buf_rd_valid = 0; logic [11:0] buf_wr_line = 0, buf_rd_line = 0;
  logic [2:0] buf_wr_word = 0, buf_rd_word = 0; logic [63:0] buf_wr_data = 0, buf_rd_data;
  logic [31:0] buf_hits, buf_misses;
  // DCIM
  logic cim_we = 0; logic [2:0] cim_warr = 0; logic [5:0] cim_wblk = 0; logic [1:0] cim_wrow = 0;
  fix16_t cim_wdata = 0; logic cim_valid = 0, cim_first = 0;
  logic signed [15:0] cim_u [LANES], cim_v [LANES]; logic signed [15:0] cim_t = 0;
  splat_t cim_g = '0; logic [7:0] cim_slot = 0;
  logic cim_out_valid; fix16_t cim_rgb [LANES][3]; fix16_t cim_trans [LANES];

  gaucim_top dut (.*);

  dram_model #(.WORDS(65536), .LAT(6)) u_dram (.clk, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_addr(dram_req_addr), .req_len(dram_req_len), .rd_valid(dram_rd_valid), .rd_data(dram_rd_data));

  int checks = 0, failures = 0;
  int n_cull = 0, n_skip = 0, n_fetch = 0, n_ovf = 0, n_adapt = 0, n_flag = 0, n_merge = 0;
  int n_hit = 0, n_miss = 0, n_blend = 0, n_rec = 0;

  always @(posedge clk) if (rec_valid && rec_sop) n_rec++;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- DR-FC ----------------
  task automatic run_culling();
    int a = 16, id = 1, nfull [NG], gs [NG], ge [NG], faddr [NG][3], nptr [NG], pg [NG][2];
    int vis [NC], ewords = 0, eskip = 0, efetch = 0, erec = 0;
    for (int g = 0; g < NG; g++) begin
      nfull[g] = $urandom_range(1, 3);
      nptr[g]  = ((g % NC) > 0) ? $urandom_range(0, 2) : 0;
      gs[g] = a;
      for (int k = 0; k < nfull[g]; k++) begin
        faddr[g][k] = a;
        u_dram.mem[a] = {1'b0, 31'd0, 32'(id)};
        for (int w = 1; w < REC_W; w++) u_dram.mem[a + w] = {32'(id), 32'(w)};
        a += REC_W; id++;
      end
      for (int k = 0; k < nptr[g]; k++) begin
        pg[g][k] = g - 1;
        u_dram.mem[a] = {1'b1, 15'd0, 8'((g - 1) % NC), 8'd0, 32'(faddr[g - 1][0])};
        a++;
      end
      ge[g] = a;
    end
    for (int g = 0; g < NG; g++) begin
      @(negedge clk); tab_we = 1; tab_idx = 8'(g); tab_start = 32'(gs[g]); tab_end = 32'(ge[g]);
    end
    @(negedge clk); tab_we = 0;
    // frustum: box x in [20000,50000], y in [0,40000], z in [10000,65535]; time grid 1
    fc_pn = '{'{16384, 0, 0}, '{-16384, 0, 0}, '{0, 16384, 0}, '{0, -16384, 0}, '{0, 0, 16384}, '{0, 0, -16384}};
    fc_pd = '{-16384 * 20000, 16384 * 50000, 0, 16384 * 40000, -16384 * 10000, 16384 * 65535};
    fc_t  = 16'd20000;
    for (int c = 0; c < NC; c++) begin
      int x = c % 4, y = (c / 4) % 4, z = c / 16;
      vis[c] = ((x + 1) * 16384 >= 20000) && (x * 16384 <= 50000) && (y * 16384 <= 40000) &&
               ((z + 1) * 16384 >= 10000);
    end
    for (int c = 0; c < NC; c++) if (vis[c]) begin
      int g = NC + c;
      ewords += ge[g] - gs[g]; erec += nfull[g];
      for (int k = 0; k < nptr[g]; k++)
        if (vis[pg[g][k] - NC]) eskip++; else begin efetch++; ewords += REC_W; erec++; end
    end
    n_rec = 0;
    @(negedge clk); fc_start = 1;
    @(negedge clk); fc_start = 0;
    while (!fc_done) @(negedge clk);
    @(negedge clk);
    chk(int'(fc_words) == ewords, "culling: DRAM words read");
    chk(int'(fc_skipped) == eskip && int'(fc_fetched) == efetch, "culling: pointer skip/fetch");
    chk(n_rec == erec, "culling: records forwarded");
    n_cull  += NC - int'(fc_visible);
    n_skip  += fc_skipped;
    n_fetch += fc_fetched;
    $display("culling: %0d of %0d grids visible, %0d DRAM words (whole scene %0d), %0d pointers skipped, %0d fetched",
             fc_visible, NC, fc_words, a - 16, fc_skipped, fc_fetched);
  endtask

  // ---------------- ATG ----------------
  task automatic run_grouping(int frame);
    @(negedge clk); tg_frame_start = 1;
    @(negedge clk); tg_frame_start = 0;
    for (int g = 0; g < 200; g++) begin
      int x, y;
      x = (g * 7) % 7; y = (g * 3) % 8;
      if (frame == 1 && g % 5 == 0) begin x = (g * 5) % 7; y = (g * 11) % 7; end
      tg_valid = 1; tg_x0 = 3'(x); tg_x1 = 3'(x + 1); tg_y0 = 3'(y); tg_y1 = 3'(y);
      if (g % 3 == 0 && y < 7) tg_y1 = 3'(y + 1);
      @(negedge clk);
    end
    tg_valid = 0; tg_group_start = 1;
    @(negedge clk); tg_group_start = 0;
    while (!tg_done) @(negedge clk);
    begin
      int ok = 1;
      for (int n = 0; n < T; n++) if (tg_label[n] > 6'(n) || tg_label[tg_label[n]] != tg_label[n]) ok = 0;
      chk(ok, "grouping: labels are roots of their groups");
    end
    n_flag  += tg_flags;
    n_merge += tg_merged;
    $display("grouping frame %0d: %0d groups, %0d deformation flags, %0d links merged", frame, tg_groups, tg_flags, tg_merged);
  endtask

  // ---------------- AII-Sort + buffer ----------------
  sort_elem_t outq [$];
  always @(posedge clk) if (so_out_valid) outq.push_back(so_out_elem);
  always @(posedge clk) if (buf_lk_done) begin if (buf_lk_hit) n_hit++; else n_miss++; end

  task automatic run_tile(int frame);
    int ok;
    outq.delete();
    @(negedge clk); so_tile_start = 1; so_tblk = 6'd0;
    @(negedge clk); so_tile_start = 0;
    for (int i = 0; i < 48; i++) begin
      so_in_valid = 1;
      so_in_elem = '{key: 16'(30000 + ((i * 2731) % 6000)), id: 16'(i)};
      @(negedge clk);
    end
    so_in_valid = 0; so_tile_end = 1;
    @(negedge clk); so_tile_end = 0;
    while (!so_tile_done) @(negedge clk);
    repeat (2) @(negedge clk);
    ok = (outq.size() + int'(so_overflow) == 48);
    for (int i = 1; i < outq.size(); i++) if (outq[i].key < outq[i-1].key) ok = 0;
    chk(ok, "sort: ascending and complete");
    if (so_overflow != 0) n_ovf++;
    if (so_used_prev) n_adapt++;
    $display("sort frame %0d: %0d sorted, %0d dropped, adaptive=%0d", frame, outq.size(), so_overflow, so_used_prev);
  endtask

  // ---------------- DCIM ----------------
  task automatic wr(int arr, int blk, int row, logic [15:0] d);
    @(negedge clk); cim_we = 1; cim_warr = 3'(arr); cim_wblk = 6'(blk); cim_wrow = 2'(row); cim_wdata = d;
  endtask

  real expr [LANES][3], expt [LANES];
  task automatic run_blend();
    real opa [6], col [6][3];
    splat_t gs [6];
    for (int s = 0; s < 4; s++) for (int k = 0; k < 8; k++) wr(s, k / 4, k % 4, lut_value(s, k));
    for (int i = 0; i < 6; i++) begin
      logic [15:0] o;
      o = 16'(8000 + 4000 * i); opa[i] = fix_to_real(o); wr(4, i / 4, i % 4, o);
      for (int c = 0; c < 3; c++) begin
        o = 16'(5000 * (c + 1) + 1000 * i); col[i][c] = fix_to_real(o);
        wr(5 + c, i / 4, i % 4, o);
      end
    end
    @(negedge clk); cim_we = 0;
    for (int l = 0; l < LANES; l++) begin expt[l] = 1.0; for (int c = 0; c < 3; c++) expr[l][c] = 0.0; end
    for (int i = 0; i < 6; i++) begin
      gs[i] = '{mx: 16'(40 + 30 * i), my: 16'(48), ca: 16'(600 + 100 * i), cb: 16'(20), cc: 16'(500),
                mt: 16'(2048), lam: 16'(3000)};
      for (int l = 0; l < LANES; l++) begin
        cim_u[l] = 16'(l * 16); cim_v[l] = 16'(40);
      end
      cim_t = 16'(2100);
      for (int l = 0; l < LANES; l++) begin
        real xr, al;
        xr = fp16_to_real(real_to_fp16(ref_xprime(cim_u[l], cim_v[l], cim_t, gs[i].mx, gs[i].my,
                                                  gs[i].ca, gs[i].cb, gs[i].cc, gs[i].mt, gs[i].lam)));
        al = (2.0 ** xr) * opa[i];
        for (int c = 0; c < 3; c++) expr[l][c] += al * col[i][c] * expt[l];
        expt[l] *= (1.0 - al);
      end
      @(negedge clk);
      cim_valid = 1; cim_first = (i == 0); cim_g = gs[i]; cim_slot = 8'(i);
    end
    @(negedge clk); cim_valid = 0;
    repeat (12) @(negedge clk);
    begin
      int ok = 1;
      for (int l = 0; l < LANES; l++) begin
        if (absr(fix_to_real(cim_trans[l]) - expt[l]) > 0.004) ok = 0;
        for (int c = 0; c < 3; c++) if (absr(fix_to_real(cim_rgb[l][c]) - expr[l][c]) > 0.004) ok = 0;
        if (expt[l] < 0.999) n_blend++;
      end
      chk(ok, "blend: colour and transmittance of all 36 lanes");
      $display("blend: lane 0 rgb %f %f %f T %f", fix_to_real(cim_rgb[0][0]), fix_to_real(cim_rgb[0][1]),
               fix_to_real(cim_rgb[0][2]), fix_to_real(cim_trans[0]));
    end
  endtask

  initial begin
    fc_pn = '{default: '0}; fc_pd = '{default: '0};
    cim_u = '{default: '0}; cim_v = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (!buf_ready) @(negedge clk);
    run_culling();
    run_grouping(0);
    run_grouping(1);
    run_tile(0);
    @(negedge clk); so_frame_end = 1;
    @(negedge clk); so_frame_end = 0;
    while (so_busy) @(negedge clk);
    run_tile(1);
    run_tile(1);
    run_blend();
    $display("mechanisms: culled grids %0d, pointers skipped %0d, pointers fetched %0d, bucket overflows %0d, adaptive sorts %0d, deformation flags %0d, links merged %0d, buffer hits %0d, misses %0d, blended pixels %0d",
             n_cull, n_skip, n_fetch, n_ovf, n_adapt, n_flag, n_merge, n_hit, n_miss, n_blend);
    chk(n_cull > 0, "mechanism: grids culled");
    chk(n_skip > 0, "mechanism: pointer skipped");
    chk(n_fetch > 0, "mechanism: pointer fetched");
    chk(n_ovf > 0, "mechanism: bucket overflow (uniform intervals)");
    chk(n_adapt > 0, "mechanism: adaptive intervals");
    chk(n_flag > 0, "mechanism: deformation flag");
    chk(n_merge > 0, "mechanism: union-find merge");
    chk(n_hit > 0, "mechanism: buffer hit");
    chk(n_miss > 0, "mechanism: buffer miss");
    chk(n_blend > 0, "mechanism: blending");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
