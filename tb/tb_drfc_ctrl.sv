// tb_drfc_ctrl: builds a random partitioned scene in a DRAM model (4 temporal grids of
// 4x4x4 cubic grids; each grid holds 0-3 full records and 0-2 pointers to records of
// a neighbouring grid), loads the grid table, and renders frames with box-shaped
// frusta at several times. For every frame it checks the visible-grid count, the DRAM
// words read, the pointers skipped and fetched, and that exactly the expected
// Gaussians (by id, with multiplicity) are forwarded. The words a conventional
// culler would read (every grid of every temporal grid) are printed for comparison.
module tb_drfc_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int TG = 4, CD = 4, NC = 64, NG = 256, REC_W = 8;
  logic tab_we, start, busy, done, req_valid, req_ready, rd_valid, rec_valid, rec_sop;
  logic [7:0] tab_idx;
  logic [31:0] tab_start, tab_end, req_addr, n_words;
  logic [15:0] t, req_len, n_visible, n_skipped, n_fetched;
  logic signed [15:0] pn [6][3];
  logic signed [31:0] pd [6];
  logic [63:0] rd_data, rec_data;
  int checks = 0, failures = 0;

  drfc_ctrl dut (.clk, .rst_n, .tab_we, .tab_idx, .tab_start, .tab_end, .start, .t, .pn, .pd,
                 .busy, .done, .req_valid, .req_ready, .req_addr, .req_len, .rd_valid, .rd_data,
                 .rec_valid, .rec_sop, .rec_data, .n_visible, .n_words, .n_skipped, .n_fetched);
  dram_model #(.WORDS(65536), .LAT(6)) u_dram (.clk, .req_valid, .req_ready, .req_addr, .req_len,
                                               .rd_valid, .rd_data);

  int gs [NG], ge [NG];
  int nfull [NG];
  int fid [NG][3];              // ids of full records
  int faddr [NG][3];
  int nptr [NG];
  int pgrid [NG][2], pslot [NG][2];
  int got [int];
  always @(posedge clk) if (rec_valid && rec_sop) got[int'(rec_data[31:0])] = got.exists(int'(rec_data[31:0])) ? got[int'(rec_data[31:0])] + 1 : 1;

  task automatic frame(int tt, int bx0, int bx1, int by0, int by1, int bz0, int bz1);
    int tgi, vis [NC], evis, ewords, eskip, efetch, conv;
    int expct [int];
    int ok;
    t = 16'(tt);
    pn = '{'{16384, 0, 0}, '{-16384, 0, 0}, '{0, 16384, 0}, '{0, -16384, 0}, '{0, 0, 16384}, '{0, 0, -16384}};
    pd = '{-16384 * bx0, 16384 * bx1, -16384 * by0, 16384 * by1, -16384 * bz0, 16384 * bz1};
    tgi = (tt * TG) >> 16;
    evis = 0;
    for (int c = 0; c < NC; c++) begin
      int x = c % CD, y = (c / CD) % CD, z = c / (CD * CD);
      vis[c] = ((x + 1) * 16384 >= bx0) && (x * 16384 <= bx1) && ((y + 1) * 16384 >= by0) &&
               (y * 16384 <= by1) && ((z + 1) * 16384 >= bz0) && (z * 16384 <= bz1);
      evis += vis[c];
    end
    ewords = 0; eskip = 0; efetch = 0;
    for (int c = 0; c < NC; c++) if (vis[c]) begin
      int g = tgi * NC + c;
      ewords += ge[g] - gs[g];
      for (int k = 0; k < nfull[g]; k++) expct[fid[g][k]] = expct.exists(fid[g][k]) ? expct[fid[g][k]] + 1 : 1;
      for (int k = 0; k < nptr[g]; k++) begin
        if (vis[pgrid[g][k] - tgi * NC]) eskip++;
        else begin
          int id = fid[pgrid[g][k]][pslot[g][k]];
          efetch++; ewords += REC_W;
          expct[id] = expct.exists(id) ? expct[id] + 1 : 1;
        end
      end
    end
    conv = 0;
    for (int g = 0; g < NG; g++) conv += nfull[g] * REC_W;
    got.delete();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks += 5;
    if (int'(n_visible) != evis) begin failures++; $display("FAIL visible %0d/%0d", n_visible, evis); end
    if (int'(n_words) != ewords) begin failures++; $display("FAIL words %0d/%0d", n_words, ewords); end
    if (int'(n_skipped) != eskip) begin failures++; $display("FAIL skipped %0d/%0d", n_skipped, eskip); end
    if (int'(n_fetched) != efetch) begin failures++; $display("FAIL fetched %0d/%0d", n_fetched, efetch); end
    ok = (got.size() == expct.size());
    foreach (expct[k]) if (!got.exists(k) || got[k] != expct[k]) ok = 0;
    if (!ok) begin failures++; $display("FAIL forwarded Gaussians differ (%0d ids vs %0d)", got.size(), expct.size()); end
    $display("t=%0d: %0d visible grids, %0d words read (all Gaussians: %0d), %0d pointers skipped, %0d fetched",
             tt, n_visible, n_words, conv, n_skipped, n_fetched);
  endtask

  initial begin
    int a, id;
    tab_we = 0; start = 0; tab_idx = 0; tab_start = 0; tab_end = 0; t = 0;
    pn = '{default: '0}; pd = '{default: '0};
    // scene: full records first, pointers point into the previous cubic grid of the same temporal grid
    a = 16; id = 1;
    for (int g = 0; g < NG; g++) begin
      nfull[g] = $urandom_range(0, 3);
      nptr[g]  = ((g % NC) > 0 && nfull[g - 1] > 0) ? $urandom_range(0, 2) : 0;
      gs[g] = a;
      for (int k = 0; k < nfull[g]; k++) begin
        fid[g][k] = id; faddr[g][k] = a;
        u_dram.mem[a] = {1'b0, 31'd0, 32'(id)};
        for (int w = 1; w < REC_W; w++) u_dram.mem[a + w] = {32'(id), 32'(w)};
        a += REC_W; id++;
      end
      for (int k = 0; k < nptr[g]; k++) begin
        pgrid[g][k] = g - 1; pslot[g][k] = $urandom_range(0, nfull[g - 1] - 1);
        u_dram.mem[a] = {1'b1, 15'd0, 8'((g - 1) % NC), 8'd0, 32'(faddr[g - 1][pslot[g][k]])};
        a += 1;
      end
      ge[g] = a;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < NG; g++) begin
      @(negedge clk);
      tab_we = 1; tab_idx = 8'(g); tab_start = 32'(gs[g]); tab_end = 32'(ge[g]);
    end
    @(negedge clk); tab_we = 0;
    frame(1000,  0, 30000, 0, 65535, 0, 65535);
    frame(20000, 20000, 40000, 10000, 50000, 0, 30000);
    frame(40000, 40000, 65535, 40000, 65535, 40000, 65535);
    frame(60000, 0, 65535, 0, 65535, 0, 65535);
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
