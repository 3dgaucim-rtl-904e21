// gaucim_top: top level of the 3D Gaussian splatting accelerator.
//
// The accelerator renders static and dynamic (4D) Gaussian scenes on an edge device.
// Its blocks, in dataflow order:
//   drfc_ctrl    frustum-culls coarse temporal/cubic grids on chip and reads only the
//                visible grids' Gaussians from DRAM (DRAM port and the fetched records
//                are ports of the top: the DRAM and the Gaussian pre-processing that
//                consumes the records are outside this RTL);
//   atg_grouping groups tile blocks by how Gaussians span them, from the footprints
//                that pre-processing reports (ports);
//   aii_sort     depth-sorts each tile's list with adaptive bucket intervals;
//   seg_cache    the 256 KB Gaussian buffer, split into one segment per depth bucket:
//                each element leaving the sorter is looked up in the segment of its
//                bucket (hit/miss reported); records are written in from outside;
//   dcim_macro   the compute-in-memory macros (exponent, opacity, colour, blending)
//                with their near-memory units, NUM_MACROS of them side by side.
// The pieces between these blocks that the accelerator description does not give
// (Gaussian projection and colour evaluation, tile binning, the blending sequencer)
// connect through the top's ports.
//
// Default sizes: 4 temporal grids of 4x4x4 cubic grids, 8 sort buckets, tile blocks of
// 4 tiles on an 8x8 block grid, 256 KB buffer, 12 DCIM macros of 24 arrays (144 KB,
// the dynamic-scene configuration; 4 macros, 48 KB, for static scenes).
module gaucim_top
  import gaucim_pkg::*;
#(
  parameter int unsigned TG         = 4,
  parameter int unsigned CD         = 4,
  parameter int unsigned REC_W      = 8,
  parameter int unsigned NB         = 8,
  parameter int unsigned CAP        = 16,
  parameter int unsigned GW         = 8,
  parameter int unsigned GH         = 8,
  parameter int unsigned BUF_KB     = 256,
  parameter int unsigned NUM_MACROS = 12,
  localparam int unsigned NG        = TG * CD * CD * CD,
  localparam int unsigned NTB       = GW * GH,
  localparam int unsigned LANES     = 3 * NUM_MACROS,
  localparam int unsigned LINES     = BUF_KB * 1024 / (REC_W * 8)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       restart,          // new scene: forget frame history
  // ---- DR-FC: grid table, frame request, DRAM, fetched records ----
  input  logic                       tab_we,
  input  logic [$clog2(NG)-1:0]      tab_idx,
  input  logic [31:0]                tab_start,
  input  logic [31:0]                tab_end,
  input  logic                       fc_start,
  input  logic [15:0]                fc_t,
  input  logic signed [15:0]         fc_pn [6][3],
  input  logic signed [31:0]         fc_pd [6],
  output logic                       fc_busy,
  output logic                       fc_done,
  output logic                       dram_req_valid,
  input  logic                       dram_req_ready,
  output logic [31:0]                dram_req_addr,
  output logic [15:0]                dram_req_len,
  input  logic                       dram_rd_valid,
  input  logic [63:0]                dram_rd_data,
  output logic                       rec_valid,
  output logic                       rec_sop,
  output logic [63:0]                rec_data,
  output logic [15:0]                fc_visible,
  output logic [31:0]                fc_words,
  output logic [15:0]                fc_skipped,
  output logic [15:0]                fc_fetched,
  // ---- ATG: footprints and grouping ----
  input  logic                       tg_frame_start,
  input  logic                       tg_valid,
  input  logic [$clog2(GW)-1:0]      tg_x0,
  input  logic [$clog2(GW)-1:0]      tg_x1,
  input  logic [$clog2(GH)-1:0]      tg_y0,
  input  logic [$clog2(GH)-1:0]      tg_y1,
  input  logic                       tg_group_start,
  output logic                       tg_busy,
  output logic                       tg_done,
  output logic [$clog2(NTB)-1:0]     tg_label [NTB],
  output logic [15:0]                tg_flags,
  output logic [15:0]                tg_merged,
  output logic [15:0]                tg_groups,
  // ---- AII-Sort ----
  input  depth_t                     depth_min,
  input  depth_t                     depth_max,
  input  logic                       so_tile_start,
  input  logic [$clog2(NTB)-1:0]     so_tblk,
  input  logic                       so_in_valid,
  input  sort_elem_t                 so_in_elem,
  output logic                       so_in_ready,
  input  logic                       so_tile_end,
  output logic                       so_out_valid,
  output sort_elem_t                 so_out_elem,
  output logic                       so_out_last,
  output logic [$clog2(NB)-1:0]      so_out_bucket,
  output logic                       so_tile_done,
  input  logic                       so_frame_end,
  output logic                       so_busy,
  output logic                       so_used_prev,
  output logic [15:0]                so_overflow,
  output logic [$clog2(CAP+1)-1:0]   so_max_occ,
  // ---- Gaussian buffer (lookups come from the sorter output) ----
  output logic                       buf_ready,
  output logic                       buf_lk_done,
  output logic                       buf_lk_hit,
  output logic [$clog2(LINES)-1:0]   buf_lk_line,
  input  logic                       buf_wr_valid,
  input  logic [$clog2(LINES)-1:0]   buf_wr_line,
  input  logic [$clog2(REC_W)-1:0]   buf_wr_word,
  input  logic [63:0]                buf_wr_data,
  input  logic                       buf_rd_valid,
  input  logic [$clog2(LINES)-1:0]   buf_rd_line,
  input  logic [$clog2(REC_W)-1:0]   buf_rd_word,
  output logic [63:0]                buf_rd_data,
  output logic [31:0]                buf_hits,
  output logic [31:0]                buf_misses,
  // ---- DCIM macros ----
  input  logic                       cim_we,
  input  logic [2:0]                 cim_warr,
  input  logic [5:0]                 cim_wblk,
  input  logic [1:0]                 cim_wrow,
  input  fix16_t                     cim_wdata,
  input  logic                       cim_valid,
  input  logic                       cim_first,
  input  logic signed [15:0]         cim_u [LANES],
  input  logic signed [15:0]         cim_v [LANES],
  input  logic signed [15:0]         cim_t,
  input  splat_t                     cim_g,
  input  logic [7:0]                 cim_slot,
  output logic                       cim_out_valid,
  output fix16_t                     cim_rgb   [LANES][3],
  output fix16_t                     cim_trans [LANES]
);

  drfc_ctrl #(.TG(TG), .CD(CD), .REC_W(REC_W)) u_drfc (
    .clk, .rst_n,
    .tab_we, .tab_idx, .tab_start, .tab_end,
    .start(fc_start), .t(fc_t), .pn(fc_pn), .pd(fc_pd), .busy(fc_busy), .done(fc_done),
    .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_addr(dram_req_addr),
    .req_len(dram_req_len), .rd_valid(dram_rd_valid), .rd_data(dram_rd_data),
    .rec_valid, .rec_sop, .rec_data,
    .n_visible(fc_visible), .n_words(fc_words), .n_skipped(fc_skipped), .n_fetched(fc_fetched)
  );

  atg_grouping #(.GW(GW), .GH(GH)) u_atg (
    .clk, .rst_n, .restart, .frame_start(tg_frame_start), .g_valid(tg_valid),
    .x0(tg_x0), .x1(tg_x1), .y0(tg_y0), .y1(tg_y1), .group_start(tg_group_start),
    .busy(tg_busy), .done(tg_done), .label(tg_label), .flags(tg_flags), .merged(tg_merged),
    .groups(tg_groups)
  );

  aii_sort #(.NB(NB), .CAP(CAP), .NUM_TB(NTB)) u_sort (
    .clk, .rst_n, .restart, .depth_min, .depth_max,
    .tile_start(so_tile_start), .tblk(so_tblk), .in_valid(so_in_valid), .in_elem(so_in_elem),
    .in_ready(so_in_ready), .tile_end(so_tile_end), .out_valid(so_out_valid),
    .out_elem(so_out_elem), .out_last(so_out_last), .out_bucket(so_out_bucket),
    .tile_done(so_tile_done), .frame_end(so_frame_end), .busy(so_busy),
    .used_prev(so_used_prev), .overflow(so_overflow), .max_occ(so_max_occ)
  );

  // Each sorted Gaussian is looked up in the buffer segment of its depth bucket.
  seg_cache #(.KB(BUF_KB), .NSEG(NB), .REC_W(REC_W)) u_buf (
    .clk, .rst_n,
    .lk_valid(so_out_valid), .lk_seg(so_out_bucket), .lk_gid(32'(so_out_elem.id)),
    .lk_done(buf_lk_done), .lk_hit(buf_lk_hit), .lk_line(buf_lk_line),
    .wr_valid(buf_wr_valid), .wr_line(buf_wr_line), .wr_word(buf_wr_word), .wr_data(buf_wr_data),
    .rd_valid(buf_rd_valid), .rd_line(buf_rd_line), .rd_word(buf_rd_word), .rd_data(buf_rd_data),
    .hits(buf_hits), .misses(buf_misses), .ready(buf_ready)
  );

  logic mac_valid [NUM_MACROS];
  for (genvar m = 0; m < NUM_MACROS; m++) begin : g_macro
    logic signed [15:0] mu [3];
    logic signed [15:0] mv [3];
    fix16_t             mrgb [3][3];
    fix16_t             mtr  [3];
    for (genvar l = 0; l < 3; l++) begin : g_l
      assign mu[l] = cim_u[3 * m + l];
      assign mv[l] = cim_v[3 * m + l];
      assign cim_rgb[3 * m + l]   = mrgb[l];
      assign cim_trans[3 * m + l] = mtr[l];
    end
    dcim_macro #(.ARRAYS(24)) u_macro (
      .clk, .rst_n, .we(cim_we), .warr(cim_warr), .wblk(cim_wblk), .wrow(cim_wrow),
      .wdata(cim_wdata), .in_valid(cim_valid), .first(cim_first), .u(mu), .v(mv), .t(cim_t),
      .g(cim_g), .slot(cim_slot), .out_valid(mac_valid[m]), .rgb(mrgb), .trans(mtr)
    );
  end
  assign cim_out_valid = mac_valid[0];

endmodule
