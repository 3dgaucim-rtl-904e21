// aii_sort: bucket sort with adaptive interval initialisation, then bitonic sort
// inside each bucket.
//
// A tile's list of (depth key, Gaussian id) pairs is first spread over NB buckets by
// comparing each key with NB-1 boundaries, then each non-empty bucket is sorted by a
// bitonic_sorter and streamed out, nearest bucket first, giving the tile's list in
// ascending depth. How the boundaries are chosen is the point of the unit:
//   * Phase one (no history for this tile block, e.g. the first frame): the range
//     [depth_min, depth_max] from pre-processing is cut into NB equal intervals.
//   * Phase two (later frames): the boundaries are the previous frame's quantiles.
//     While a tile's sorted list streams out, the keys at ranks floor(i*M/NB),
//     i = 1..NB-1 (M = number of keys) are captured. Tiles are grouped into tile
//     blocks; the quantiles of all tiles of a block are summed and, at frame_end, the
//     block's boundaries become their average. Phase one then is not needed any more.
// Balanced buckets keep every bucket within the sorter size; a key that arrives at a
// full bucket (CAP entries) is dropped and counted in `overflow`.
//
// Interface (one tile at a time):
//   tile_start + tblk        begin a tile of tile block tblk (boundaries are latched)
//   in_valid + in_elem       one element per cycle while in_ready
//   tile_end                 no more elements; sorting starts
//   out_valid/out_elem/out_last/out_bucket  the sorted list (with each key's bucket), one element per cycle; the consumer
//                            must accept every cycle; tile_done pulses at the end
//   frame_end                average the collected quantiles into the boundary table
//                            (NUM_TB cycles, busy high)
//   restart                  forget all boundaries (a new scene: phase one again)
// Status for the tile: used_prev (phase two), overflow (dropped keys), max_occ.
// Timing: from the tile_end cycle to tile_done, 2 + sum over non-empty buckets of
// (13 + bucket size) cycles: select, sorter load, 10 bitonic stages, hand-over, one
// cycle per element. Keys are taken one per cycle.
//
// From the accelerator description: NB = 8 buckets, uniform intervals from min/max
// on frame 0, previous-frame sorted bucket ranges afterwards, averaged per tile block,
// bitonic sort inside buckets, four tiles per tile block. This design's choices: the
// quantile rank rule, the bucket capacity, dropping on overflow, the interface.
module aii_sort
  import gaucim_pkg::*;
#(
  parameter int unsigned NB     = 8,
  parameter int unsigned CAP    = 16,
  parameter int unsigned NUM_TB = 64,
  parameter int unsigned TPB    = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      restart,
  input  depth_t                    depth_min,
  input  depth_t                    depth_max,
  input  logic                      tile_start,
  input  logic [$clog2(NUM_TB)-1:0] tblk,
  input  logic                      in_valid,
  input  sort_elem_t                in_elem,
  output logic                      in_ready,
  input  logic                      tile_end,
  output logic                      out_valid,
  output sort_elem_t                out_elem,
  output logic                      out_last,
  output logic [$clog2(NB)-1:0]     out_bucket,
  output logic                      tile_done,
  input  logic                      frame_end,
  output logic                      busy,
  output logic                      used_prev,
  output logic [15:0]               overflow,
  output logic [$clog2(CAP+1)-1:0]  max_occ
);

  localparam int unsigned LNB  = $clog2(NB);
  localparam int unsigned CW   = $clog2(CAP + 1);
  localparam int unsigned IW   = $clog2(CAP);
  localparam int unsigned MW   = $clog2(NB * CAP + 1);
  localparam int unsigned TBW  = $clog2(NUM_TB);
  localparam int unsigned AW   = 16 + $clog2(TPB) + 2;    // quantile sum width
  localparam int unsigned KW   = $clog2(TPB) + 3;         // tiles counted per block

  typedef enum logic [2:0] {S_IDLE, S_IN, S_SEL, S_SORT, S_EMIT, S_COMMIT} state_t;
  state_t state;

  // boundary table and quantile accumulators
  depth_t           bnd_tab [NUM_TB][NB-1];
  logic             bnd_ok  [NUM_TB];
  logic [AW-1:0]    acc_tab [NUM_TB][NB-1];
  logic [KW-1:0]    acc_cnt [NUM_TB];

  // current tile
  depth_t           cur_bnd [NB-1];
  logic [TBW-1:0]   cur_tb;
  sort_elem_t       bmem    [NB][CAP];
  logic [CW-1:0]    bcnt    [NB];
  logic [MW-1:0]    total;
  logic [LNB-1:0]   cur_b;
  logic [IW-1:0]    eidx;
  logic [MW-1:0]    rank;
  depth_t           qcap    [NB-1];
  logic [TBW-1:0]   cidx;

  // sorter
  logic       s_start, s_busy, s_done;
  sort_elem_t s_din  [CAP];
  sort_elem_t s_dout [CAP];

  // The sorter's busy flag is not needed: the state machine waits for done.
  logic unused_busy;
  assign unused_busy = s_busy;

  bitonic_sorter #(.N(CAP)) u_sorter (
    .clk, .rst_n, .start(s_start), .din(s_din), .busy(s_busy), .done(s_done), .dout(s_dout)
  );

  always_comb begin
    for (int i = 0; i < int'(CAP); i++)
      s_din[i] = (CW'(i) < bcnt[cur_b]) ? bmem[cur_b][i] : '{key: 16'hFFFF, id: 16'hFFFF};
  end

  // bucket of the incoming key
  logic [LNB-1:0] in_bucket;
  always_comb begin
    int n;
    n = 0;
    for (int i = 0; i < int'(NB) - 1; i++) if (in_elem.key >= cur_bnd[i]) n++;
    in_bucket = LNB'(n);
  end

  // uniform boundaries from min/max (phase one)
  depth_t uni_bnd [NB-1];
  always_comb begin
    logic [15:0] span;
    span = (depth_max > depth_min) ? depth_max - depth_min : 16'd0;
    for (int i = 0; i < int'(NB) - 1; i++)
      uni_bnd[i] = depth_min + 16'((32'(span) * 32'(i + 1)) >> LNB);
  end

  // next non-empty bucket at or after cur_b
  logic           sel_found;
  logic [LNB-1:0] sel_b;
  always_comb begin
    sel_found = 1'b0;
    sel_b     = cur_b;
    for (int b = int'(NB) - 1; b >= 0; b--)
      if (b >= int'(cur_b) && bcnt[b] != '0) begin sel_found = 1'b1; sel_b = LNB'(b); end
  end

  assign in_ready = (state == S_IN);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur_tb    <= '0;
      total     <= '0;
      cur_b     <= '0;
      eidx      <= '0;
      rank      <= '0;
      cidx      <= '0;
      s_start   <= 1'b0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_elem  <= '0;
      out_bucket <= '0;
      tile_done <= 1'b0;
      used_prev <= 1'b0;
      overflow  <= '0;
      max_occ   <= '0;
      for (int i = 0; i < int'(NB) - 1; i++) begin cur_bnd[i] <= '0; qcap[i] <= '0; end
      for (int b = 0; b < int'(NB); b++) bcnt[b] <= '0;
      for (int t = 0; t < int'(NUM_TB); t++) begin
        bnd_ok[t]  <= 1'b0;
        acc_cnt[t] <= '0;
        for (int i = 0; i < int'(NB) - 1; i++) begin acc_tab[t][i] <= '0; bnd_tab[t][i] <= '0; end
      end
    end else begin
      s_start   <= 1'b0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      tile_done <= 1'b0;
      if (restart) for (int t = 0; t < int'(NUM_TB); t++) bnd_ok[t] <= 1'b0;

      unique case (state)
        S_IDLE: begin
          if (tile_start) begin
            cur_tb    <= tblk;
            used_prev <= bnd_ok[tblk] && !restart;
            for (int i = 0; i < int'(NB) - 1; i++)
              cur_bnd[i] <= (bnd_ok[tblk] && !restart) ? bnd_tab[tblk][i] : uni_bnd[i];
            for (int b = 0; b < int'(NB); b++) bcnt[b] <= '0;
            total    <= '0;
            overflow <= '0;
            max_occ  <= '0;
            state    <= S_IN;
          end else if (frame_end) begin
            cidx  <= '0;
            state <= S_COMMIT;
          end
        end

        S_IN: begin
          if (in_valid) begin
            if (bcnt[in_bucket] < CW'(CAP)) begin
              bmem[in_bucket][bcnt[in_bucket][IW-1:0]] <= in_elem;
              bcnt[in_bucket] <= bcnt[in_bucket] + 1'b1;
              total <= total + 1'b1;
              if (bcnt[in_bucket] + 1'b1 > max_occ) max_occ <= bcnt[in_bucket] + 1'b1;
            end else begin
              overflow <= overflow + 1'b1;
            end
          end
          if (tile_end) begin
            cur_b <= '0;
            rank  <= '0;
            state <= S_SEL;
          end
        end

        S_SEL: begin
          if (sel_found) begin
            cur_b   <= sel_b;
            s_start <= 1'b1;
            state   <= S_SORT;
          end else begin
            // tile finished: fold its quantiles into the tile block's sums
            if (total != '0) begin
              for (int i = 0; i < int'(NB) - 1; i++) acc_tab[cur_tb][i] <= acc_tab[cur_tb][i] + AW'(qcap[i]);
              if (acc_cnt[cur_tb] != '1) acc_cnt[cur_tb] <= acc_cnt[cur_tb] + 1'b1;
            end
            tile_done <= 1'b1;
            state     <= S_IDLE;
          end
        end

        S_SORT: begin
          if (s_done) begin
            eidx  <= '0;
            state <= S_EMIT;
          end
        end

        S_EMIT: begin
          out_valid <= 1'b1;
          out_elem  <= s_dout[eidx];
          out_bucket <= cur_b;
          out_last  <= (rank == total - 1'b1);
          for (int i = 1; i < int'(NB); i++)
            if (32'(rank) == ((32'(i) * 32'(total)) >> LNB)) qcap[i-1] <= s_dout[eidx].key;
          rank <= rank + 1'b1;
          if (CW'(eidx) == bcnt[cur_b] - 1'b1) begin
            if (cur_b == LNB'(NB - 1)) begin
              cur_b <= cur_b;
              bcnt[cur_b] <= '0;   // mark consumed
            end else begin
              cur_b <= cur_b + 1'b1;
            end
            state <= S_SEL;
          end else begin
            eidx <= eidx + 1'b1;
          end
        end

        S_COMMIT: begin
          if (acc_cnt[cidx] != '0) begin
            for (int i = 0; i < int'(NB) - 1; i++)
              bnd_tab[cidx][i] <= 16'(acc_tab[cidx][i] / AW'(acc_cnt[cidx]));
            bnd_ok[cidx] <= 1'b1;
          end
          acc_cnt[cidx] <= '0;
          for (int i = 0; i < int'(NB) - 1; i++) acc_tab[cidx][i] <= '0;
          if (cidx == TBW'(NUM_TB - 1)) state <= S_IDLE;
          else cidx <= cidx + 1'b1;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
