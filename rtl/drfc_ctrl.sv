// drfc_ctrl: DRAM-access reduction frustum culling controller.
//
// The scene is partitioned offline: Gaussians are first put into TG temporal grids by
// their temporal mean, and each temporal grid into CD x CD x CD cubic grids by their
// position mean. Each cubic grid's Gaussians are stored contiguously in DRAM, so the
// on-chip grid table only needs the start and end word address of every grid
// (TG*CD^3 entries, loaded once through tab_we).
//
// A grid's DRAM region is a sequence of records. A full record is REC_W 64-bit words
// whose first word has bit 63 clear. A Gaussian whose footprint spans neighbouring
// grids is stored in full only in its central grid; each neighbouring grid holds a
// one-word pointer record: bit 63 set, bits 47:40 the central grid (within the
// temporal grid) and bits 31:0 the word address of the full record.
//
// For a frame (start, time t, six frustum planes) the controller
//  1. picks the temporal grid of t and tests each of its cubic grids against the
//     frustum without touching DRAM (CULL, one grid per cycle): a grid is visible
//     unless its corner farthest along some plane normal is behind that plane;
//  2. reads every visible grid's region in one burst and forwards its full records;
//  3. for each pointer met, skips it when its central grid is visible (the record is
//     already being read through that grid), otherwise queues it, and afterwards reads
//     the queued records one by one.
// Records leave on rec_valid/rec_data/rec_sop (first word of a record); the consumer
// must take one word per cycle. Counters: visible grids, DRAM words read, pointers
// skipped and pointers fetched. done pulses at the end.
//
// Geometry: positions are unsigned 16-bit scene coordinates, cubic grid i spans
// [i*2^16/CD, (i+1)*2^16/CD); a plane is n.p + d >= 0 inside, with n signed Q1.14 and
// d signed 32-bit in the same units as n.p. t is an unsigned 16-bit fraction of the
// sequence length.
// DRAM port: a request (addr, len words) is accepted when req_ready; the words return
// in order on rd_valid/rd_data; the controller waits for all of them before the next
// request.
//
// From the accelerator description: the temporal-then-cubic partitioning, grid size 4,
// start/end addresses only in the table, contiguous storage, full data in the central
// grid with pointers in neighbours, the skip rule for pointers. This design's choices:
// record and pointer format, coordinate formats, the single temporal grid chosen by
// t, the plane test, deferring unskipped pointers, the queue depth PQ.
module drfc_ctrl #(
  parameter int unsigned TG    = 4,
  parameter int unsigned CD    = 4,
  parameter int unsigned REC_W = 8,
  parameter int unsigned PQ    = 64,
  localparam int unsigned NC   = CD * CD * CD,
  localparam int unsigned NG   = TG * NC,
  localparam int unsigned GIW  = $clog2(NG),
  localparam int unsigned CIW  = $clog2(NC)
) (
  input  logic               clk,
  input  logic               rst_n,
  // grid table load
  input  logic               tab_we,
  input  logic [GIW-1:0]     tab_idx,
  input  logic [31:0]        tab_start,
  input  logic [31:0]        tab_end,
  // frame
  input  logic               start,
  input  logic [15:0]        t,
  input  logic signed [15:0] pn [6][3],
  input  logic signed [31:0] pd [6],
  output logic               busy,
  output logic               done,
  // DRAM read port
  output logic               req_valid,
  input  logic               req_ready,
  output logic [31:0]        req_addr,
  output logic [15:0]        req_len,
  input  logic               rd_valid,
  input  logic [63:0]        rd_data,
  // Gaussian records towards pre-processing
  output logic               rec_valid,
  output logic               rec_sop,
  output logic [63:0]        rec_data,
  // statistics of the last frame
  output logic [15:0]        n_visible,
  output logic [31:0]        n_words,
  output logic [15:0]        n_skipped,
  output logic [15:0]        n_fetched
);

  localparam int unsigned CS = 65536 / CD;      // cubic grid edge in scene units

  typedef enum logic [2:0] {S_IDLE, S_CULL, S_NEXT, S_REQ, S_RECV, S_PREQ, S_PRECV, S_DONE} state_t;
  state_t state;

  logic [31:0]   tab_s [NG];
  logic [31:0]   tab_e [NG];
  logic          vis   [NC];
  logic [$clog2(TG)-1:0] tg;
  logic [CIW:0]  gi;                 // grid being culled / read
  logic [31:0]   pq    [PQ];
  logic [$clog2(PQ+1)-1:0] pq_n, pq_r;
  logic [15:0]   remain;             // words left in the current request
  logic [$clog2(REC_W+1)-1:0] in_rec;  // words left of the current full record

  always_ff @(posedge clk) begin
    if (tab_we) begin
      tab_s[tab_idx] <= tab_start;
      tab_e[tab_idx] <= tab_end;
    end
  end

  // ---- frustum test of cubic grid gi ----
  logic vis_n;
  always_comb begin
    logic [17:0] cx, cy, cz;
    logic signed [47:0] pdist;
    logic [16:0] c [3];
    cx = 18'(gi[CIW-1:0] % CIW'(CD));
    cy = 18'((gi[CIW-1:0] / CIW'(CD)) % CIW'(CD));
    cz = 18'(gi[CIW-1:0] / CIW'(CD * CD));
    vis_n = 1'b1;
    for (int p = 0; p < 6; p++) begin
      // corner farthest along the normal
      c[0] = 17'((pn[p][0] >= 0) ? (cx + 1'b1) * 18'(CS) : cx * 18'(CS));
      c[1] = 17'((pn[p][1] >= 0) ? (cy + 1'b1) * 18'(CS) : cy * 18'(CS));
      c[2] = 17'((pn[p][2] >= 0) ? (cz + 1'b1) * 18'(CS) : cz * 18'(CS));
      pdist = 48'(pn[p][0]) * 48'(signed'({1'b0, c[0]})) + 48'(pn[p][1]) * 48'(signed'({1'b0, c[1]}))
           + 48'(pn[p][2]) * 48'(signed'({1'b0, c[2]})) + 48'(pd[p]);
      if (pdist < 0) vis_n = 1'b0;
    end
  end

  logic [GIW-1:0] gsel;
  assign gsel = GIW'({tg, gi[CIW-1:0]});

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      tg        <= '0;
      gi        <= '0;
      pq_n      <= '0;
      pq_r      <= '0;
      remain    <= '0;
      in_rec    <= '0;
      done      <= 1'b0;
      req_valid <= 1'b0;
      req_addr  <= '0;
      req_len   <= '0;
      rec_valid <= 1'b0;
      rec_sop   <= 1'b0;
      rec_data  <= '0;
      n_visible <= '0;
      n_words   <= '0;
      n_skipped <= '0;
      n_fetched <= '0;
      for (int i = 0; i < int'(NC); i++) vis[i] <= 1'b0;
    end else begin
      done      <= 1'b0;
      rec_valid <= 1'b0;
      rec_sop   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          tg        <= $clog2(TG)'((32'(t) * 32'(TG)) >> 16);
          gi        <= '0;
          pq_n      <= '0;
          pq_r      <= '0;
          n_visible <= '0;
          n_words   <= '0;
          n_skipped <= '0;
          n_fetched <= '0;
          state     <= S_CULL;
        end

        S_CULL: begin
          vis[gi[CIW-1:0]] <= vis_n;
          if (vis_n) n_visible <= n_visible + 1'b1;
          if (gi == (CIW+1)'(NC - 1)) begin gi <= '0; state <= S_NEXT; end
          else gi <= gi + 1'b1;
        end

        // next visible grid with a non-empty region
        S_NEXT: begin
          if (gi == (CIW+1)'(NC)) state <= (pq_n != '0) ? S_PREQ : S_DONE;
          else if (vis[gi[CIW-1:0]] && tab_e[gsel] > tab_s[gsel]) begin
            req_valid <= 1'b1;
            req_addr  <= tab_s[gsel];
            req_len   <= 16'(tab_e[gsel] - tab_s[gsel]);
            remain    <= 16'(tab_e[gsel] - tab_s[gsel]);
            in_rec    <= '0;
            state     <= S_REQ;
          end else gi <= gi + 1'b1;
        end

        S_REQ: if (req_ready) begin req_valid <= 1'b0; state <= S_RECV; end

        S_RECV: if (rd_valid) begin
          n_words <= n_words + 1'b1;
          remain  <= remain - 1'b1;
          if (in_rec != '0) begin                    // payload of a full record
            rec_valid <= 1'b1;
            rec_data  <= rd_data;
            in_rec    <= in_rec - 1'b1;
          end else if (!rd_data[63]) begin            // header of a full record
            rec_valid <= 1'b1;
            rec_sop   <= 1'b1;
            rec_data  <= rd_data;
            in_rec    <= ($clog2(REC_W+1))'(REC_W - 1);
          end else begin                              // pointer record
            if (vis[rd_data[40 +: CIW]]) n_skipped <= n_skipped + 1'b1;
            else if (pq_n < ($clog2(PQ+1))'(PQ)) begin
              pq[pq_n[$clog2(PQ)-1:0]] <= rd_data[31:0];
              pq_n <= pq_n + 1'b1;
            end
          end
          if (remain == 16'd1) begin
            gi    <= gi + 1'b1;
            state <= S_NEXT;
          end
        end

        S_PREQ: begin
          if (!req_valid) begin
            req_valid <= 1'b1;
            req_addr  <= pq[pq_r[$clog2(PQ)-1:0]];
            req_len   <= 16'(REC_W);
            remain    <= 16'(REC_W);
          end else if (req_ready) begin
            req_valid <= 1'b0;
            n_fetched <= n_fetched + 1'b1;
            pq_r      <= pq_r + 1'b1;
            state     <= S_PRECV;
          end
        end

        S_PRECV: if (rd_valid) begin
          n_words   <= n_words + 1'b1;
          remain    <= remain - 1'b1;
          rec_valid <= 1'b1;
          rec_sop   <= (remain == 16'(REC_W));
          rec_data  <= rd_data;
          if (remain == 16'd1) state <= (pq_r == pq_n) ? S_DONE : S_PREQ;
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
