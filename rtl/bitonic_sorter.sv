// bitonic_sorter: sorts N (key, id) elements into ascending key order.
//
// A bitonic sorting network of N = 2^m elements has m(m+1)/2 stages, each made of
// N/2 compare-exchange units. This sorter holds the N elements in registers and
// applies one stage per clock cycle with N/2 comparators, so a sort takes
// m(m+1)/2 cycles (10 for N = 16). Stage (k, j) compares element i with i^j (i^j > i)
// and orders the pair ascending when (i & k) == 0, descending otherwise.
//
// Interface: pulse `start` with din loaded; `busy` is high while sorting; `done`
// pulses for one cycle, 1 + m(m+1)/2 cycles after start (one load cycle, then the
// stages), when dout holds the sorted elements (dout holds them until the
// next start). Unused positions should be padded with the largest key so they sort last.
// Ties keep no particular order.
//
// Bitonic sorting of each bucket is the accelerator's choice; the register-array,
// one-stage-per-cycle organisation and the bucket size are this design's.
module bitonic_sorter
  import gaucim_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  sort_elem_t din  [N],
  output logic       busy,
  output logic       done,
  output sort_elem_t dout [N]
);

  localparam int unsigned M      = $clog2(N);
  localparam int unsigned STAGES = M * (M + 1) / 2;

  // stage table: log2 of k and j for every stage
  function automatic int stage_k(int s);
    int n = 0;
    for (int kk = 1; kk <= M; kk++)
      for (int jj = kk - 1; jj >= 0; jj--) begin
        if (n == s) return kk;
        n++;
      end
    return 1;
  endfunction
  function automatic int stage_j(int s);
    int n = 0;
    for (int kk = 1; kk <= M; kk++)
      for (int jj = kk - 1; jj >= 0; jj--) begin
        if (n == s) return jj;
        n++;
      end
    return 0;
  endfunction

  logic [$clog2(STAGES+1)-1:0] stage;
  sort_elem_t                  nxt [N];

  always_comb begin
    int   lk, lj, p;
    logic up, swap;
    lk = 1; lj = 0; p = 0; up = 1'b0; swap = 1'b0;
    for (int s = 0; s < int'(STAGES); s++)
      if (int'(stage) == s) begin lk = stage_k(s); lj = stage_j(s); end
    nxt = dout;
    for (int i = 0; i < int'(N); i++) begin
      p = i ^ (1 << lj);
      if (p > i) begin
        up   = ((i >> lk) & 1) == 0;
        swap = up ? (dout[i].key > dout[p].key) : (dout[i].key < dout[p].key);
        if (swap) begin
          nxt[i] = dout[p];
          nxt[p] = dout[i];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      stage <= '0;
      for (int i = 0; i < int'(N); i++) dout[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        dout  <= din;
        busy  <= 1'b1;
        stage <= '0;
      end else if (busy) begin
        dout <= nxt;
        if (int'(stage) == int'(STAGES) - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          stage <= stage + 1'b1;
        end
      end
    end
  end

endmodule
