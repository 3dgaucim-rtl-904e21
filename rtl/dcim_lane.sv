// dcim_lane: one pixel lane of the DCIM macro: the blending dataflow of one pixel.
//
// For each (pixel, Gaussian) pair the lane computes
//   x'    = pre-processing of (u,v,t) against the Gaussian      (pixel_preproc, 1 cycle)
//   P     = 2^x'                                                (dcim_exp2, 4 arrays, 6 cycles)
//   alpha = P * opacity_i                                       (opacity array, 1 cycle)
//   ac_k  = alpha * c_i,k  for k = R,G,B                        (3 colour arrays, 1 cycle)
//   NMC   : C += ac * T,  T *= (1 - alpha)                      (nmc_unit, 1 cycle)
// so a lane uses eight gain-cell arrays. The opacity and view-dependent colour of up
// to 256 resident Gaussians sit in the opacity and colour arrays; `slot` = {block,row}
// names the Gaussian. The Gaussian's slot travels down a delay line alongside the
// exponent pipeline so it meets the arrays at the right cycle.
//
// Write port (broadcast from the macro): warr selects the array: 0..3 exponent LUT
// stage (entry = {wblk[0], wrow}), 4 opacity, 5..7 colour R, G, B.
// Timing: one pair per cycle, result (out_valid, rgb, trans) 10 cycles after in_valid.
//
// The chain P -> opacity -> colour -> NMC and the use of arrays for the LUTs, the
// opacity and the colours follow the accelerator description; the eight-array lane,
// the slot addressing and the timing are this design's choices.
module dcim_lane
  import gaucim_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // broadcast write port
  input  logic               we,
  input  logic [2:0]         warr,
  input  logic [5:0]         wblk,
  input  logic [1:0]         wrow,
  input  fix16_t             wdata,
  // one (pixel, Gaussian) pair per cycle
  input  logic               in_valid,
  input  logic               first,        // first Gaussian of this pixel
  input  logic signed [15:0] u,
  input  logic signed [15:0] v,
  input  logic signed [15:0] t,
  input  splat_t             g,
  input  logic [7:0]         slot,
  // blended pixel
  output logic               out_valid,
  output fix16_t             rgb [3],
  output fix16_t             trans
);

  localparam int unsigned D_EXP = 7;    // preproc + exponent latency

  // ---- pre-processing and exponent ----
  logic  pp_valid;
  fp16_t pp_x;
  pixel_preproc u_pre (
    .clk, .rst_n, .in_valid, .u, .v, .t, .g, .out_valid(pp_valid), .x(pp_x)
  );

  logic   ex_valid;
  fp16_t  ex_fp16;
  fix16_t ex_fix;
  dcim_exp2 u_exp (
    .clk, .rst_n,
    .lut_we   (we && (warr < 3'd4)),
    .lut_stage(warr[1:0]),
    .lut_idx  ({wblk[0], wrow}),
    .lut_data (wdata),
    .in_valid (pp_valid),
    .x        (pp_x),
    .out_valid(ex_valid),
    .y_fp16   (ex_fp16),
    .y_fix    (ex_fix)
  );

  // slot and first flag delay line, matched to the exponent pipeline
  logic [7:0] slot_d  [D_EXP+1];
  logic       first_d [D_EXP+2];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= D_EXP; i++) slot_d[i] <= '0;
      for (int i = 0; i <= D_EXP + 1; i++) first_d[i] <= 1'b0;
    end else begin
      slot_d[0]  <= slot;
      first_d[0] <= first;
      for (int i = 1; i <= D_EXP; i++) slot_d[i] <= slot_d[i-1];
      for (int i = 1; i <= D_EXP + 1; i++) first_d[i] <= first_d[i-1];
    end
  end

  // ---- alpha = P * opacity ----
  logic   a_valid;
  fix16_t alpha;
  gc_dcim_array u_opa (
    .clk, .rst_n,
    .we(we && (warr == 3'd4)), .wblk, .wrow, .wdata,
    .in_valid(ex_valid), .rblk(slot_d[D_EXP-1][7:2]), .rrow(slot_d[D_EXP-1][1:0]),
    .operand(ex_fix), .out_valid(a_valid), .product(alpha)
  );

  // ---- alpha * colour ----
  logic   c_valid [3];
  fix16_t ac      [3];
  fix16_t alpha_d;
  for (genvar k = 0; k < 3; k++) begin : g_col
    gc_dcim_array u_col (
      .clk, .rst_n,
      .we(we && (warr == 3'(5 + k))), .wblk, .wrow, .wdata,
      .in_valid(a_valid), .rblk(slot_d[D_EXP][7:2]), .rrow(slot_d[D_EXP][1:0]),
      .operand(alpha), .out_valid(c_valid[k]), .product(ac[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) alpha_d <= '0;
    else        alpha_d <= alpha;
  end

  // ---- transmittance and accumulation ----
  nmc_unit #(.CH(3)) u_nmc (
    .clk, .rst_n,
    .in_valid(c_valid[0]), .first(first_d[D_EXP+1]), .alpha(alpha_d), .ac(ac),
    .out_valid, .rgb, .trans
  );

  // The FP16 form of P is not needed on this path (the arrays take UQ1.15).
  logic unused;
  assign unused = ^ex_fp16 ^ c_valid[1] ^ c_valid[2];

endmodule
