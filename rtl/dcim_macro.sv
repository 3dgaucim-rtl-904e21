// dcim_macro: DCIM macro of ARRAYS gain-cell arrays computing several pixels at once.
//
// The macro is cut into LANES = ARRAYS/8 pixel lanes (dcim_lane); all lanes work on
// the same Gaussian in the same cycle, each for its own pixel (u[l], v[l]). The write
// port is broadcast to every lane, so each lane holds identical LUT, opacity and
// colour contents. Per-lane results come out 10 cycles after in_valid.
//
// 24 arrays per macro, each of 64 blocks of 64 bits (12 KB per macro) follow the
// accelerator description; the three-lane split of the 24 arrays is this design's.
module dcim_macro
  import gaucim_pkg::*;
#(
  parameter int unsigned ARRAYS = 24,
  localparam int unsigned LANES = ARRAYS / 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               we,
  input  logic [2:0]         warr,
  input  logic [5:0]         wblk,
  input  logic [1:0]         wrow,
  input  fix16_t             wdata,
  input  logic               in_valid,
  input  logic               first,
  input  logic signed [15:0] u [LANES],
  input  logic signed [15:0] v [LANES],
  input  logic signed [15:0] t,
  input  splat_t             g,
  input  logic [7:0]         slot,
  output logic               out_valid,
  output fix16_t             rgb   [LANES][3],
  output fix16_t             trans [LANES]
);

  logic lane_valid [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    dcim_lane u_lane (
      .clk, .rst_n, .we, .warr, .wblk, .wrow, .wdata,
      .in_valid, .first, .u(u[l]), .v(v[l]), .t, .g, .slot,
      .out_valid(lane_valid[l]), .rgb(rgb[l]), .trans(trans[l])
    );
  end

  assign out_valid = lane_valid[0];

endmodule
