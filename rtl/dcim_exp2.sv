// dcim_exp2: pipelined base-2 exponential on compute-in-memory look-up tables.
//
// y = 2^x' for an FP16 argument x'. The argument is split by sif_decouple into an
// integer part and a 12-bit fraction f = f[11:9] f[8:6] f[5:3] f[2:0]. Then
//   2^f = 2^(f[11:9]/8) * 2^(f[8:6]/64) * 2^(f[5:3]/512) * 2^(f[2:0]/4096)
// and each factor is one of 8 entries of a look-up table. Stage s (s = 0..3) is one
// gain-cell DCIM array holding LUT entries k = 0..7 with value 2^(k / 8^(s+1)) in
// UQ1.15; the 3-bit field selects the word and the array multiplies it by the running
// product handed on from the previous stage (stage 0 multiplies by 1.0). The integer
// part travels beside the stages in a short FIFO (a shift register) and is applied at
// the end: as the FP16 exponent of y_fp16 and as a right shift for the fixed-point
// result y_fix (UQ1.15, saturating at 0xFFFF for y >= 2, zero when the shift drops
// every bit).
//
// The tables are written through the lut_* port (entry k of stage s goes to block k/4,
// row k%4 of array s) before use; they are not initialised on reset.
//
// Timing: fully pipelined, one argument per cycle, latency 6 cycles
// (1 decouple register, 4 array stages, 1 output register).
//
// From the accelerator description: base conversion with ln2 folded offline, the
// sign/integer/fraction split with two's complement for negatives, 12 fraction bits,
// four cascaded 3-bit LUT stages of 8 entries, the integer term kept in a FIFO and
// applied as a shift. This design's own choices: UQ1.15 arithmetic in the stages,
// truncating products, FP16 saturation and flush-to-zero, the latency.
module dcim_exp2
  import gaucim_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // LUT load port
  input  logic       lut_we,
  input  logic [1:0] lut_stage,
  input  logic [2:0] lut_idx,
  input  fix16_t     lut_data,
  // argument
  input  logic       in_valid,
  input  fp16_t      x,
  // result
  output logic       out_valid,
  output fp16_t      y_fp16,
  output fix16_t     y_fix
);

  localparam int unsigned NS = LUT_SEG;

  // ---- decouple ----
  logic signed [7:0] sif_int;
  logic [11:0]       sif_frac;
  logic              sif_uf, sif_of;

  sif_decouple #(.FW(12)) u_sif (
    .x(x), .int_part(sif_int), .frac(sif_frac), .underflow(sif_uf), .overflow(sif_of)
  );

  // Side FIFO: integer term, flags and the remaining fraction fields, one entry per stage.
  typedef struct packed {
    logic              v;
    logic signed [7:0] ip;
    logic [11:0]       fr;
    logic              uf;
    logic              of;
  } side_t;

  side_t  side [NS+1];          // side[0]: after decouple; side[s+1]: after stage s
  fix16_t prod [NS+1];          // prod[0] = 1.0; prod[s+1] from array s
  logic   pv   [NS+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      side[0] <= '0;
    end else begin
      side[0] <= '{v: in_valid, ip: sif_int, fr: sif_frac, uf: sif_uf, of: sif_of};
    end
  end

  assign prod[0] = FIX_ONE;
  assign pv[0]   = side[0].v;

  for (genvar s = 0; s < NS; s++) begin : g_stage
    logic [2:0] sel;
    assign sel = side[s].fr[11-3*s -: 3];

    gc_dcim_array #(.BLOCKS(2), .ROWS(4)) u_lut (
      .clk      (clk),
      .rst_n    (rst_n),
      .we       (lut_we && (lut_stage == 2'(s))),
      .wblk     (lut_idx[2]),
      .wrow     (lut_idx[1:0]),
      .wdata    (lut_data),
      .in_valid (pv[s]),
      .rblk     (sel[2]),
      .rrow     (sel[1:0]),
      .operand  (prod[s]),
      .out_valid(pv[s+1]),
      .product  (prod[s+1])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) side[s+1] <= '0;
      else        side[s+1] <= side[s];
    end
  end

  // ---- integer term and format conversion ----
  side_t  fin;
  fix16_t m;
  assign fin = side[NS];
  assign m   = prod[NS];

  fp16_t  fp_n;
  fix16_t fix_n;
  always_comb begin
    logic signed [8:0] ex;
    // m is in [1,2): m = 1.m[14:0]
    ex = 9'(fin.ip) + 9'sd15;
    if (fin.of)       fp_n = 16'h7BFF;
    else if (fin.uf || ex < 9'sd1) fp_n = 16'h0000;
    else              fp_n = {1'b0, ex[4:0], m[14:5]};

    if (fin.of || fin.ip > 8'sd0) fix_n = 16'hFFFF;
    else if (fin.uf || fin.ip < -8'sd15) fix_n = '0;
    else              fix_n = m >> (-fin.ip);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y_fp16    <= '0;
      y_fix     <= '0;
    end else begin
      out_valid <= pv[NS] && fin.v;
      y_fp16    <= fp_n;
      y_fix     <= fix_n;
    end
  end

endmodule
