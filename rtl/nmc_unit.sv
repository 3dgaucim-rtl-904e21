// nmc_unit: near-memory computing unit at the edge of the DCIM macro, one per pixel.
//
// It finishes the front-to-back alpha blending of one pixel,
//   C += (alpha_i * c_i) * T,    T *= (1 - alpha_i),    T starts at 1,
// where alpha_i and alpha_i*c_i (per colour channel) come from the compute-in-memory
// arrays and the transmittance T is kept locally. A contribution flagged `first`
// starts a new pixel (T = 1, C = 0 before it is applied).
//
// Interface: in_valid/first/alpha/ac in; rgb and trans hold the running result and
// are updated the cycle after each valid contribution (out_valid pulses then).
// Numbers are UQ1.15; products truncate, the colour sum saturates at 0xFFFF.
//
// The split of work (alpha and colour products in memory, transmittance and final
// product near memory) follows the accelerator description; the number format,
// the `first` flag and the one-cycle timing are this design's choices.
module nmc_unit
  import gaucim_pkg::*;
#(
  parameter int unsigned CH = 3
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   first,
  input  fix16_t alpha,
  input  fix16_t ac    [CH],
  output logic   out_valid,
  output fix16_t rgb   [CH],
  output fix16_t trans
);

  fix16_t t_cur;
  fix16_t c_cur [CH];

  always_comb begin
    t_cur = first ? FIX_ONE : trans;
    for (int c = 0; c < CH; c++) c_cur[c] = first ? '0 : rgb[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      trans     <= FIX_ONE;
      for (int c = 0; c < CH; c++) rgb[c] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int c = 0; c < CH; c++) begin
          logic [16:0] s;
          s = 17'(c_cur[c]) + 17'(fix_mul(ac[c], t_cur));
          rgb[c] <= s[16] ? 16'hFFFF : s[15:0];
        end
        trans <= fix_mul(t_cur, FIX_ONE - ((alpha > FIX_ONE) ? FIX_ONE : alpha));
      end
    end
  end

endmodule
