// pixel_preproc: per-pixel pre-processing ahead of the DCIM macro.
//
// For pixel (u,v) at time t and one projected, time-sliced Gaussian it forms the
// argument of the merged spatial-temporal Gaussian
//   P(u,v,t) = exp(-q/2),  q = a dx^2 + 2 b dx dy + c dy^2 + lambda (t - mu_t)^2,
//   dx = u - mx, dy = v - my,
// in base 2: the conic (a,b,c) and lambda are stored already divided by ln2, so
// x' = -q/2 and P = 2^x'. x' is delivered in FP16 (truncated mantissa, saturating
// at -65504 when |x'| is too large, zero below 2^-14).
//
// Formats: u, v, mx, my Q12.4 pixels; a, b, c, lambda Q4.12; t, mu_t Q4.12.
// The sum is kept exactly in 64-bit fixed point with 20 fraction bits.
// Timing: one register stage, one pixel per cycle.
//
// The merged exponent and the offline 1/ln2 folding follow the accelerator
// description; the fixed-point formats and this unit's structure are this design's.
module pixel_preproc
  import gaucim_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [15:0] u,
  input  logic signed [15:0] v,
  input  logic signed [15:0] t,
  input  splat_t             g,
  output logic               out_valid,
  output fp16_t              x
);

  logic signed [16:0] dx, dy, dt;
  logic signed [63:0] q;       // Q.20
  fp16_t              xn;

  function automatic fp16_t neg_half_to_fp16(logic signed [63:0] qv);
    // value = -qv * 2^-21
    logic        s;
    logic [63:0] m;
    int          p;
    int          ex;
    logic [63:0] norm;
    s = !qv[63];                    // x' = -q/2: positive q gives negative x'
    m = qv[63] ? 64'(-qv) : 64'(qv);
    if (m == '0) return 16'h0000;
    p = 0;
    for (int i = 0; i < 64; i++) if (m[i]) p = i;
    ex = p - 21;                    // unbiased exponent
    if (ex > 15)  return {s, 15'h7BFF};
    if (ex < -14) return 16'h0000;
    norm = m << (63 - p);           // leading one at bit 63
    return {s, 5'(ex + 15), norm[62:53]};
  endfunction

  always_comb begin
    logic signed [33:0] dxx, dxy, dyy;
    logic signed [33:0] dtt;
    dx  = 17'(u) - 17'(g.mx);
    dy  = 17'(v) - 17'(g.my);
    dt  = 17'(t) - 17'(g.mt);
    dxx = 34'(dx) * 34'(dx);        // Q.8
    dxy = 34'(dx) * 34'(dy);
    dyy = 34'(dy) * 34'(dy);
    dtt = 34'(dt) * 34'(dt);        // Q.24
    q = 64'(g.ca) * 64'(dxx) + 64'sd2 * 64'(g.cb) * 64'(dxy) + 64'(g.cc) * 64'(dyy)   // Q.20
      + ((64'(g.lam) * 64'(dtt)) >>> 16);                                         // Q.36 -> Q.20
    xn = neg_half_to_fp16(q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      x         <= '0;
    end else begin
      out_valid <= in_valid;
      x         <= xn;
    end
  end

endmodule
