// gaucim_pkg: types and constants shared by the 3D Gaussian splatting accelerator.
//
// Number formats. The compute-in-memory datapath stores and multiplies values that
// all lie in [0,2): exponent look-up entries 2^f, opacities, colours, alpha and
// transmittance. They are held as unsigned fixed point UQ1.15 (16 bits, 1.0 = 0x8000).
// The exponent argument x' and the exponent result are also available as IEEE
// binary16 (FP16), the precision the accelerator is specified for. Depth keys for
// sorting are unsigned 16-bit numbers (a positive FP16 bit pattern orders correctly).
package gaucim_pkg;

  localparam int unsigned WORD_W  = 16;           // stored word / operand width
  localparam int unsigned FRAC_W  = 12;           // fraction bits of the exponent argument
  localparam int unsigned LUT_SEG = 4;            // cascaded LUT stages (Frac[11:9] .. [2:0])
  localparam int unsigned LUT_N   = 8;            // entries per LUT stage
  localparam logic [15:0] FIX_ONE = 16'h8000;     // 1.0 in UQ1.15

  typedef logic [15:0] fix16_t;                   // UQ1.15
  typedef logic [15:0] fp16_t;                    // IEEE binary16
  typedef logic [15:0] depth_t;                   // sort key
  typedef logic [15:0] gid_t;                     // Gaussian identifier

  // Sort element: depth key and Gaussian identifier.
  typedef struct packed {
    depth_t key;
    gid_t   id;
  } sort_elem_t;

  // Per-Gaussian parameters that the pixel pre-processing needs (2D splat after
  // projection and temporal slicing). Signed fixed point, see pixel_preproc.
  typedef struct packed {
    logic signed [15:0] mx;     // projected mean x, Q12.4 pixels
    logic signed [15:0] my;     // projected mean y, Q12.4 pixels
    logic signed [15:0] ca;     // conic a /ln2, Q4.12 per pixel^2
    logic signed [15:0] cb;     // conic b /ln2
    logic signed [15:0] cc;     // conic c /ln2
    logic signed [15:0] mt;     // temporal mean, Q4.12
    logic signed [15:0] lam;    // temporal decay lambda /ln2, Q4.12
  } splat_t;

  // UQ1.15 multiply, truncating; saturates at the largest code when the product is 2 or more.
  function automatic fix16_t fix_mul(fix16_t a, fix16_t b);
    logic [31:0] p;
    p = 32'(a) * 32'(b);
    return p[31] ? 16'hFFFF : p[30:15];
  endfunction

endpackage
