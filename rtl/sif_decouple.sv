// sif_decouple: Sign-Integer-Fraction split of the exponent argument (combinational).
//
// The exponential e^x is evaluated as 2^x' with x' = x/ln2 (the 1/ln2 factor is folded
// into the stored parameters ahead of time). x' arrives as FP16 and is converted to
// sign-magnitude fixed point with FW = 12 fraction bits, |x'| = I + F.
//   x' >= 0 :  2^x' = 2^I * 2^F            -> int_part = I,      frac = F
//   x' <  0 :  2^x' = 2^(-I-1) * 2^(1-F)   -> int_part = -I - 1, frac = two's complement of F
// When x' < 0 and F = 0 the two's complement is 0 and the -1 is not applied
// (int_part = -I), which keeps the identity exact. The integer part only moves the
// binary point (a shift, or the FP16 exponent); the fraction goes to the LUT stages.
//
// Outputs: int_part (signed), frac (FW bits), underflow (2^x' below the smallest
// normal FP16, 2^-14) and overflow (2^x' at or above 2^16). FP16 subnormal inputs are
// treated as zero. The split itself and the two's complement rule follow the
// accelerator description; the range handling is this design's choice.
module sif_decouple
  import gaucim_pkg::*;
#(
  parameter int unsigned FW = 12
) (
  input  fp16_t              x,
  output logic signed [7:0]  int_part,
  output logic [FW-1:0]  frac,
  output logic               underflow,
  output logic               overflow
);

  logic        sgn;
  logic [4:0]  e;
  logic [10:0] sig;
  logic [31:0] mag;      // |x'| with FW fraction bits
  logic [19:0] ipart;
  logic [FW-1:0] fpart;
  int          sh;

  always_comb begin
    sgn = x[15];
    e   = x[14:10];
    sig = {1'b1, x[9:0]};
    // value = sig * 2^(e-25); with FW fraction bits: sig * 2^(e-25+FW)
    sh  = int'(e) - 25 + int'(FW);
    if (e == 5'd0)       mag = '0;
    else if (e == 5'd31) mag = 32'hFFFF_FFFF;                 // inf / NaN: out of range
    else if (sh >= 0)    mag = 32'(sig) << sh;
    else                 mag = 32'(sig) >> (-sh);
    ipart = mag[FW +: 20];
    fpart = mag[FW-1:0];

    underflow = 1'b0;
    overflow  = 1'b0;
    int_part  = '0;
    frac      = '0;
    if (!sgn) begin
      if (ipart >= 20'd16) overflow = 1'b1;
      else begin
        int_part = 8'(ipart);
        frac     = fpart;
      end
    end else begin
      if (ipart >= 20'd15) underflow = 1'b1;
      else if (fpart == '0) begin
        int_part = -8'(signed'({1'b0, ipart[6:0]}));
        frac     = '0;
        underflow = (ipart > 20'd14);
      end else begin
        int_part = -8'(signed'({1'b0, ipart[6:0]})) - 8'sd1;
        frac     = (~fpart) + 1'b1;
        underflow = (ipart >= 20'd14);
      end
    end
  end

endmodule
