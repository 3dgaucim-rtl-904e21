// tb_pixel_preproc: random pixels and Gaussians; the FP16 argument x' must match
// -q/2 computed in real arithmetic to FP16 precision (truncation), with the
// saturation and flush-to-zero ranges checked separately.
module tb_pixel_preproc;
  import gaucim_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic signed [15:0] u, v, t;
  splat_t g;
  fp16_t  x;
  int checks = 0, failures = 0;

  pixel_preproc dut (.clk, .rst_n, .in_valid, .u, .v, .t, .g, .out_valid, .x);

  initial begin
    real xr, xg;
    in_valid = 0; u = 0; v = 0; t = 0; g = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      in_valid = 1;
      u = 16'($urandom_range(0, 64 * 16)); v = 16'($urandom_range(0, 64 * 16));
      g.mx = 16'($urandom_range(0, 64 * 16)); g.my = 16'($urandom_range(0, 64 * 16));
      g.ca = 16'($urandom_range(1, 2000)); g.cc = 16'($urandom_range(1, 2000));
      g.cb = 16'(int'($urandom_range(0, 1000)) - 500);
      g.mt = 16'($urandom_range(0, 4096)); t = 16'($urandom_range(0, 4096));
      g.lam = 16'($urandom_range(0, 20000));
      if (i < 5) begin u = g.mx; v = g.my; t = g.mt; end   // centre: x' = 0
      @(negedge clk);
      in_valid = 0;
      xr = ref_xprime(u, v, t, g.mx, g.my, g.ca, g.cb, g.cc, g.mt, g.lam);
      xg = fp16_to_real(x);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no valid"); end
      else if (xr < -65504.0) begin
        if (x != 16'hFBFF) begin failures++; $display("FAIL saturation %f %h", xr, x); end
      end else if (absr(xr) < 2.0 ** -14) begin
        if (xg != 0.0) begin failures++; $display("FAIL zero %f %f", xr, xg); end
      end else if (absr(xg - xr) > absr(xr) * (2.0 ** -9)) begin
        failures++; $display("FAIL x' exp %f got %f", xr, xg);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
