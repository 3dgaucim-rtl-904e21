// tb_nmc_unit: feeds sequences of (alpha, alpha*c) contributions for several pixels and
// compares colour and transmittance with a bit-exact UQ1.15 reference of
// C += ac*T, T *= (1-alpha), restarted by `first`.
module tb_nmc_unit;
  import gaucim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   in_valid, first, out_valid;
  fix16_t alpha, trans;
  fix16_t ac [3];
  fix16_t rgb [3];
  int checks = 0, failures = 0;

  nmc_unit dut (.clk, .rst_n, .in_valid, .first, .alpha, .ac, .out_valid, .rgb, .trans);

  initial begin
    fix16_t rt, rc [3];
    in_valid = 0; first = 0; alpha = 0; ac = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int px = 0; px < 20; px++) begin
      rt = FIX_ONE; rc = '{default: '0};
      for (int gi = 0; gi < 12; gi++) begin
        @(negedge clk);
        in_valid = 1; first = (gi == 0);
        alpha = 16'($urandom_range(0, 32768));
        for (int c = 0; c < 3; c++) ac[c] = fix_mul(alpha, 16'($urandom_range(0, 32768)));
        for (int c = 0; c < 3; c++) begin
          int s;
          s = int'(rc[c]) + int'(fix_mul(ac[c], rt));
          rc[c] = (s > 65535) ? 16'hFFFF : 16'(s);
        end
        rt = fix_mul(rt, FIX_ONE - alpha);
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid || trans != rt || rgb[0] != rc[0] || rgb[1] != rc[1] || rgb[2] != rc[2]) begin
          failures++;
          $display("FAIL px %0d g %0d T %h/%h R %h/%h", px, gi, trans, rt, rgb[0], rc[0]);
        end
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
