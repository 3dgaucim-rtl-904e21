// tb_sif_decouple: checks the sign/integer/fraction split of FP16 arguments against a
// real-valued reference: 2^int_part * 2^(frac/4096) must equal 2^x (to the 12-bit
// fraction), and the range flags must match the argument's range.
module tb_sif_decouple;
  import tb_util_pkg::*;

  logic [15:0]       x;
  logic signed [7:0] ip;
  logic [11:0]       fr;
  logic              uf, of;
  int checks = 0, failures = 0;

  sif_decouple dut (.x(x), .int_part(ip), .frac(fr), .underflow(uf), .overflow(of));

  task automatic check_val(real v);
    real xr, recon, err;
    x  = real_to_fp16(v);
    #1;
    xr = fp16_to_real(x);
    checks++;
    if (xr >= 16.0) begin
      if (!of) begin failures++; $display("FAIL overflow flag x=%f", xr); end
    end else if (xr <= -15.0) begin
      if (!uf) begin failures++; $display("FAIL underflow flag x=%f", xr); end
    end else if (xr > -14.0) begin
      recon = real'(ip) + real'(fr) / 4096.0;
      err   = absr(recon - xr);
      if (err > 1.0 / 4096.0 || uf || of || fr > 12'd4095) begin
        failures++;
        $display("FAIL x=%f int=%0d frac=%0d recon=%f", xr, ip, fr, recon);
      end
    end
  endtask

  initial begin
    check_val(0.0);
    check_val(-0.25);     // int -1, frac 0.75
    check_val(-1.0);      // int -1, frac 0
    check_val(0.5);
    check_val(3.75);
    check_val(-2.125);
    check_val(20.0);
    check_val(-20.0);
    for (int i = 0; i < 400; i++) check_val((real'($urandom_range(0, 28000)) / 1000.0) - 14.0);
    // exact cases
    x = real_to_fp16(-0.25); #1; checks++;
    if (ip != -8'sd1 || fr != 12'd3072) begin failures++; $display("FAIL -0.25 split %0d %0d", ip, fr); end
    x = real_to_fp16(-1.0); #1; checks++;
    if (ip != -8'sd1 || fr != 12'd0) begin failures++; $display("FAIL -1.0 split %0d %0d", ip, fr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
