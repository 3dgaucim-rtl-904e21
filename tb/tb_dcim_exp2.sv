// tb_dcim_exp2: loads the four 8-entry exponent tables (2^(k/8^(s+1))), streams
// arguments one per cycle and compares both outputs with 2^x computed in real
// arithmetic. Also checks the 6-cycle latency and full throughput.
module tb_dcim_exp2;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        lut_we, in_valid, out_valid;
  logic [1:0]  lut_stage;
  logic [2:0]  lut_idx;
  logic [15:0] lut_data, x, y_fp16, y_fix;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  dcim_exp2 dut (.clk, .rst_n, .lut_we, .lut_stage, .lut_idx, .lut_data, .in_valid, .x,
                 .out_valid, .y_fp16, .y_fix);

  real    q_x   [$];
  int     q_cyc [$];

  // Scoreboard
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real xr, yr, yf, yx, tol;
      int  c0;
      xr = q_x.pop_front();
      c0 = q_cyc.pop_front();
      yr = 2.0 ** xr;
      yf = fp16_to_real(y_fp16);
      yx = fix_to_real(y_fix);
      checks += 3;
      // argument applied before edge c0+1, result seen at the edge after it is registered
      if (cyc - c0 != 6 + 1) begin failures++; $display("FAIL latency %0d", cyc - c0); end
      if (yr >= 2.0 ** -14 && absr(yf - yr) > yr * (2.0 ** -9)) begin
        failures++; $display("FAIL fp16 x=%f got=%f exp=%f", xr, yf, yr);
      end
      tol = (yr < 2.0) ? (4.0 / 32768.0 + yr * (2.0 ** -11)) : 0.0;
      if (yr < 2.0 && absr(yx - yr) > tol) begin
        failures++; $display("FAIL fix x=%f got=%f exp=%f", xr, yx, yr);
      end
      if (yr >= 2.0 && y_fix != 16'hFFFF) begin failures++; $display("FAIL fix saturation x=%f", xr); end
    end
  end

  initial begin
    lut_we = 0; lut_stage = 0; lut_idx = 0; lut_data = 0; in_valid = 0; x = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 4; s++)
      for (int k = 0; k < 8; k++) begin
        @(negedge clk);
        lut_we = 1; lut_stage = 2'(s); lut_idx = 3'(k); lut_data = lut_value(s, k);
      end
    @(negedge clk); lut_we = 0;
    // back-to-back stream
    for (int i = 0; i < 500; i++) begin
      real v;
      @(negedge clk);
      if (i < 4)       v = (i == 0) ? 0.0 : (i == 1) ? -1.0 : (i == 2) ? -0.5 : 1.5;
      else             v = (real'($urandom_range(0, 15000)) / 1000.0) - 14.0;
      x = real_to_fp16(v);
      in_valid = 1;
      q_x.push_back(fp16_to_real(x));
      q_cyc.push_back(cyc);
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q_x.size() != 0) begin failures++; $display("FAIL %0d results missing", q_x.size()); end
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
