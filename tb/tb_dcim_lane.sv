// tb_dcim_lane: loads exponent LUTs, opacities and colours of 32 Gaussians into one
// lane, then streams (pixel, Gaussian) pairs back to back, 8 Gaussians per pixel.
// Every output (running colour and transmittance) is compared with a real-valued
// reference of 2^x', alpha = P*opacity, C += alpha*c*T, T *= (1-alpha), within a
// fixed-point tolerance; the 10-cycle latency is checked on every result.
module tb_dcim_lane;
  import gaucim_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic we, in_valid, first, out_valid;
  logic [2:0] warr; logic [5:0] wblk; logic [1:0] wrow; fix16_t wdata;
  logic signed [15:0] u, v, t;
  splat_t g; logic [7:0] slot;
  fix16_t rgb [3]; fix16_t trans;
  int checks = 0, failures = 0;

  dcim_lane dut (.clk, .rst_n, .we, .warr, .wblk, .wrow, .wdata, .in_valid, .first,
                 .u, .v, .t, .g, .slot, .out_valid, .rgb, .trans);

  real    opa [32];
  real    col [32][3];
  real    q_r [$], q_g [$], q_b [$], q_t [$];
  int     q_c [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    real er, eg, eb, et; int c0;
    er = q_r.pop_front(); eg = q_g.pop_front(); eb = q_b.pop_front(); et = q_t.pop_front();
    c0 = q_c.pop_front();
    checks++;
    if (cyc - c0 != 10 + 1 ||
        absr(fix_to_real(rgb[0]) - er) > 0.004 || absr(fix_to_real(rgb[1]) - eg) > 0.004 ||
        absr(fix_to_real(rgb[2]) - eb) > 0.004 || absr(fix_to_real(trans) - et) > 0.004) begin
      failures++;
      $display("FAIL lat %0d R %f/%f G %f/%f B %f/%f T %f/%f", cyc - c0,
               fix_to_real(rgb[0]), er, fix_to_real(rgb[1]), eg, fix_to_real(rgb[2]), eb,
               fix_to_real(trans), et);
    end
  end

  task automatic wr(int arr, int blk, int row, logic [15:0] d);
    @(negedge clk);
    we = 1; warr = 3'(arr); wblk = 6'(blk); wrow = 2'(row); wdata = d;
  endtask

  initial begin
    real T, C [3];
    we = 0; in_valid = 0; first = 0; warr = 0; wblk = 0; wrow = 0; wdata = 0;
    u = 0; v = 0; t = 0; g = '0; slot = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 4; s++) for (int k = 0; k < 8; k++) wr(s, k / 4, k % 4, lut_value(s, k));
    for (int i = 0; i < 32; i++) begin
      logic [15:0] o;
      o = 16'($urandom_range(3000, 32000)); opa[i] = fix_to_real(o);
      wr(4, i / 4, i % 4, o);
      for (int c = 0; c < 3; c++) begin
        o = 16'($urandom_range(0, 32768)); col[i][c] = fix_to_real(o);
        wr(5 + c, i / 4, i % 4, o);
      end
    end
    @(negedge clk); we = 0;
    for (int px = 0; px < 30; px++) begin
      T = 1.0; C = '{0.0, 0.0, 0.0};
      for (int k = 0; k < 8; k++) begin
        real xr, P, al;
        int  gi;
        @(negedge clk);
        gi = $urandom_range(0, 31);
        in_valid = 1; first = (k == 0); slot = 8'(gi);
        u = 16'(px * 16 + 8); v = 16'(100); t = 16'(2048);
        g.mx = 16'(px * 16 + $urandom_range(0, 60)); g.my = 16'(80 + $urandom_range(0, 40));
        g.ca = 16'($urandom_range(100, 3000)); g.cc = 16'($urandom_range(100, 3000));
        g.cb = 16'(int'($urandom_range(0, 100)) - 50);
        g.mt = 16'($urandom_range(1800, 2300)); g.lam = 16'($urandom_range(0, 8000));
        xr = fp16_to_real(real_to_fp16(ref_xprime(u, v, t, g.mx, g.my, g.ca, g.cb, g.cc, g.mt, g.lam)));
        P  = 2.0 ** xr;
        al = P * opa[gi];
        for (int c = 0; c < 3; c++) C[c] += al * col[gi][c] * T;
        T  = T * (1.0 - al);
        q_r.push_back(C[0]); q_g.push_back(C[1]); q_b.push_back(C[2]); q_t.push_back(T);
        q_c.push_back(cyc);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (15) @(posedge clk);
    checks++;
    if (q_c.size() != 0) begin failures++; $display("FAIL %0d results missing", q_c.size()); end
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
