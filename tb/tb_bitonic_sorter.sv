// tb_bitonic_sorter: sorts random sets (with duplicates and padding) and checks that
// the output is ascending, is a permutation of the input, and that done comes 1 + m(m+1)/2 cycles after start.
module tb_bitonic_sorter;
  import gaucim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 16;
  logic start, busy, done;
  sort_elem_t din [N];
  sort_elem_t dout [N];
  int checks = 0, failures = 0;

  bitonic_sorter #(.N(N)) dut (.clk, .rst_n, .start, .din, .busy, .done, .dout);

  initial begin
    int cycles;
    start = 0; din = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 200; trial++) begin
      int cnt [logic [31:0]];
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        din[i].key = (trial % 3 == 0) ? 16'($urandom_range(0, 7)) : 16'($urandom);
        din[i].id  = 16'(i + trial * 16);
        if (trial % 5 == 1 && i > 10) din[i] = '{key: 16'hFFFF, id: 16'hFFFF};
        cnt[din[i]] = cnt.exists(din[i]) ? cnt[din[i]] + 1 : 1;
      end
      start = 1;
      @(negedge clk);
      start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks += 3;
      if (cycles != 10 + 1) begin failures++; $display("FAIL cycles %0d", cycles); end  // load + 10 stages
      for (int i = 1; i < N; i++)
        if (dout[i].key < dout[i-1].key) begin failures++; $display("FAIL order trial %0d", trial); break; end
      for (int i = 0; i < N; i++) begin
        if (!cnt.exists(dout[i]) || cnt[dout[i]] == 0) begin failures++; $display("FAIL not a permutation"); break; end
        cnt[dout[i]]--;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
