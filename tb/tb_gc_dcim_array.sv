// tb_gc_dcim_array: writes random words into every row of every block of one array,
// then multiplies random operands by them and compares each product (after the
// one-cycle latency) with a reference UQ1.15 product.
module tb_gc_dcim_array;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        we, in_valid, out_valid;
  logic [5:0]  wblk, rblk;
  logic [1:0]  wrow, rrow;
  logic [15:0] wdata, operand, product;
  logic [15:0] model [64][4];
  int checks = 0, failures = 0;

  gc_dcim_array dut (.clk, .rst_n, .we, .wblk, .wrow, .wdata, .in_valid, .rblk, .rrow,
                     .operand, .out_valid, .product);

  function automatic logic [15:0] ref_mul(logic [15:0] a, logic [15:0] b);
    longint p;
    p = longint'(a) * longint'(b);
    p = p >> 15;
    return (p > 65535) ? 16'hFFFF : 16'(p);
  endfunction

  initial begin
    logic [15:0] expv;
    we = 0; in_valid = 0; wblk = 0; wrow = 0; wdata = 0; rblk = 0; rrow = 0; operand = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 64; b++)
      for (int r = 0; r < 4; r++) begin
        @(negedge clk);
        we = 1; wblk = 6'(b); wrow = 2'(r); wdata = 16'($urandom);
        model[b][r] = wdata;
      end
    @(negedge clk); we = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = 1; rblk = 6'($urandom); rrow = 2'($urandom); operand = 16'($urandom_range(0, 32768));
      expv = ref_mul(model[rblk][rrow], operand);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || product !== expv) begin
        failures++;
        $display("FAIL blk=%0d row=%0d op=%h got=%h exp=%h v=%b", rblk, rrow, operand, product, expv, out_valid);
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
