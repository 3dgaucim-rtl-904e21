// dram_model: behavioural model of the external DRAM for testbenches (not part of the
// design). A read request (addr, len) is accepted when idle; after LAT cycles the
// words addr .. addr+len-1 return one per cycle. The content is written by the
// testbench through the `mem` array.
module dram_model #(
  parameter int unsigned WORDS = 65536,
  parameter int unsigned LAT   = 8
) (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [31:0] req_addr,
  input  logic [15:0] req_len,
  output logic        rd_valid,
  output logic [63:0] rd_data
);
  logic [63:0] mem [WORDS];
  int          wait_n = 0, left = 0;
  logic [31:0] a;

  initial begin
    req_ready = 1'b1;
    rd_valid  = 1'b0;
    rd_data   = '0;
  end

  always @(posedge clk) begin
    rd_valid <= 1'b0;
    if (req_ready && req_valid) begin
      a <= req_addr; left <= int'(req_len); wait_n <= int'(LAT); req_ready <= 1'b0;
    end else if (!req_ready) begin
      if (wait_n > 0) wait_n <= wait_n - 1;
      else if (left > 0) begin
        rd_valid <= 1'b1;
        rd_data  <= mem[a % WORDS];
        a        <= a + 1;
        left     <= left - 1;
        if (left == 1) req_ready <= 1'b1;
      end
    end
  end
endmodule
