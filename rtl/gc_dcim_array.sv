// gc_dcim_array: one gain-cell digital compute-in-memory array.
//
// The array is made of BLOCKS computing blocks. Each block holds 64 bits, organised
// as ROWS rows of WORD_W bits (four 4T gain-cell rows, each with its own write word
// line and read word line), and a local computing cell (LCC) that multiplies the word
// on the selected read word line by an operand broadcast to the array.
//
// Interface
//   write : we, wblk, wrow, wdata   - one word is written per cycle.
//   compute: in_valid, rblk, rrow, operand -> out_valid, product one cycle later.
//   A write and a compute to the same word in the same cycle return the old word.
// Numbers are UQ1.15; the product is truncated and saturates at 0xFFFF.
//
// From the accelerator description: 64 computing blocks of 64 bits per array, the
// four gain-cell rows per block, and that the array stores data and computes on it.
// This design's own choices: the 4 x 16-bit row organisation, one product per cycle
// per array, fixed point instead of FP16, and the one-cycle latency. The bit-level
// gain-cell circuit (retention, refresh) is not modelled; the storage is a register array.
module gc_dcim_array
  import gaucim_pkg::*;
#(
  parameter int unsigned BLOCKS = 64,
  parameter int unsigned ROWS   = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(BLOCKS)-1:0] wblk,
  input  logic [$clog2(ROWS)-1:0]   wrow,
  input  fix16_t                    wdata,
  input  logic                      in_valid,
  input  logic [$clog2(BLOCKS)-1:0] rblk,
  input  logic [$clog2(ROWS)-1:0]   rrow,
  input  fix16_t                    operand,
  output logic                      out_valid,
  output fix16_t                    product
);

  fix16_t cells [BLOCKS][ROWS];

  always_ff @(posedge clk) begin
    if (we) cells[wblk][wrow] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      product   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) product <= fix_mul(cells[rblk][rrow], operand);
    end
  end

endmodule
