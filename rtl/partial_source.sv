// partial_source: reads previously computed partial results.
//
// When a convolution has more input features than the matrix has columns, it
// runs several times and each run adds its contribution to the results of the
// previous one. At the first tap of chunk n the partial-results source reads,
// for every active row, the 64-bit word pr_base + n (four 16-bit partial
// sums) from that row's partial-results BRAM module; the word reaches the
// row's shift adder long before the SoP results of the chunk.
//
// Timing: issue in cycle t gives req/addr registered in cycle t+1. Role and
// base register follow the paper; the word layout is this design's choice.
module partial_source
  import tcn_pkg::*;
#(
  parameter int NROWS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              issue,
  input  logic [15:0]       chunk,
  input  logic [31:0]       pr_base,
  input  logic [7:0]        rows_active,
  output logic [NROWS-1:0]  req,
  output logic [AW-1:0]     addr
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req  <= '0;
      addr <= '0;
    end else begin
      addr <= pr_base + {16'd0, chunk};
      for (int r = 0; r < NROWS; r++) req[r] <= issue && (r < int'(rows_active));
    end
  end
endmodule
