// weight_source: address generator for the weight ports of the MAC matrix.
//
// Every SoP has its own weight bank, and all kernels of a run are stored at
// the same offset w_base in their banks, so tap i of every kernel is at
// w_base + i and one address is broadcast to all banks. Only the SoPs of the
// active rows and columns are requested. Before a run, `bias_rd` reads the
// bias of each active row from bank (row, 0) at bias_addr; the bias goes to
// the row's shift adder.
//
// Timing: issue/bias_rd in cycle t give req/addr registered in cycle t+1.
// Kernel size and base registers follow the paper; the bias location is this
// design's choice.
module weight_source
  import tcn_pkg::*;
#(
  parameter int NROWS = 4,
  parameter int NCOLS = 12
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         issue,
  input  logic                         bias_rd,
  input  logic [15:0]                  tap,
  input  logic [31:0]                  w_base,
  input  logic [31:0]                  bias_addr,
  input  logic [7:0]                   rows_active,
  input  logic [7:0]                   cols_active,
  output logic [NROWS-1:0][NCOLS-1:0]  req,
  output logic [AW-1:0]                addr
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req  <= '0;
      addr <= '0;
    end else begin
      addr <= bias_rd ? bias_addr : w_base + {16'd0, tap};
      for (int r = 0; r < NROWS; r++)
        for (int c = 0; c < NCOLS; c++)
          req[r][c] <= (r < int'(rows_active)) &&
                       ((issue && c < int'(cols_active)) || (bias_rd && c == 0));
    end
  end
endmodule
