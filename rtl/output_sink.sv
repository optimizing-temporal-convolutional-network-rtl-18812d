// output_sink: writes the convolution results to the output memory region.
//
// Each shift adder delivers four 16-bit results at once; the sink writes them
// as one 64-bit word into its row's output BRAM module, at os_base + k for the
// k-th result word of the run, and raises `done` for one cycle when the
// expected number of words (nwords) has been written.
//
// Timing: in_valid in cycle t gives the write (we/addr/wdata) in cycle t+1.
// Role and base register follow the paper; the counter is this design's own.
module output_sink
  import tcn_pkg::*;
#(
  parameter int NROWS = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic [31:0]              os_base,
  input  logic [15:0]              nwords,
  input  logic [7:0]               rows_active,
  input  logic                     in_valid,
  input  word_t [NROWS-1:0]        in_data,
  output logic  [NROWS-1:0]        we,
  output logic  [AW-1:0]           addr,
  output word_t [NROWS-1:0]        wdata,
  output logic                     done
);
  logic [15:0] k;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      k <= '0; we <= '0; addr <= '0; wdata <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      for (int r = 0; r < NROWS; r++) we[r] <= in_valid && (r < int'(rows_active));
      if (in_valid) begin
        addr  <= os_base + {16'd0, k};
        wdata <= in_data;
        k     <= k + 16'd1;
        done  <= (k + 16'd1 == nwords);
      end
    end
  end
endmodule
