// activation_source: programmable address generator for the activation ports.
//
// The convolution engine computes output samples in chunks of four windows
// (one per DSP of a SoP). For chunk n and kernel tap i the generator requests,
// for lane j = 0..3, the input sample
//     act_base + (4n + j) * stride + i * dilation
// so any kernel size, stride and dilation is fetched without extra cycles.
// Lanes whose window index 4n+j is not below out_len are not requested and
// read as zero. The same four addresses go to every column's activation BRAM
// module, since each module holds one input feature with the same layout.
//
// Timing: `issue` with chunk/tap in cycle t gives req/addr registered in cycle
// t+1. The programmable registers (kernel size, stride, dilation, base, size)
// follow the paper; only 1-D feature sections are generated here.
module activation_source
  import tcn_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      issue,
  input  logic [15:0]               chunk,
  input  logic [15:0]               tap,
  input  logic [15:0]               stride,
  input  logic [15:0]               dilation,
  input  logic [15:0]               out_len,
  input  logic [31:0]               act_base,
  output logic [LANES-1:0]          req,
  output logic [LANES-1:0][AW-1:0]  addr
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req  <= '0;
      addr <= '0;
    end else begin
      for (int j = 0; j < LANES; j++) begin
        logic [31:0] win;
        win     = {14'd0, chunk, 2'(j)};
        req[j]  <= issue && (win < {16'd0, out_len});
        addr[j] <= act_base + win * {16'd0, stride} + {16'd0, tap} * {16'd0, dilation};
      end
    end
  end
endmodule
