// out_mem_module: one output / partial-results BRAM module.
//
// A DEPTH x 64-bit memory (four 16-bit samples per word, the equivalent of
// eight RAMB18 blocks at the default depth of 2048). Port A serves the
// convolution engine - either the output sink writing results or the
// partial-results source reading them back - and port B serves the DMA side
// through the crossbar. Both ports are synchronous with registered read data
// (one cycle). Simultaneous writes to the same word from both ports are not
// arbitrated; the scheduler never does that (port B wins here).
module out_mem_module
  import tcn_pkg::*;
#(
  parameter int DEPTH = 2048
) (
  input  logic           clk,
  input  logic           a_en,
  input  logic           a_we,
  input  logic [AW-1:0]  a_addr,
  input  word_t          a_wdata,
  output word_t          a_rdata,
  input  logic           b_en,
  input  logic           b_we,
  input  logic [AW-1:0]  b_addr,
  input  word_t          b_wdata,
  output word_t          b_rdata
);
  localparam int RB = $clog2(DEPTH);
  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we && !(b_en && b_we && b_addr[RB-1:0] == a_addr[RB-1:0]))
        mem[a_addr[RB-1:0]] <= a_wdata;
      a_rdata <= mem[a_addr[RB-1:0]];
    end
    if (b_en) begin
      if (b_we) mem[b_addr[RB-1:0]] <= b_wdata;
      b_rdata <= mem[b_addr[RB-1:0]];
    end
  end
endmodule
