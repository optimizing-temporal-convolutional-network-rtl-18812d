// weight_memory: the weight memory region, one bank per SoP.
//
// Bank (r, c) is a DEPTH x 16 RAMB18-sized memory holding the kernels of the
// output/input feature pair (r, c). The engine reads all banks in the same
// cycle at one broadcast address (each bank with its own request); read data
// is registered and reads zero when not requested. Two weight DMAs write the
// banks through a flat address, bank index * DEPTH + word. Write port 0 has
// priority: if both ports target the same bank in one cycle, port 1 is held
// off (wr1_ready low) and retries. Bank organisation after the paper; the
// write arbitration is this design's choice.
module weight_memory
  import tcn_pkg::*;
#(
  parameter int NROWS = 4,
  parameter int NCOLS = 12,
  parameter int DEPTH = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [NROWS-1:0][NCOLS-1:0]    rd_req,
  input  logic [AW-1:0]                  rd_addr,
  output sample_t [NROWS-1:0][NCOLS-1:0] rd_data,
  input  logic                           wr0_valid,
  input  logic [AW-1:0]                  wr0_addr,
  input  sample_t                        wr0_data,
  input  logic                           wr1_valid,
  input  logic [AW-1:0]                  wr1_addr,
  input  sample_t                        wr1_data,
  output logic                           wr1_ready
);
  localparam int NB = NROWS * NCOLS;
  localparam int RB = $clog2(DEPTH);

  sample_t mem [NB][DEPTH];
  logic [NROWS-1:0][NCOLS-1:0] req_q;
  sample_t [NROWS-1:0][NCOLS-1:0] rd_q;

  logic [AW-1:0] b0, b1;
  assign b0 = wr0_addr / DEPTH;
  assign b1 = wr1_addr / DEPTH;
  assign wr1_ready = !(wr0_valid && b0 == b1);

  for (genvar r = 0; r < NROWS; r++) begin : g_r
    for (genvar c = 0; c < NCOLS; c++) begin : g_c
      localparam int B = r * NCOLS + c;
      always_ff @(posedge clk) begin
        if (rd_req[r][c]) rd_q[r][c] <= mem[B][rd_addr[RB-1:0]];
        if (wr0_valid && b0 == AW'(B))
          mem[B][wr0_addr[RB-1:0]] <= wr0_data;
        else if (wr1_valid && b1 == AW'(B))
          mem[B][wr1_addr[RB-1:0]] <= wr1_data;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) req_q <= '0;
    else        req_q <= rd_req;
  end

  always_comb
    for (int r = 0; r < NROWS; r++)
      for (int c = 0; c < NCOLS; c++)
        rd_data[r][c] = req_q[r][c] ? rd_q[r][c] : '0;
endmodule
