// act_mem_module: one activation BRAM module (one per MAC-matrix column).
//
// The module is built from BANKS independent 16-bit RAMB18-sized banks of
// DEPTH words. Consecutive samples are interleaved over the banks (sample a
// lives in bank a mod BANKS, row a / BANKS), so the four samples that a SoP
// needs in one cycle - a, a+s, a+2s, a+3s for stride s - fall into four
// different banks for s = 1, 2 or 3 and are read in the same cycle. With only
// four banks, stride 2 would put samples 0 and 4 in one bank; eight banks
// remove that conflict. A conflict (two requested lanes on one bank) is
// reported on `conflict` and by an assertion; the lower lane wins the bank.
//
// Port A (engine side): four sample reads per cycle, data registered one cycle
// later, unrequested lanes read zero. Port B (DMA/XBAR side): one 64-bit word
// = four consecutive samples per cycle, word w covering samples 4w..4w+3,
// read data one cycle later. Bank count, depth and interleaving follow the
// paper; the 64-bit port B is this design's choice.
module act_mem_module
  import tcn_pkg::*;
#(
  parameter int BANKS = 8,
  parameter int DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // engine read port
  input  logic [LANES-1:0]          rd_req,
  input  logic [LANES-1:0][AW-1:0]  rd_addr,
  output sample_t [LANES-1:0]       rd_data,
  output logic                      conflict,
  // DMA / XBAR word port
  input  logic                      b_en,
  input  logic                      b_we,
  input  logic [AW-1:0]             b_addr,
  input  word_t                     b_wdata,
  output word_t                     b_rdata
);
  localparam int BB = $clog2(BANKS);
  localparam int RB = $clog2(DEPTH);
  localparam int WPB = BANKS / LANES;   // words per bank row

  sample_t mem [BANKS][DEPTH];

  // engine side: per bank, pick the requesting lane
  logic [BANKS-1:0][1:0] lane_of;
  logic [BANKS-1:0]      hit;
  logic [LANES-1:0][BB-1:0] bank_q;
  logic [LANES-1:0]         req_q;
  sample_t [BANKS-1:0]      bank_rd;

  always_comb begin
    hit      = '0;
    lane_of  = '0;
    conflict = 1'b0;
    for (int j = LANES - 1; j >= 0; j--) begin
      if (rd_req[j]) begin
        hit[rd_addr[j][BB-1:0]]     = 1'b1;
        lane_of[rd_addr[j][BB-1:0]] = 2'(j);
      end
    end
    for (int j = 0; j < LANES; j++)
      for (int k = j + 1; k < LANES; k++)
        if (rd_req[j] && rd_req[k] && rd_addr[j][BB-1:0] == rd_addr[k][BB-1:0])
          conflict = 1'b1;
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [RB-1:0] row;
    assign row = rd_addr[lane_of[b]][BB +: RB];
    always_ff @(posedge clk) begin
      if (hit[b]) bank_rd[b] <= mem[b][row];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_q  <= '0;
      bank_q <= '0;
    end else begin
      req_q <= rd_req;
      for (int j = 0; j < LANES; j++) bank_q[j] <= rd_addr[j][BB-1:0];
    end
  end

  always_comb
    for (int j = 0; j < LANES; j++) rd_data[j] = req_q[j] ? bank_rd[bank_q[j]] : '0;

  // DMA side
  logic [BB-1:0] bsel;
  logic [RB-1:0] brow;
  assign bsel = BB'((b_addr % WPB) * LANES);
  assign brow = RB'(b_addr / WPB);

  always_ff @(posedge clk) begin
    if (b_en) begin
      for (int j = 0; j < LANES; j++) begin
        if (b_we) mem[bsel + BB'(j)][brow] <= b_wdata[j*DW +: DW];
        b_rdata[j*DW +: DW] <= mem[bsel + BB'(j)][brow];
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !conflict)
    else $error("act_mem_module: bank conflict between lanes");
endmodule
