// csp_top: Convolution Specific Processor - a TCN/CNN convolution accelerator.
//
// The top level gathers the convolution engine (an NCOLS x NROWS matrix of
// four-MAC Sum-of-Products units with its sources, shift adders and sink),
// the on-chip memory regions it works from, the DMAs that fill and drain them
// and the register file through which a scheduler processor drives it all:
//   * weight memory region: one 1024 x 16 bank per SoP, filled by WDMA0/WDMA1;
//   * activation memory region: one 8-bank module per column, filled by ADMA;
//   * output memory region: 2*NROWS 64-bit modules; per run one half is read
//     as partial results and the other half receives the outputs (cfg.swap
//     exchanges the halves, so run k's output is run k+1's partial input);
//   * XBAR: ADMA and the scheduler's memory path to activation/output modules.
// The scheduler CPU, its memories, the AXI interconnect, the host processor
// and DDR are outside: the register bus, the host port (into the XBAR) and the
// three DDR ports (index 0 WDMA0, 1 WDMA1, 2 ADMA) are top-level ports.
// Double buffering as in the paper is done by the scheduler choosing base
// addresses in different halves of the memories for consecutive runs; the
// engine and the DMAs run concurrently. Single clock, synchronous active-low
// reset. Defaults: 12 columns x 4 rows, as in the paper's Z-7020 design.
module csp_top
  import tcn_pkg::*;
#(
  parameter int NROWS = 4,
  parameter int NCOLS = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  // register bus from the scheduler
  input  logic               reg_en,
  input  logic               reg_we,
  input  logic [7:0]         reg_addr,
  input  logic [31:0]        reg_wdata,
  output logic [31:0]        reg_rdata,
  output logic               irq,
  // scheduler / AXI master into the XBAR
  input  logic               host_req,
  input  logic               host_we,
  input  logic [AW-1:0]      host_addr,
  input  word_t              host_wdata,
  output logic               host_gnt,
  output logic               host_rvalid,
  output word_t              host_rdata,
  // DDR ports: 0 WDMA0, 1 WDMA1, 2 ADMA
  output logic  [2:0]        ext_req,
  output logic  [2:0]        ext_we,
  output logic  [2:0][31:0]  ext_addr,
  output word_t [2:0]        ext_wdata,
  input  logic  [2:0]        ext_gnt,
  input  logic  [2:0]        ext_rvalid,
  input  word_t [2:0]        ext_rdata
);
  ce_cfg_t    cfg;
  logic [3:0] start, busy, done;
  dma_desc_t  desc [3];
  logic       conflict, underflow;

  csp_regs u_regs (
    .clk, .rst_n, .reg_en, .reg_we, .reg_addr, .reg_wdata, .reg_rdata,
    .ce_cfg(cfg), .start, .desc, .busy, .done, .conflict, .underflow, .irq
  );

  // ---------------- convolution engine ----------------
  logic [NCOLS-1:0][LANES-1:0]    act_req;
  logic [LANES-1:0][AW-1:0]       act_addr;
  sample_t [NCOLS-1:0][LANES-1:0] act_data;
  logic [NROWS-1:0][NCOLS-1:0]    w_req;
  logic [AW-1:0]                  w_addr;
  sample_t [NROWS-1:0][NCOLS-1:0] w_data;
  logic [NROWS-1:0]               pr_req, os_we;
  logic [AW-1:0]                  pr_addr, os_addr;
  word_t [NROWS-1:0]              pr_data, os_wdata;

  conv_engine #(.NROWS(NROWS), .NCOLS(NCOLS)) u_ce (
    .clk, .rst_n, .start(start[0]), .cfg, .busy(busy[0]), .done(done[0]),
    .act_req, .act_addr, .act_data, .w_req, .w_addr, .w_data,
    .pr_req, .pr_addr, .pr_data, .os_we, .os_addr, .os_wdata,
    .pr_underflow(underflow)
  );

  // ---------------- weight path ----------------
  logic          wr_valid [2];
  logic [AW-1:0] wr_addr [2];
  sample_t       wr_data [2];
  logic          wr1_ready;

  for (genvar d = 0; d < 2; d++) begin : g_wdma
    // the weight DMAs only read DDR
    assign ext_we[d]    = 1'b0;
    assign ext_wdata[d] = '0;
    wdma u_wdma (
      .clk, .rst_n, .start(start[1+d]), .desc(desc[d]), .busy(busy[1+d]), .done(done[1+d]),
      .ext_req(ext_req[d]), .ext_addr(ext_addr[d]),
      .ext_gnt(ext_gnt[d]), .ext_rvalid(ext_rvalid[d]), .ext_rdata(ext_rdata[d]),
      .wr_valid(wr_valid[d]), .wr_addr(wr_addr[d]), .wr_data(wr_data[d]),
      .wr_ready(d == 0 ? 1'b1 : wr1_ready)
    );
  end

  weight_memory #(.NROWS(NROWS), .NCOLS(NCOLS)) u_wmem (
    .clk, .rst_n, .rd_req(w_req), .rd_addr(w_addr), .rd_data(w_data),
    .wr0_valid(wr_valid[0]), .wr0_addr(wr_addr[0]), .wr0_data(wr_data[0]),
    .wr1_valid(wr_valid[1]), .wr1_addr(wr_addr[1]), .wr1_data(wr_data[1]),
    .wr1_ready
  );

  // ---------------- activation DMA and XBAR ----------------
  logic  [1:0]          m_req, m_we, m_gnt, m_rvalid;
  logic  [1:0][AW-1:0]  m_addr;
  word_t [1:0]          m_wdata, m_rdata;

  adma u_adma (
    .clk, .rst_n, .start(start[3]), .desc(desc[2]), .busy(busy[3]), .done(done[3]),
    .ext_req(ext_req[2]), .ext_we(ext_we[2]), .ext_addr(ext_addr[2]), .ext_wdata(ext_wdata[2]),
    .ext_gnt(ext_gnt[2]), .ext_rvalid(ext_rvalid[2]), .ext_rdata(ext_rdata[2]),
    .x_req(m_req[0]), .x_we(m_we[0]), .x_addr(m_addr[0]), .x_wdata(m_wdata[0]),
    .x_gnt(m_gnt[0]), .x_rvalid(m_rvalid[0]), .x_rdata(m_rdata[0])
  );

  assign m_req[1]    = host_req;
  assign m_we[1]     = host_we;
  assign m_addr[1]   = host_addr;
  assign m_wdata[1]  = host_wdata;
  assign host_gnt    = m_gnt[1];
  assign host_rvalid = m_rvalid[1];
  assign host_rdata  = m_rdata[1];

  logic  [NCOLS-1:0]   xa_en, xa_we;
  logic  [AW-1:0]      xa_addr [NCOLS];
  word_t [NCOLS-1:0]   xa_wdata, xa_rdata;
  logic  [2*NROWS-1:0] xo_en, xo_we;
  logic  [AW-1:0]      xo_addr [2*NROWS];
  word_t [2*NROWS-1:0] xo_wdata, xo_rdata;

  xbar #(.NROWS(NROWS), .NCOLS(NCOLS)) u_xbar (
    .clk, .rst_n, .m_req, .m_we, .m_addr, .m_wdata, .m_gnt, .m_rvalid, .m_rdata,
    .act_en(xa_en), .act_we(xa_we), .act_addr(xa_addr), .act_wdata(xa_wdata), .act_rdata(xa_rdata),
    .out_en(xo_en), .out_we(xo_we), .out_addr(xo_addr), .out_wdata(xo_wdata), .out_rdata(xo_rdata)
  );

  // ---------------- activation memory region ----------------
  logic [NCOLS-1:0] col_conflict;
  for (genvar k = 0; k < NCOLS; k++) begin : g_act
    act_mem_module u_am (
      .clk, .rst_n, .rd_req(act_req[k]), .rd_addr(act_addr), .rd_data(act_data[k]),
      .conflict(col_conflict[k]),
      .b_en(xa_en[k]), .b_we(xa_we[k]), .b_addr(xa_addr[k]), .b_wdata(xa_wdata[k]),
      .b_rdata(xa_rdata[k])
    );
  end
  assign conflict = |col_conflict;

  // ---------------- output memory region ----------------
  // module m serves row m % NROWS; it is the partial source when it lies in
  // the half selected by swap, the output sink otherwise.
  word_t [2*NROWS-1:0] oa_rdata;
  for (genvar m = 0; m < 2 * NROWS; m++) begin : g_out
    localparam int R    = m % NROWS;
    localparam bit HIGH = (m >= NROWS);
    logic is_pr;
    assign is_pr = (HIGH == cfg.swap);
    out_mem_module u_om (
      .clk,
      .a_en(is_pr ? pr_req[R] : os_we[R]), .a_we(!is_pr && os_we[R]),
      .a_addr(is_pr ? pr_addr : os_addr), .a_wdata(os_wdata[R]), .a_rdata(oa_rdata[m]),
      .b_en(xo_en[m]), .b_we(xo_we[m]), .b_addr(xo_addr[m]), .b_wdata(xo_wdata[m]),
      .b_rdata(xo_rdata[m])
    );
  end
  always_comb
    for (int r = 0; r < NROWS; r++) pr_data[r] = cfg.swap ? oa_rdata[NROWS + r] : oa_rdata[r];
endmodule
