// csp_regs: memory-mapped configuration and control registers.
//
// The scheduler processor programs a layer run by writing the registers of
// the activation, weight and partial sources, the output sink and the three
// DMAs, then writing start bits; it polls busy and sticky done bits in STATUS.
// Register bus: reg_en/reg_we/reg_addr (32-bit word index)/reg_wdata, read
// data registered one cycle after reg_en. Map (word index):
//   0 CTRL    W  bit0 start CE, bit1 start WDMA0, bit2 start WDMA1, bit3 start ADMA
//   1 STATUS  R  bits 3:0 busy (CE, WDMA0, WDMA1, ADMA), bits 11:8 done (sticky),
//                bit 16 bank conflict seen, bit 17 partial underflow seen;
//             W  writing 1 to bits 11:8 / 17:16 clears them
//   2 kernel_size 3 dilation 4 stride 5 out_len 6 act_base 7 w_base 8 bias_addr
//   9 pr_base 10 os_base 11 flags {shift[13:8], swap[2], partial_en[1], bias_en[0]}
//  12 rows_active 13 cols_active
//  16/17/18 WDMA0 ext_addr/loc_addr/len, 20/21/22 WDMA1, 24/25/26/27 ADMA (+dir)
// The paper lists the per-source registers; the map is this design's own.
module csp_regs
  import tcn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_en,
  input  logic        reg_we,
  input  logic [7:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output ce_cfg_t     ce_cfg,
  output logic [3:0]  start,     // CE, WDMA0, WDMA1, ADMA
  output dma_desc_t   desc [3],  // WDMA0, WDMA1, ADMA
  input  logic [3:0]  busy,
  input  logic [3:0]  done,
  input  logic        conflict,
  input  logic        underflow,
  output logic        irq
);
  logic [3:0] done_q;
  logic [1:0] err_q;
  logic       wr;
  assign wr  = reg_en && reg_we;
  assign irq = |done_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ce_cfg <= '0; start <= '0; done_q <= '0; err_q <= '0; reg_rdata <= '0;
      for (int i = 0; i < 3; i++) desc[i] <= '0;
      ce_cfg.kernel_size <= 16'd1; ce_cfg.dilation <= 16'd1; ce_cfg.stride <= 16'd1;
    end else begin
      start  <= (wr && reg_addr == 8'd0) ? reg_wdata[3:0] : 4'd0;
      done_q <= done_q | done;
      err_q  <= err_q | {underflow, conflict};
      if (wr) begin
        case (reg_addr)
          8'd1: begin
            done_q <= (done_q | done) & ~reg_wdata[11:8];
            err_q  <= (err_q | {underflow, conflict}) & ~reg_wdata[17:16];
          end
          8'd2:  ce_cfg.kernel_size <= reg_wdata[15:0];
          8'd3:  ce_cfg.dilation    <= reg_wdata[15:0];
          8'd4:  ce_cfg.stride      <= reg_wdata[15:0];
          8'd5:  ce_cfg.out_len     <= reg_wdata[15:0];
          8'd6:  ce_cfg.act_base    <= reg_wdata;
          8'd7:  ce_cfg.w_base      <= reg_wdata;
          8'd8:  ce_cfg.bias_addr   <= reg_wdata;
          8'd9:  ce_cfg.pr_base     <= reg_wdata;
          8'd10: ce_cfg.os_base     <= reg_wdata;
          8'd11: begin
            ce_cfg.bias_en    <= reg_wdata[0];
            ce_cfg.partial_en <= reg_wdata[1];
            ce_cfg.swap       <= reg_wdata[2];
            ce_cfg.shift      <= reg_wdata[13:8];
          end
          8'd12: ce_cfg.rows_active <= reg_wdata[7:0];
          8'd13: ce_cfg.cols_active <= reg_wdata[7:0];
          8'd16, 8'd20, 8'd24: desc[2'((reg_addr - 8'd16) >> 2)].ext_addr <= reg_wdata;
          8'd17, 8'd21, 8'd25: desc[2'((reg_addr - 8'd16) >> 2)].loc_addr <= reg_wdata;
          8'd18, 8'd22, 8'd26: desc[2'((reg_addr - 8'd16) >> 2)].len      <= reg_wdata[15:0];
          8'd27:               desc[2].dir <= reg_wdata[0];
          default: ;
        endcase
      end
      if (reg_en && !reg_we) begin
        case (reg_addr)
          8'd1:  reg_rdata <= {14'd0, err_q, 4'd0, done_q, 4'd0, busy};
          8'd2:  reg_rdata <= {16'd0, ce_cfg.kernel_size};
          8'd3:  reg_rdata <= {16'd0, ce_cfg.dilation};
          8'd4:  reg_rdata <= {16'd0, ce_cfg.stride};
          8'd5:  reg_rdata <= {16'd0, ce_cfg.out_len};
          8'd6:  reg_rdata <= ce_cfg.act_base;
          8'd7:  reg_rdata <= ce_cfg.w_base;
          8'd11: reg_rdata <= {18'd0, ce_cfg.shift, 5'd0, ce_cfg.swap, ce_cfg.partial_en, ce_cfg.bias_en};
          8'd12: reg_rdata <= {24'd0, ce_cfg.rows_active};
          8'd13: reg_rdata <= {24'd0, ce_cfg.cols_active};
          default: reg_rdata <= '0;
        endcase
      end
    end
  end
endmodule
