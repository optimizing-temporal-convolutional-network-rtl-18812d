// wdma: weight DMA, DDR -> weight memory region.
//
// Copies `len` 64-bit beats starting at DDR byte address ext_addr into the
// weight memory. Each beat holds four 16-bit weights (lane 0 in bits 15:0),
// written on four consecutive cycles to consecutive flat weight addresses
// (bank * 1024 + word) from loc_addr on. One DDR read is in flight at a time.
//
// DDR port (read only, no write signals): ext_req/ext_addr held until ext_gnt; the data returns with
// ext_rvalid any number of cycles later. Weight port: wr_valid/wr_addr/wr_data
// held until wr_ready. `done` pulses when the last weight is written. The
// accelerator has two of these on separate PS-PL ports, as in the paper; the
// simple request/grant port in place of AXI is this design's choice.
module wdma
  import tcn_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  dma_desc_t     desc,
  output logic          busy,
  output logic          done,
  output logic          ext_req,
  output logic [31:0]   ext_addr,
  input  logic          ext_gnt,
  input  logic          ext_rvalid,
  input  word_t         ext_rdata,
  output logic          wr_valid,
  output logic [AW-1:0] wr_addr,
  output sample_t       wr_data,
  input  logic          wr_ready
);
  typedef enum logic [1:0] {IDLE, RD, WAITR, WR} state_t;
  state_t      state;
  logic [15:0] left;
  logic [1:0]  lane;
  word_t       beat;

  assign busy      = (state != IDLE);
  assign ext_req   = (state == RD);
  assign wr_valid  = (state == WR);
  assign wr_data   = beat[lane*DW +: DW];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE; left <= '0; lane <= '0; beat <= '0;
      ext_addr <= '0; wr_addr <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          ext_addr <= desc.ext_addr;
          wr_addr  <= desc.loc_addr;
          left     <= desc.len;
          state    <= (desc.len == 0) ? IDLE : RD;
          done     <= (desc.len == 0);
        end
        RD:    if (ext_gnt) state <= WAITR;
        WAITR: if (ext_rvalid) begin beat <= ext_rdata; lane <= '0; state <= WR; end
        WR: if (wr_ready) begin
          wr_addr <= wr_addr + 1;
          lane    <= lane + 2'd1;
          if (lane == 2'd3) begin
            left     <= left - 16'd1;
            ext_addr <= ext_addr + 32'd8;
            if (left == 16'd1) begin state <= IDLE; done <= 1'b1; end
            else state <= RD;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
