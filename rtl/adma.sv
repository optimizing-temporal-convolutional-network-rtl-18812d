// adma: activation DMA between DDR and the activation / output memories.
//
// Load (dir = 0) copies `len` 64-bit beats from DDR address ext_addr to the
// local word address loc_addr on, through the crossbar; store (dir = 1)
// copies local words back to DDR (results, or partial sums that do not fit
// on chip). One beat is in flight at a time; `done` pulses after the last one.
//
// DDR port: ext_req held until ext_gnt; read data returns with ext_rvalid
// later. Crossbar port: x_req held until x_gnt, read data on x_rvalid (one
// cycle after the grant). Role (load and store through the XBAR) after the
// paper; port protocol and single-beat operation are this design's choice.
module adma
  import tcn_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  dma_desc_t     desc,
  output logic          busy,
  output logic          done,
  output logic          ext_req,
  output logic          ext_we,
  output logic [31:0]   ext_addr,
  output word_t         ext_wdata,
  input  logic          ext_gnt,
  input  logic          ext_rvalid,
  input  word_t         ext_rdata,
  output logic          x_req,
  output logic          x_we,
  output logic [AW-1:0] x_addr,
  output word_t         x_wdata,
  input  logic          x_gnt,
  input  logic          x_rvalid,
  input  word_t         x_rdata
);
  typedef enum logic [2:0] {IDLE, E_RD, E_WAIT, L_WR, L_RD, L_WAIT, E_WR} state_t;
  state_t      state;
  logic [15:0] left;
  logic        dir;
  word_t       beat;

  assign busy      = (state != IDLE);
  assign ext_req   = (state == E_RD) || (state == E_WR);
  assign ext_we    = (state == E_WR);
  assign ext_wdata = beat;
  assign x_req     = (state == L_WR) || (state == L_RD);
  assign x_we      = (state == L_WR);
  assign x_wdata   = beat;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE; left <= '0; dir <= 1'b0; beat <= '0;
      ext_addr <= '0; x_addr <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          ext_addr <= desc.ext_addr;
          x_addr   <= desc.loc_addr;
          left     <= desc.len;
          dir      <= desc.dir;
          if (desc.len == 0) done <= 1'b1;
          else state <= desc.dir ? L_RD : E_RD;
        end
        E_RD:   if (ext_gnt) state <= E_WAIT;
        E_WAIT: if (ext_rvalid) begin beat <= ext_rdata; state <= L_WR; end
        L_RD:   if (x_gnt) state <= L_WAIT;
        L_WAIT: if (x_rvalid) begin beat <= x_rdata; state <= E_WR; end
        L_WR, E_WR: if ((state == L_WR) ? x_gnt : ext_gnt) begin
          left     <= left - 16'd1;
          ext_addr <= ext_addr + 32'd8;
          x_addr   <= x_addr + 1;
          if (left == 16'd1) begin state <= IDLE; done <= 1'b1; end
          else state <= dir ? L_RD : E_RD;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
