// xbar: crossbar from the DMA / microcontroller side to the BRAM modules.
//
// Two masters - the activation DMA (m0) and the scheduler's AXI path (m1) -
// reach every activation module and every output module through their word
// ports. Local word address map (64-bit words):
//   bit 23      region: 0 activation modules, 1 output modules
//   bits 22:11  module index (column, or output module 0..2*NROWS-1)
//   bits 10:0   word inside the module
// The two masters are served in the same cycle when they address different
// modules; on a collision m0 wins and m1 waits (m1_gnt low). Read data comes
// back with rvalid one cycle after the grant. Addresses outside the existing
// modules are granted, write nothing and read zero. The paper names the XBAR
// and its place; the map and arbitration are this design's choice.
module xbar
  import tcn_pkg::*;
#(
  parameter int NROWS = 4,
  parameter int NCOLS = 12
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic  [1:0]               m_req,
  input  logic  [1:0]               m_we,
  input  logic  [1:0][AW-1:0]       m_addr,
  input  word_t [1:0]               m_wdata,
  output logic  [1:0]               m_gnt,
  output logic  [1:0]               m_rvalid,
  output word_t [1:0]               m_rdata,
  // activation modules, port B
  output logic  [NCOLS-1:0]         act_en,
  output logic  [NCOLS-1:0]         act_we,
  output logic  [AW-1:0]            act_addr [NCOLS],
  output word_t [NCOLS-1:0]         act_wdata,
  input  word_t [NCOLS-1:0]         act_rdata,
  // output modules, port B
  output logic  [2*NROWS-1:0]       out_en,
  output logic  [2*NROWS-1:0]       out_we,
  output logic  [AW-1:0]            out_addr [2*NROWS],
  output word_t [2*NROWS-1:0]       out_wdata,
  input  word_t [2*NROWS-1:0]       out_rdata
);
  localparam int NT = NCOLS + 2 * NROWS;   // targets: act modules, then out modules

  // target index of a master, NT = none
  function automatic int unsigned tgt(input logic [AW-1:0] a);
    int unsigned m;
    m = int'(a[22:11]);
    if (!a[23]) return (m < NCOLS) ? m : NT;
    else        return (m < 2 * NROWS) ? NCOLS + m : NT;
  endfunction

  int unsigned t0, t1;
  logic [1:0]  rv_q;
  int unsigned rt_q [2];

  always_comb begin
    t0 = tgt(m_addr[0]);
    t1 = tgt(m_addr[1]);
    m_gnt[0] = m_req[0];
    m_gnt[1] = m_req[1] && !(m_req[0] && t0 == t1);
    for (int k = 0; k < NCOLS; k++) begin
      act_en[k] = 1'b0; act_we[k] = 1'b0; act_addr[k] = '0; act_wdata[k] = '0;
    end
    for (int k = 0; k < 2 * NROWS; k++) begin
      out_en[k] = 1'b0; out_we[k] = 1'b0; out_addr[k] = '0; out_wdata[k] = '0;
    end
    for (int m = 1; m >= 0; m--) begin   // m0 last so it wins a shared target
      int unsigned t;
      t = (m == 0) ? t0 : t1;
      if (m_gnt[m] && t < NCOLS) begin
        act_en[t] = 1'b1; act_we[t] = m_we[m];
        act_addr[t] = {21'd0, m_addr[m][10:0]}; act_wdata[t] = m_wdata[m];
      end else if (m_gnt[m] && t < NT) begin
        out_en[t-NCOLS] = 1'b1; out_we[t-NCOLS] = m_we[m];
        out_addr[t-NCOLS] = {21'd0, m_addr[m][10:0]}; out_wdata[t-NCOLS] = m_wdata[m];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rv_q <= '0; rt_q[0] <= NT; rt_q[1] <= NT;
    end else begin
      rv_q    <= m_gnt & ~m_we;
      rt_q[0] <= t0;
      rt_q[1] <= t1;
    end
  end

  always_comb begin
    m_rvalid = rv_q;
    for (int m = 0; m < 2; m++) begin
      if (rt_q[m] < NCOLS)   m_rdata[m] = act_rdata[rt_q[m]];
      else if (rt_q[m] < NT) m_rdata[m] = out_rdata[rt_q[m]-NCOLS];
      else                   m_rdata[m] = '0;
    end
  end
endmodule
