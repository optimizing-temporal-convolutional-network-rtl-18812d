// mac_dsp: one multiply-accumulate cell, modelled on a DSP48E slice.
//
// Three register stages: the sample and weight are registered, their product
// is registered, and the accumulator register adds the product either to its
// own value or to zero. The zero/feedback choice (the "sel" mux of the paper's
// DSP drawing) is made by `first`, which travels with the operands: the first
// tap of a window restarts the accumulation, so one window is finished every
// kernel_size valid cycles with no idle cycle between windows.
//
// Timing: operands presented with in_valid in cycle t reach `acc` at the end of
// cycle t+2 (acc_valid is high in cycle t+3 for one cycle). The registers only
// advance on valid operands (clock-enable style), so the accumulator holds
// through bubbles. Signed arithmetic and the clock enables are this design's
// choice; the pipeline shape follows the paper.
module mac_dsp #(
  parameter int DW    = 16,
  parameter int ACC_W = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    first,
  input  logic signed [DW-1:0]    sample,
  input  logic signed [DW-1:0]    weight,
  output logic signed [ACC_W-1:0] acc,
  output logic                    acc_valid
);
  logic signed [DW-1:0]    a_q, b_q;
  logic signed [2*DW-1:0]  m_q;
  logic                    v1, v2, f1, f2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q <= '0; b_q <= '0; m_q <= '0; acc <= '0;
      v1 <= 1'b0; v2 <= 1'b0; f1 <= 1'b0; f2 <= 1'b0; acc_valid <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        a_q <= sample;
        b_q <= weight;
        f1  <= first;
      end
      v2 <= v1;
      if (v1) begin
        m_q <= a_q * b_q;
        f2  <= f1;
      end
      acc_valid <= v2;
      if (v2) acc <= (f2 ? '0 : acc) + ACC_W'(m_q);
    end
  end
endmodule
