// sop: Sum-of-Products unit, four MAC cells sharing one weight.
//
// The four DSPs each compute one output sample of the same input/output
// feature pair, for four neighbouring convolution windows: in every cycle the
// same kernel tap W is multiplied with the four samples S_0..S_3 that the
// activation source fetched for the four windows. A tap counter loaded from
// KS (kernel size) marks the first tap of each window, which restarts the
// accumulators, and the last one, which makes out_valid rise when that tap
// leaves the accumulators. One kernel thus takes KS cycles per DSP, whatever
// KS is, and a new group of four results follows every KS valid cycles.
//
// Timing: the results of a window whose last tap arrives in cycle t are on
// `out` with out_valid in cycle t+3. The counter and DSP structure follow the
// paper; the exact counter logic is this design's own.
module sop
  import tcn_pkg::*;
#(
  parameter int LN = LANES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [15:0]       ks,
  input  sample_t           w,
  input  sample_t [LN-1:0]  s,
  output acc_t    [LN-1:0]  out,
  output logic              out_valid
);
  logic [15:0] cnt;
  logic        first, last;
  logic [2:0]  last_d;
  logic [LN-1:0] accv;

  assign first = (cnt == 16'd0);
  assign last  = (cnt == ks - 16'd1) || (ks <= 16'd1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt    <= '0;
      last_d <= '0;
    end else begin
      if (in_valid) cnt <= last ? 16'd0 : cnt + 16'd1;
      // last flag follows the DSP pipeline (3 stages)
      last_d <= {last_d[1:0], in_valid & last};
    end
  end

  for (genvar j = 0; j < LN; j++) begin : g_dsp
    mac_dsp #(.DW(DW), .ACC_W(ACC_W)) u_dsp (
      .clk, .rst_n, .in_valid, .first,
      .sample(s[j]), .weight(w), .acc(out[j]), .acc_valid(accv[j])
    );
  end

  assign out_valid = last_d[2] & accv[0];
endmodule
