// shift_adder: per-row reduction of the MAC matrix results.
//
// When the SoPs of a row deliver their four window results, the shift adder
// adds the NCOLS column contributions lane by lane, adds the four partial
// results of earlier runs (read from the output memory region) and the row
// bias, both aligned to the accumulator's fixed-point position, then shifts
// right by `shift` fraction bits and saturates to 16 bits. This lets a
// convolution with more input features than columns accumulate over several
// engine runs.
//
// Interface: partial words arrive (pr_valid/pr_data) before the SoP results
// they belong to and wait, in order, in an 8-entry FIFO; the sum of a group is
// registered, so out_valid follows sop_valid by one cycle. The paper gives the
// block's role (sum of SoP rows with partial results, bias input); the shift
// and saturation format, the FIFO and the timing are this design's choices.
module shift_adder
  import tcn_pkg::*;
#(
  parameter int NCOLS = 12
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           clear,       // start of a run
  input  logic [5:0]                     shift,
  input  logic                           bias_en,
  input  logic                           partial_en,
  input  sample_t                        bias,
  input  logic                           sop_valid,
  input  acc_t [NCOLS-1:0][LANES-1:0]    sop_in,
  input  logic                           pr_valid,
  input  word_t                          pr_data,
  output logic                           out_valid,
  output word_t                          out_data,
  output logic                           pr_underflow  // results came before their partials
);
  localparam int SW = ACC_W + 9;
  typedef logic signed [SW-1:0] sum_t;

  word_t      fifo [8];
  logic [2:0] wp, rp;
  logic [3:0] cnt;
  logic       pop;
  word_t      pr_head;
  sum_t       sum [LANES];

  assign pop     = sop_valid & partial_en;
  assign pr_head = fifo[rp];

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (pr_valid) begin
        fifo[wp] <= pr_data;
        wp <= wp + 3'd1;
      end
      if (pop) rp <= rp + 3'd1;
      cnt <= cnt + 4'(pr_valid) - 4'(pop);
    end
  end

  always_comb begin
    for (int j = 0; j < LANES; j++) begin
      sum[j] = '0;
      for (int c = 0; c < NCOLS; c++) sum[j] += SW'(sop_in[c][j]);
      if (partial_en) sum[j] += SW'($signed(pr_head[j*DW +: DW])) <<< shift;
      if (bias_en)    sum[j] += SW'(bias) <<< shift;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      pr_underflow <= 1'b0;
    end else begin
      out_valid <= sop_valid;
      if (sop_valid)
        for (int j = 0; j < LANES; j++) out_data[j*DW +: DW] <= sat16(sum[j] >>> shift);
      if (clear) pr_underflow <= 1'b0;
      else if (pop && cnt == 0) pr_underflow <= 1'b1;
    end
  end

  // A partial word must be waiting when its results arrive.
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> cnt != 0)
    else $error("shift_adder: SoP results arrived before their partial results");
endmodule
