// mac_matrix: the NROWS x NCOLS grid of Sum-of-Products units.
//
// Row r computes output feature r of the current group, column c consumes
// input feature c: every SoP in column c receives the same four samples from
// activation port c, while each SoP has a weight port of its own (the kernel
// of feature pair (r, c)). All SoPs run in lock step, so a single valid bit
// and a single kernel size drive the whole grid and the results of all SoPs
// are valid in the same cycle, three cycles after the last tap of a window.
// Structure after the paper; default size 12 columns x 4 rows (the Z-7020
// configuration), i.e. 48 SoPs and 192 MAC cells.
module mac_matrix
  import tcn_pkg::*;
#(
  parameter int NROWS = 4,
  parameter int NCOLS = 12
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 tap_valid,
  input  logic [15:0]                          ks,
  input  sample_t [NCOLS-1:0][LANES-1:0]       act,
  input  sample_t [NROWS-1:0][NCOLS-1:0]       wgt,
  output acc_t    [NROWS-1:0][NCOLS-1:0][LANES-1:0] sop_out,
  output logic                                 sop_valid
);
  logic [NROWS-1:0][NCOLS-1:0] v;

  for (genvar r = 0; r < NROWS; r++) begin : g_row
    for (genvar c = 0; c < NCOLS; c++) begin : g_col
      sop #(.LN(LANES)) u_sop (
        .clk, .rst_n, .in_valid(tap_valid), .ks,
        .w(wgt[r][c]), .s(act[c]),
        .out(sop_out[r][c]), .out_valid(v[r][c])
      );
    end
  end

  // all SoPs share valid and ks, so they finish together
  assign sop_valid = v[0][0];
endmodule
