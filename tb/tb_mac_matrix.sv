// tb_mac_matrix: a 3-row x 5-column matrix computes one window group per
// SoP with kernel size 4; checks that column samples are shared down the
// columns, each SoP uses its own weights, and all results arrive together.
module tb_mac_matrix;
  import tcn_pkg::*;
  localparam int R = 3, C = 5, KS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tap_valid = 0; logic [15:0] ks = KS;
  sample_t [C-1:0][3:0] act = '0;
  sample_t [R-1:0][C-1:0] wgt = '0;
  acc_t [R-1:0][C-1:0][3:0] sop_out; logic sop_valid;
  longint e [R][C][4];
  int checks = 0, failures = 0;

  mac_matrix #(.NROWS(R), .NCOLS(C)) dut (.*);

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int g = 0; g < 3; g++) begin
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int j = 0; j < 4; j++) e[r][c][j] = 0;
      for (int i = 0; i < KS; i++) begin
        @(negedge clk); tap_valid = 1;
        for (int c = 0; c < C; c++) for (int j = 0; j < 4; j++) act[c][j] = 16'($urandom);
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) wgt[r][c] = 16'($urandom);
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int j = 0; j < 4; j++)
          e[r][c][j] += longint'(wgt[r][c]) * longint'(act[c][j]);
      end
      @(negedge clk); tap_valid = 0;
      repeat (2) @(negedge clk);
      checks++; if (!sop_valid) begin failures++; $display("no sop_valid"); end
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int j = 0; j < 4; j++) begin
        checks++;
        if (sop_out[r][c][j] !== 48'(e[r][c][j])) begin failures++; $display("sop %0d,%0d lane %0d", r, c, j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
