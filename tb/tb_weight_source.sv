// tb_weight_source: checks the tap address w_base + tap, the bias read of
// column 0 at bias_addr, and the active row/column request mask.
module tb_weight_source;
  localparam int R = 4, C = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic issue = 0, bias_rd = 0; logic [15:0] tap = 0;
  logic [31:0] w_base = 0, bias_addr = 0; logic [7:0] rows_active = R, cols_active = C;
  logic [R-1:0][C-1:0] req; logic [31:0] addr;
  int checks = 0, failures = 0;

  weight_source #(.NROWS(R), .NCOLS(C)) dut (.*);

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      bit b;
      @(negedge clk);
      b = ($urandom_range(0, 3) == 0);
      issue = !b; bias_rd = b; tap = 16'($urandom_range(0, 30));
      w_base = $urandom_range(0, 900); bias_addr = $urandom_range(0, 1023);
      rows_active = 8'($urandom_range(1, R)); cols_active = 8'($urandom_range(1, C));
      @(negedge clk); issue = 0; bias_rd = 0;
      checks++;
      if (addr !== (b ? bias_addr : w_base + tap)) begin failures++; $display("addr"); end
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        checks++;
        if (req[r][c] !== (r < rows_active && (b ? c == 0 : c < cols_active))) begin
          failures++; $display("req %0d %0d", r, c);
        end
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
