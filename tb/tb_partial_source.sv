// tb_partial_source: checks the word address pr_base + chunk and the row
// request mask, one cycle after issue, and no request without issue.
module tb_partial_source;
  localparam int R = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic issue = 0; logic [15:0] chunk = 0; logic [31:0] pr_base = 0; logic [7:0] rows_active = R;
  logic [R-1:0] req; logic [31:0] addr;
  int checks = 0, failures = 0;

  partial_source #(.NROWS(R)) dut (.*);

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      bit i;
      @(negedge clk);
      i = ($urandom_range(0, 2) != 0);
      issue = i; chunk = 16'($urandom_range(0, 500)); pr_base = $urandom_range(0, 1000);
      rows_active = 8'($urandom_range(1, R));
      @(negedge clk); issue = 0;
      checks++; if (addr !== pr_base + chunk) begin failures++; $display("addr"); end
      for (int r = 0; r < R; r++) begin
        checks++;
        if (req[r] !== (i && r < rows_active)) begin failures++; $display("req %0d", r); end
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
