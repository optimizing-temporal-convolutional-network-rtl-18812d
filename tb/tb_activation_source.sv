// tb_activation_source: random stride, dilation, base and output length;
// for every chunk/tap checks the four lane addresses one cycle after issue
// and that lanes past out_len are not requested.
module tb_activation_source;
  import tcn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic issue = 0; logic [15:0] chunk = 0, tap = 0, stride = 1, dilation = 1, out_len = 0;
  logic [31:0] act_base = 0;
  logic [3:0] req; logic [3:0][31:0] addr;
  int checks = 0, failures = 0;

  activation_source dut (.*);

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      issue = 1; stride = 16'($urandom_range(1, 3)); dilation = 16'($urandom_range(1, 64));
      out_len = 16'($urandom_range(1, 40)); chunk = 16'($urandom_range(0, 10)); tap = 16'($urandom_range(0, 23));
      act_base = $urandom_range(0, 4096);
      @(negedge clk); issue = 0;
      for (int j = 0; j < 4; j++) begin
        int win; win = 4 * chunk + j;
        checks++;
        if (req[j] !== (win < out_len)) begin failures++; $display("req lane %0d", j); end
        checks++;
        if (addr[j] !== act_base + win * stride + tap * dilation) begin
          failures++; $display("addr lane %0d got %0d", j, addr[j]);
        end
      end
    end
    @(negedge clk); checks++; if (req !== 0) begin failures++; $display("req without issue"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
