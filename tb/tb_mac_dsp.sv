// tb_mac_dsp: drives the MAC cell with windows of random length, including
// bubbles between operands, and checks each window's sum and the 3-cycle
// latency from the last operand to acc_valid.
module tb_mac_dsp;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, first = 0;
  logic signed [15:0] sample = 0, weight = 0;
  logic signed [47:0] acc;
  logic acc_valid;
  int checks = 0, failures = 0;

  mac_dsp dut (.*);

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int win = 0; win < 40; win++) begin
      int n; longint exp; int t_last;
      n = $urandom_range(1, 9); exp = 0;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        in_valid = 1; first = (i == 0);
        sample = 16'($urandom); weight = 16'($urandom);
        if (win == 5) begin sample = 16'sh8000; weight = 16'sh8000; end
        exp += longint'(sample) * longint'(weight);
        if ($urandom_range(0, 3) == 0 && i != n - 1) begin
          @(negedge clk); in_valid = 0;   // bubble
        end
      end
      @(negedge clk); in_valid = 0; t_last = 0;
      // acc_valid for the last operand is expected in the 3rd cycle after it
      while (!acc_valid || t_last < 2) begin
        @(negedge clk); t_last++;
        if (t_last > 3) break;
      end
      checks++;
      if (acc !== 48'(exp) || t_last != 2) begin
        failures++; $display("win %0d: acc %0d exp %0d t %0d", win, acc, exp, t_last);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
