// tb_output_sink: streams result words with gaps, checks that word k goes to
// os_base + k with the right data and row enables one cycle later, and that
// done pulses exactly once, with the last word.
module tb_output_sink;
  import tcn_pkg::*;
  localparam int R = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0; logic [31:0] os_base = 0; logic [15:0] nwords = 0; logic [7:0] rows_active = R;
  logic in_valid = 0; word_t [R-1:0] in_data = '0;
  logic [R-1:0] we; logic [31:0] addr; word_t [R-1:0] wdata; logic done;
  int checks = 0, failures = 0, ndone = 0;

  output_sink #(.NROWS(R)) dut (.*);

  always @(posedge clk) if (rst_n && done) ndone++;

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      @(negedge clk); clear = 1; os_base = $urandom_range(0, 1000); nwords = 16'($urandom_range(1, 9));
      rows_active = 8'($urandom_range(1, R)); ndone = 0;
      @(negedge clk); clear = 0;
      for (int k = 0; k < nwords; k++) begin
        word_t [R-1:0] d;
        for (int r = 0; r < R; r++) d[r] = {$urandom, $urandom};
        in_valid = 1; in_data = d; @(negedge clk); in_valid = 0;
        checks++;
        if (addr !== os_base + k || wdata !== d) begin failures++; $display("word %0d", k); end
        for (int r = 0; r < R; r++) begin
          checks++; if (we[r] !== (r < rows_active)) begin failures++; $display("we %0d", r); end
        end
        checks++; if (done !== (k == nwords - 1)) begin failures++; $display("done at %0d", k); end
        if ($urandom_range(0, 1)) @(negedge clk);
      end
      @(negedge clk);
      checks++; if (ndone != 1) begin failures++; $display("done pulses %0d", ndone); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
