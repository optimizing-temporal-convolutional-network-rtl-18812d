// tb_shift_adder: checks the column sum, partial-result and bias addition,
// the arithmetic right shift, saturation at both ends, the in-order partial
// FIFO (three partials queued before their results) and the 1-cycle latency.
module tb_shift_adder;
  import tcn_pkg::*;
  localparam int C = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0; logic [5:0] shift = 0; logic bias_en = 0, partial_en = 0;
  sample_t bias = 0; logic sop_valid = 0; acc_t [C-1:0][3:0] sop_in = '0;
  logic pr_valid = 0; word_t pr_data = 0;
  logic out_valid; word_t out_data; logic pr_underflow;
  int checks = 0, failures = 0;
  word_t prs [3];

  shift_adder #(.NCOLS(C)) dut (.*);

  function automatic logic signed [15:0] sat(input longint v);
    if (v > 32767) return 16'sh7fff; if (v < -32768) return -16'sd32768; return 16'(v);
  endfunction

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int mode = 0; mode < 4; mode++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      shift = 6'($urandom_range(mode, 8)); bias_en = mode[0]; partial_en = mode[1];
      bias = 16'($urandom);
      for (int k = 0; k < 3; k++) begin
        prs[k] = {$urandom, $urandom};
        pr_valid = partial_en; pr_data = prs[k]; @(negedge clk);
      end
      pr_valid = 0;
      for (int k = 0; k < 3; k++) begin
        longint e [4];
        for (int c = 0; c < C; c++) for (int j = 0; j < 4; j++)
          sop_in[c][j] = (mode == 3 && k == 2) ? 48'sh7fff_ffff_ff : 48'(signed'(16'($urandom)));
        for (int j = 0; j < 4; j++) begin
          e[j] = 0;
          for (int c = 0; c < C; c++) e[j] += longint'(sop_in[c][j]);
          if (partial_en) e[j] += longint'($signed(prs[k][16*j +: 16])) <<< shift;
          if (bias_en)    e[j] += longint'(bias) <<< shift;
        end
        sop_valid = 1; @(negedge clk); sop_valid = 0;
        checks++;
        if (!out_valid) begin failures++; $display("no out_valid"); end
        for (int j = 0; j < 4; j++) begin
          checks++;
          if ($signed(out_data[16*j +: 16]) !== sat(e[j] >>> shift)) begin
            failures++; $display("mode %0d k %0d lane %0d got %0d exp %0d", mode, k, j, $signed(out_data[16*j +: 16]), sat(e[j] >>> shift));
          end
        end
      end
      checks++; if (pr_underflow) begin failures++; $display("underflow"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
