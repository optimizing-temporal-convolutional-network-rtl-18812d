// tb_sop: feeds the SoP a stream of taps for several kernel sizes and checks
// that every KS taps the four lanes hold the four window sums, that out_valid
// comes exactly 3 cycles after the last tap and that windows follow each
// other without idle cycles (one result group every KS cycles).
module tb_sop;
  import tcn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0; logic [15:0] ks = 1;
  sample_t w = 0; sample_t [3:0] s = '0;
  acc_t [3:0] out; logic out_valid;
  int checks = 0, failures = 0;
  logic [3:0][63:0] exp_q [$];
  int     due_q [$];
  int     cyc = 0;

  sop dut (.*);

  always @(posedge clk) cyc++;
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected out_valid"); end
      else begin
        logic [3:0][63:0] e; int d; bit bad;
        e = exp_q.pop_front(); d = due_q.pop_front();
        checks++;
        if (cyc != d) begin failures++; $display("latency: at %0d expected %0d", cyc, d); end
        bad = 0;
        for (int j = 0; j < 4; j++) if (out[j] !== e[j][47:0]) begin
          bad = 1; $display("lane %0d got %0d exp %0d", j, out[j], e[j]);
        end
        if (bad) failures++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int kk = 1; kk <= 7; kk += 2) begin
      @(negedge clk); ks = 16'(kk);
      for (int win = 0; win < 6; win++) begin
        logic [3:0][63:0] e;
        e = '0;
        for (int i = 0; i < kk; i++) begin
          w = 16'($urandom); for (int j = 0; j < 4; j++) s[j] = 16'($urandom);
          for (int j = 0; j < 4; j++) e[j] = 64'(longint'(e[j]) + longint'(w) * longint'(s[j]));
          in_valid = 1;
          if (i == kk - 1) begin exp_q.push_back(e); due_q.push_back(cyc + 3); end
          @(negedge clk);
        end
      end
      in_valid = 0;
      repeat (6) @(negedge clk);
    end
    checks++; if (exp_q.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
