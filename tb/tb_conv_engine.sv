// tb_conv_engine: a 2-row x 3-column engine with behavioural one-cycle
// memories around it. Several layers with different kernel size, dilation,
// stride and output length are run; each layer runs twice, the second run
// accumulating a new input group onto the first run's outputs (partials),
// with bias on the first run. Results are compared with a reference
// convolution and every run must take kernel_size * ceil(out_len/4) + 11
// cycles from start to done.
module tb_conv_engine;
  import tcn_pkg::*;
  localparam int R = 2, C = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; ce_cfg_t cfg = '0; logic busy, done, pr_underflow;
  logic [C-1:0][3:0] act_req; logic [3:0][31:0] act_addr; sample_t [C-1:0][3:0] act_data;
  logic [R-1:0][C-1:0] w_req; logic [31:0] w_addr; sample_t [R-1:0][C-1:0] w_data;
  logic [R-1:0] pr_req, os_we; logic [31:0] pr_addr, os_addr; word_t [R-1:0] pr_data, os_wdata;

  conv_engine #(.NROWS(R), .NCOLS(C)) dut (.*);

  // behavioural memories
  sample_t amem [C][4096];
  sample_t wmem [R][C][1024];
  word_t   omem [R][256];     // outputs of run A, then partials of run B
  word_t   omem2 [R][256];    // outputs of run B
  bit      second;
  always_ff @(posedge clk) begin
    for (int c = 0; c < C; c++) for (int j = 0; j < 4; j++)
      act_data[c][j] <= act_req[c][j] ? amem[c][act_addr[j] % 4096] : 16'sd0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
      w_data[r][c] <= w_req[r][c] ? wmem[r][c][w_addr % 1024] : 16'sd0;
    for (int r = 0; r < R; r++) begin
      if (pr_req[r]) pr_data[r] <= omem[r][pr_addr % 256];
      if (os_we[r]) begin
        if (second) omem2[r][os_addr % 256] <= os_wdata[r];
        else        omem[r][os_addr % 256]  <= os_wdata[r];
      end
    end
  end

  int checks = 0, failures = 0;
  function automatic logic signed [15:0] sat(input longint v);
    if (v > 32767) return 16'sh7fff; if (v < -32768) return -16'sd32768; return 16'(v);
  endfunction

  task automatic run(input ce_cfg_t c);
    int cyc;
    @(negedge clk); cfg = c; start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; if (cyc > 5000) break; end
    checks++;
    if (cyc != c.kernel_size * ((c.out_len + 3) / 4) + 11) begin
      failures++; $display("run took %0d cycles, expected %0d", cyc, c.kernel_size * ((c.out_len + 3) / 4) + 11);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int layer = 0; layer < 6; layer++) begin
      int K, D, S, L, SH, RA;
      logic signed [15:0] xa [C][512], xb [C][512], wa [R][C][32], wb [R][C][32], bias [R];
      ce_cfg_t c;
      K = $urandom_range(1, 9); D = $urandom_range(1, 8); S = $urandom_range(1, 3);
      L = $urandom_range(1, 30); SH = $urandom_range(0, 6); RA = $urandom_range(1, R);
      if (layer == 0) begin K = 2; D = 1; S = 1; L = 8; end
      for (int ci = 0; ci < C; ci++) for (int i = 0; i < 512; i++) begin
        xa[ci][i] = 16'($urandom_range(0, 2000)) - 16'sd1000;
        xb[ci][i] = 16'($urandom_range(0, 2000)) - 16'sd1000;
        amem[ci][i] = xa[ci][i]; amem[ci][1024 + i] = xb[ci][i];
      end
      for (int r = 0; r < R; r++) begin
        bias[r] = 16'($urandom_range(0, 200)) - 16'sd100;
        wmem[r][0][700] = bias[r];
        for (int ci = 0; ci < C; ci++) for (int k = 0; k < K; k++) begin
          wa[r][ci][k] = 16'($urandom_range(0, 100)) - 16'sd50;
          wb[r][ci][k] = 16'($urandom_range(0, 100)) - 16'sd50;
          wmem[r][ci][k] = wa[r][ci][k]; wmem[r][ci][100 + k] = wb[r][ci][k];
        end
      end
      c = '0;
      c.kernel_size = 16'(K); c.dilation = 16'(D); c.stride = 16'(S); c.out_len = 16'(L);
      c.act_base = 0; c.w_base = 0; c.bias_addr = 700; c.pr_base = 0; c.os_base = 10;
      c.shift = 6'(SH); c.bias_en = 1; c.partial_en = 0; c.rows_active = 8'(RA); c.cols_active = C;
      second = 0; run(c);
      c.act_base = 1024; c.w_base = 100; c.bias_en = 0; c.partial_en = 1; c.pr_base = 10; c.os_base = 40;
      c.cols_active = 8'($urandom_range(1, C));
      second = 1; run(c);
      for (int r = 0; r < RA; r++) for (int t = 0; t < L; t++) begin
        longint a0, a1; logic signed [15:0] e, g;
        a0 = longint'(bias[r]) <<< SH; a1 = 0;
        for (int ci = 0; ci < C; ci++) for (int k = 0; k < K; k++) begin
          a0 += longint'(wa[r][ci][k]) * longint'(xa[ci][t * S + k * D]);
          if (ci < int'(c.cols_active)) a1 += longint'(wb[r][ci][k]) * longint'(xb[ci][t * S + k * D]);
        end
        e = sat(((longint'(sat(a0 >>> SH))) <<< SH) + a1 >>> SH);
        g = omem2[r][40 + t / 4][16 * (t % 4) +: 16];
        checks++;
        if (g !== e) begin failures++; if (failures < 10) $display("layer %0d row %0d t %0d got %0d exp %0d", layer, r, t, g, e); end
      end
      checks++; if (pr_underflow) begin failures++; $display("partial underflow"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
