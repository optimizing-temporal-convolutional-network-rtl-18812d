// tb_tcn_workloads: runs the layer shapes of three TCN benchmarks through the
// whole accelerator (csp_top), on a reduced 4-column x 2-row matrix so that
// many layers fit in a short simulation.
//
// Each layer keeps the benchmark's kernel size, dilation and stride and is run
// both sample by sample (one output per time step, B = 1) and batched (B
// output samples per run, with the benchmark's largest batch where the
// activation memory allows):
//   ECG monitoring network:   K 24 d 1, K 16 d 4, K 8 d 8 (B up to 348)
//   Res-TCN (action recog.):  K 8 stride 2 (B up to 144)
//   WaveNet note transcr.:    K 2 d 512, 1x1 skip convolution (B up to 504)
// Channel counts are cut to CIN = 6 input and COUT = 2 output features, which
// still needs two engine runs per layer (4 + 2 input features) chained
// through partial results with the output-half swap, and a bias on the first.
// The testbench acts as the scheduler: kernels and biases come from the DDR
// model through both weight DMAs, activations are written and results read
// back through the processor's crossbar port. Every output is compared with a
// reference convolution computed here, every run's cycle count with
// K*ceil(B/4) + 11. It counts batched runs, B = 1 runs, dilated runs, strided
// runs and runs with a partly filled last group, and fails if one never ran.
module tb_tcn_workloads;
  import tcn_pkg::*;
  localparam int NROWS = 2, NCOLS = 4;
  localparam int CIN = 6, COUT = 2, SH = 8;
  localparam int MAXLIN = 1100, MAXK = 24, MAXL = 512;
  localparam int W_DDR = 32'h0000_0000, B_DDR = 32'h0001_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic reg_en = 0, reg_we = 0; logic [7:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic irq;
  logic host_req = 0, host_we = 0, host_gnt, host_rvalid; logic [31:0] host_addr = 0;
  word_t host_wdata = 0, host_rdata;
  logic [2:0] ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [2:0][31:0] ext_addr; word_t [2:0] ext_wdata, ext_rdata;

  csp_top #(.NROWS(NROWS), .NCOLS(NCOLS)) dut (.*);

  logic [31:0] d_addr [3]; logic [63:0] d_wdata [3], d_rdata [3]; int ddr_stalls;
  always_comb for (int p = 0; p < 3; p++) begin
    d_addr[p] = ext_addr[p]; d_wdata[p] = ext_wdata[p]; ext_rdata[p] = d_rdata[p];
  end
  ddr_model #(.NP(3), .WORDS(16384)) u_ddr (
    .clk, .req(ext_req), .we(ext_we), .addr(d_addr), .wdata(d_wdata),
    .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(d_rdata), .stalls(ddr_stalls));

  int checks = 0, failures = 0;
  int n_batched = 0, n_single = 0, n_dilated = 0, n_strided = 0, n_tail = 0, n_runs = 0;
  logic signed [15:0] x [CIN][MAXLIN];
  logic signed [15:0] w [COUT][CIN][MAXK];
  logic signed [15:0] bias [COUT];
  logic signed [15:0] y [COUT][MAXL];

  task automatic wreg(input int a, input logic [31:0] v);
    @(negedge clk); reg_en = 1; reg_we = 1; reg_addr = 8'(a); reg_wdata = v;
    @(negedge clk); reg_en = 0; reg_we = 0;
  endtask
  task automatic rreg(input int a, output logic [31:0] v);
    @(negedge clk); reg_en = 1; reg_we = 0; reg_addr = 8'(a);
    @(negedge clk); reg_en = 0; v = reg_rdata;
  endtask
  task automatic wait_done(input int b);
    logic [31:0] s;
    do rreg(1, s); while (!s[8+b]);
    wreg(1, 32'(1) << (8 + b));
  endtask
  task automatic host_write(input logic [31:0] a, input word_t v);
    @(negedge clk); host_req = 1; host_we = 1; host_addr = a; host_wdata = v;
    while (!host_gnt) @(negedge clk);
    @(negedge clk); host_req = 0; host_we = 0;
  endtask
  task automatic host_read(input logic [31:0] a, output word_t v);
    @(negedge clk); host_req = 1; host_we = 0; host_addr = a;
    while (!host_gnt) @(negedge clk);
    @(negedge clk); host_req = 0;
    v = host_rdata;
    if (!host_rvalid) begin failures++; $display("host read without rvalid"); end
  endtask

  function automatic logic signed [15:0] sat(input longint v);
    if (v > 32767) return 16'sh7fff; if (v < -32768) return -16'sd32768; return 16'(v);
  endfunction

  // One layer: CIN inputs over two engine runs (features 0..3, then 4..5).
  task automatic run_layer(input string name, input int k, input int dil, input int str, input int lout);
    int lin, linw, nch, cyc, beats;
    word_t v;
    lin  = (lout - 1) * str + (k - 1) * dil + 1;
    linw = (lin + 3) / 4;
    nch  = (lout + 3) / 4;
    beats = (k + 3) / 4;
    // data and reference
    for (int f = 0; f < CIN; f++) for (int i = 0; i < lin; i++) x[f][i] = 16'($urandom_range(0, 400)) - 16'sd200;
    for (int o = 0; o < COUT; o++) begin
      bias[o] = 16'($urandom_range(0, 2000)) - 16'sd1000;
      for (int f = 0; f < CIN; f++) for (int t = 0; t < MAXK; t++)
        w[o][f][t] = (t < k) ? 16'($urandom_range(0, 60)) - 16'sd30 : 16'sd0;
    end
    for (int o = 0; o < COUT; o++) for (int t = 0; t < lout; t++) begin
      longint a0, a1;
      a0 = longint'(bias[o]) <<< SH; a1 = 0;
      for (int f = 0; f < CIN; f++) for (int i = 0; i < k; i++)
        if (f < NCOLS) a0 += longint'(w[o][f][i]) * longint'(x[f][t * str + i * dil]);
        else           a1 += longint'(w[o][f][i]) * longint'(x[f][t * str + i * dil]);
      y[o][t] = sat((longint'(sat(a0 >>> SH)) <<< SH) + a1 >>> SH);
    end
    // DDR image of the kernels (8 beats reserved per feature pair) and biases
    for (int f = 0; f < CIN; f++) for (int o = 0; o < COUT; o++)
      for (int b = 0; b < beats; b++) begin
        v = '0;
        for (int j = 0; j < 4; j++) v[16*j +: 16] = w[o][f][4 * b + j];
        u_ddr.mem[(W_DDR >> 3) + (f * COUT + o) * 8 + b] = v;
      end
    for (int o = 0; o < COUT; o++) u_ddr.mem[(B_DDR >> 3) + o] = {48'd0, bias[o]};
    // kernels: group 0 at word 0 of each bank by WDMA0, group 1 at word 32 by WDMA1
    for (int o = 0; o < COUT; o++) for (int c = 0; c < NCOLS; c++) begin
      wreg(16, W_DDR + (c * COUT + o) * 64); wreg(17, (o * NCOLS + c) * 1024); wreg(18, beats);
      if (NCOLS + c < CIN) begin
        wreg(20, W_DDR + ((NCOLS + c) * COUT + o) * 64); wreg(21, (o * NCOLS + c) * 1024 + 32); wreg(22, beats);
        wreg(0, 32'h6); wait_done(1); wait_done(2);
      end else begin
        wreg(0, 32'h2); wait_done(1);
      end
    end
    for (int o = 0; o < COUT; o++) begin
      wreg(16, B_DDR + o * 8); wreg(17, (o * NCOLS) * 1024 + 1000); wreg(18, 1);
      wreg(0, 32'h2); wait_done(1);
    end
    // activations: group 0 from sample 0, group 1 from sample 4096 (word 1024)
    for (int f = 0; f < CIN; f++) for (int wd = 0; wd < linw; wd++) begin
      v = '0;
      for (int j = 0; j < 4; j++) if (4 * wd + j < lin) v[16*j +: 16] = x[f][4 * wd + j];
      host_write((f % NCOLS) << 11 | ((f / NCOLS) * 1024 + wd), v);
    end
    // two runs
    for (int g = 0; g < 2; g++) begin
      wreg(2, k); wreg(3, dil); wreg(4, str); wreg(5, lout);
      wreg(6, g * 4096); wreg(7, g * 32); wreg(8, 1000); wreg(9, 0); wreg(10, 0);
      wreg(11, (SH << 8) | (g << 2) | (g << 1) | (1 - g));
      wreg(12, COUT); wreg(13, (g == 0) ? NCOLS : CIN - NCOLS);
      @(negedge clk); reg_en = 1; reg_we = 1; reg_addr = 0; reg_wdata = 1;
      @(negedge clk); reg_en = 0; reg_we = 0;
      @(posedge clk); while (!dut.start[0]) @(posedge clk);
      cyc = 0;
      while (!dut.done[0]) begin @(posedge clk); cyc++; end
      wreg(1, 32'h1 << 8);
      checks++;
      if (cyc != k * nch + 11) begin failures++; $display("%s run %0d: %0d cycles, expected %0d", name, g, cyc, k * nch + 11); end
      n_runs++;
      if (lout == 1) n_single++; else n_batched++;
      if (dil > 1) n_dilated++;
      if (str > 1) n_strided++;
      if (lout % 4 != 0) n_tail++;
    end
    // results: after the second run they sit in output modules 0..COUT-1
    for (int o = 0; o < COUT; o++) for (int n = 0; n < nch; n++) begin
      host_read((1 << 23) | (o << 11) | n, v);
      for (int j = 0; j < 4; j++) if (4 * n + j < lout) begin
        checks++;
        if ($signed(v[16*j +: 16]) !== y[o][4 * n + j]) begin
          failures++;
          if (failures < 10) $display("%s y[%0d][%0d] got %0d exp %0d", name, o, 4 * n + j, $signed(v[16*j +: 16]), y[o][4 * n + j]);
        end
      end
    end
    $display("%s: K=%0d d=%0d s=%0d B=%0d done", name, k, dil, str, lout);
  endtask

  initial begin : main
    logic [31:0] s;
    repeat (4) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    run_layer("ECG type 1, B=1",   24, 1, 1, 1);
    run_layer("ECG type 1, B=8",   24, 1, 1, 8);
    run_layer("ECG type 3, B=8",   16, 4, 1, 8);
    run_layer("ECG type 6, B=1",    8, 8, 1, 1);
    run_layer("ECG type 6, B=348",  8, 8, 1, 348);
    run_layer("Res-TCN type 3, B=1",   8, 1, 2, 1);
    run_layer("Res-TCN type 3, B=144", 8, 1, 2, 144);
    run_layer("WN-PNT dilated, B=1",   2, 512, 1, 1);
    run_layer("WN-PNT dilated, B=504", 2, 512, 1, 504);
    run_layer("WN-PNT 1x1, B=7",       1, 1, 1, 7);
    rreg(1, s);
    checks++; if (s[16]) begin failures++; $display("bank conflict seen"); end
    checks++; if (s[17]) begin failures++; $display("partial underflow seen"); end
    checks++; if (n_single == 0)  begin failures++; $display("no B=1 run"); end
    checks++; if (n_batched == 0) begin failures++; $display("no batched run"); end
    checks++; if (n_dilated == 0) begin failures++; $display("no dilated run"); end
    checks++; if (n_strided == 0) begin failures++; $display("no strided run"); end
    checks++; if (n_tail == 0)    begin failures++; $display("no partly filled group"); end
    $display("mechanisms: runs=%0d single=%0d batched=%0d dilated=%0d strided=%0d tail=%0d ddr_stalls=%0d",
             n_runs, n_single, n_batched, n_dilated, n_strided, n_tail, ddr_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
