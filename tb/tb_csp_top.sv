// tb_csp_top: end-to-end test of the accelerator at its default size
// (12 columns x 4 rows). The testbench plays the scheduler firmware:
//  - one dilated, strided 1-D convolution layer with CIN = NCOLS + 3 input
//    features and COUT = NROWS - 1 output features is split into two engine
//    runs (input groups of NCOLS and 3 features);
//  - WDMA0 loads the kernels of group 0 while WDMA1 loads those of group 1
//    (same banks, so the weight write port arbitration stalls WDMA1);
//  - ADMA loads group 0's activations, the engine runs group 0 while ADMA
//    loads group 1 into the other half of the activation modules (double
//    buffering);
//  - run 1 accumulates on run 0's outputs as partial results (swap);
//  - ADMA stores the results to DDR, the scheduler also reads one back
//    through the XBAR host port.
// Results are compared with a reference convolution computed here; the
// engine's cycle count is checked against K*ceil(L/4) + 11. Each mechanism
// (DDR stall, weight-port stall, DMA/engine overlap, partial accumulation,
// bias, masked tail lanes, host access) is counted and must occur.
module tb_csp_top;
  import tcn_pkg::*;
  localparam int NROWS = 4, NCOLS = 12;
  localparam int K = 3, DIL = 2, STR = 2, LOUT = 10, SH = 4;
  localparam int LIN  = (LOUT - 1) * STR + (K - 1) * DIL + 1;
  localparam int CIN  = NCOLS + 3, COUT = NROWS - 1;
  localparam int NCH  = (LOUT + 3) / 4;
  localparam int LINW = (LIN + 3) / 4;
  localparam int ACT_DDR = 32'h0000_0000, W_DDR = 32'h0004_0000, B_DDR = 32'h0006_0000, O_DDR = 32'h0008_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic reg_en = 0, reg_we = 0; logic [7:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic irq;
  logic host_req = 0, host_we = 0, host_gnt, host_rvalid; logic [31:0] host_addr = 0;
  word_t host_wdata = 0, host_rdata;
  logic [2:0] ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [2:0][31:0] ext_addr; word_t [2:0] ext_wdata, ext_rdata;

  csp_top dut (.*);

  logic [31:0] d_addr [3]; logic [63:0] d_wdata [3], d_rdata [3]; int ddr_stalls;
  always_comb for (int p = 0; p < 3; p++) begin
    d_addr[p] = ext_addr[p]; d_wdata[p] = ext_wdata[p]; ext_rdata[p] = d_rdata[p];
  end
  ddr_model #(.NP(3), .WORDS(131072)) u_ddr (
    .clk, .req(ext_req), .we(ext_we), .addr(d_addr), .wdata(d_wdata),
    .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(d_rdata), .stalls(ddr_stalls));

  int checks = 0, failures = 0;
  int n_wr1_stall = 0, n_overlap = 0, n_host = 0, n_conflict = 0;
  logic signed [15:0] x [CIN][LIN];
  logic signed [15:0] w [COUT][CIN][K];
  logic signed [15:0] bias [COUT];
  logic signed [15:0] y [COUT][LOUT];

  always @(posedge clk) begin
    if (dut.u_wmem.wr1_valid && !dut.wr1_ready) n_wr1_stall++;
    if (dut.busy[0] && dut.busy[3]) n_overlap++;
    if (dut.conflict) n_conflict++;
  end

  task automatic wreg(input int a, input logic [31:0] v);
    @(negedge clk); reg_en = 1; reg_we = 1; reg_addr = 8'(a); reg_wdata = v;
    @(negedge clk); reg_en = 0; reg_we = 0;
  endtask
  task automatic rreg(input int a, output logic [31:0] v);
    @(negedge clk); reg_en = 1; reg_we = 0; reg_addr = 8'(a);
    @(negedge clk); reg_en = 0; v = reg_rdata;
  endtask
  // wait for sticky done bit b, then clear it
  task automatic wait_done(input int b);
    logic [31:0] s;
    do rreg(1, s); while (!s[8+b]);
    wreg(1, 32'(1) << (8 + b));
  endtask
  task automatic dma(input int ch, input logic [31:0] ea, input logic [31:0] la, input int len, input bit dir);
    wreg(16 + 4 * ch, ea); wreg(17 + 4 * ch, la); wreg(18 + 4 * ch, len);
    if (ch == 2) wreg(27, 32'(dir));
    wreg(0, 32'(1) << (1 + ch));
    wait_done(1 + ch);
  endtask

  function automatic logic signed [15:0] sat(input longint v);
    if (v > 32767) return 16'sh7fff; if (v < -32768) return -16'sd32768; return 16'(v);
  endfunction

  // weights of input group g, bank (r,c) kernel at w_base = g*16
  task automatic load_weights(input int ch, input int g, input int ncols);
    for (int r = 0; r < COUT; r++)
      for (int c = 0; c < ncols; c++)
        dma(ch, W_DDR + ((g * NCOLS + c) * COUT + r) * 8, (r * NCOLS + c) * 1024 + g * 16, 1, 0);
  endtask

  task automatic run_ce(input int g, input int ncols, input bit bias_en, input bit partial, input bit swap, output int cyc);
    wreg(2, K); wreg(3, DIL); wreg(4, STR); wreg(5, LOUT);
    wreg(6, g * 4096); wreg(7, g * 16); wreg(8, 1000); wreg(9, 0); wreg(10, 0);
    wreg(11, (SH << 8) | (int'(swap) << 2) | (int'(partial) << 1) | int'(bias_en));
    wreg(12, COUT); wreg(13, ncols);
    @(negedge clk); reg_en = 1; reg_we = 1; reg_addr = 0; reg_wdata = 1;
    @(negedge clk); reg_en = 0; reg_we = 0;
    @(posedge clk); while (!dut.start[0]) @(posedge clk);
    cyc = 0;
    while (!dut.done[0]) begin @(posedge clk); cyc++; end
  endtask

  initial begin : main
    int cyc0, cyc1; logic [31:0] s;
    // data
    for (int f = 0; f < CIN; f++) for (int i = 0; i < LIN; i++) x[f][i] = 16'($urandom_range(0, 400)) - 16'sd200;
    for (int o = 0; o < COUT; o++) begin
      bias[o] = 16'($urandom_range(0, 100)) - 16'sd50;
      for (int f = 0; f < CIN; f++) for (int k = 0; k < K; k++) w[o][f][k] = 16'($urandom_range(0, 60)) - 16'sd30;
    end
    // reference: run 0 over features 0..NCOLS-1 with bias, run 1 adds the rest
    for (int o = 0; o < COUT; o++) for (int t = 0; t < LOUT; t++) begin
      longint a0, a1;
      a0 = longint'(bias[o]) <<< SH; a1 = 0;
      for (int f = 0; f < CIN; f++) for (int k = 0; k < K; k++)
        if (f < NCOLS) a0 += longint'(w[o][f][k]) * longint'(x[f][t * STR + k * DIL]);
        else           a1 += longint'(w[o][f][k]) * longint'(x[f][t * STR + k * DIL]);
      y[o][t] = sat((longint'(sat(a0 >>> SH)) <<< SH) + a1 >>> SH);
    end
    // DDR image
    for (int f = 0; f < CIN; f++) for (int wd = 0; wd < LINW; wd++) begin
      logic [63:0] v; v = '0;
      for (int j = 0; j < 4; j++) if (4 * wd + j < LIN) v[16*j +: 16] = x[f][4 * wd + j];
      u_ddr.mem[(ACT_DDR >> 3) + f * 64 + wd] = v;
    end
    for (int f = 0; f < CIN; f++) for (int o = 0; o < COUT; o++) begin
      logic [63:0] v; v = '0;
      for (int k = 0; k < K; k++) v[16*k +: 16] = w[o][f][k];
      u_ddr.mem[(W_DDR >> 3) + f * COUT + o] = v;
    end
    for (int o = 0; o < COUT; o++) u_ddr.mem[(B_DDR >> 3) + o] = {48'd0, bias[o]};

    repeat (4) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);

    // weights: two DMAs in parallel into the same banks
    load_weights(0, 0, NCOLS);
    // biases through WDMA0 (bank (r,0), word 1000)
    for (int r = 0; r < COUT; r++) dma(0, B_DDR + r * 8, (r * NCOLS) * 1024 + 1000, 1, 0);
    // WDMA0 and WDMA1 together: start both, then wait for both
    for (int r = 0; r < COUT; r++) for (int c = 0; c < 3; c++) begin
      wreg(16, W_DDR + ((NCOLS + c) * COUT + r) * 8); wreg(17, (r * NCOLS + c) * 1024 + 16); wreg(18, 1);
      wreg(20, W_DDR + ((NCOLS + c) * COUT + r) * 8); wreg(21, (r * NCOLS + c) * 1024 + 16); wreg(22, 1);
      wreg(0, 32'h6);
      wait_done(1); wait_done(2);
    end

    // activations of group 0 into the lower half of each module
    for (int c = 0; c < NCOLS; c++) dma(2, ACT_DDR + c * 64 * 8, (0 << 23) | (c << 11) | 0, LINW, 0);

    // run 0 while ADMA loads group 1 (3 features) into the upper half (sample 4096 = word 1024)
    wreg(24, ACT_DDR + (NCOLS + 0) * 64 * 8); wreg(25, (0 << 11) | 1024); wreg(26, LINW); wreg(27, 0);
    wreg(0, 32'h8);
    run_ce(0, NCOLS, 1, 0, 0, cyc0);
    checks++; if (cyc0 != K * NCH + 11) begin failures++; $display("run0 cycles %0d expected %0d", cyc0, K * NCH + 11); end
    wait_done(3);
    wreg(1, 32'h1 << 8);
    for (int c = 1; c < 3; c++) dma(2, ACT_DDR + (NCOLS + c) * 64 * 8, (c << 11) | 1024, LINW, 0);

    // run 1: partials from the upper output half (run 0's outputs), outputs to the lower half
    run_ce(1, 3, 0, 1, 1, cyc1);
    checks++; if (cyc1 != K * NCH + 11) begin failures++; $display("run1 cycles %0d", cyc1); end
    wreg(1, 32'h1 << 8);

    // store results of rows 0..COUT-1 (output modules 0..COUT-1) to DDR
    for (int r = 0; r < COUT; r++) dma(2, O_DDR + r * 64 * 8, (1 << 23) | (r << 11), NCH, 1);
    for (int r = 0; r < COUT; r++) for (int t = 0; t < LOUT; t++) begin
      logic signed [15:0] got; got = u_ddr.mem[(O_DDR >> 3) + r * 64 + t / 4][16 * (t % 4) +: 16];
      checks++;
      if (got !== y[r][t]) begin failures++; if (failures < 10) $display("y[%0d][%0d] got %0d exp %0d", r, t, got, y[r][t]); end
    end
    // scheduler reads row 1, word 0 through the host port
    @(negedge clk); host_req = 1; host_we = 0; host_addr = (1 << 23) | (1 << 11);
    while (!host_gnt) @(negedge clk);
    @(negedge clk); host_req = 0;
    checks++; n_host++;
    if (!host_rvalid || host_rdata[15:0] !== y[1][0]) begin failures++; $display("host read %h", host_rdata); end

    rreg(1, s);
    checks++; if (s[16] || n_conflict != 0) begin failures++; $display("bank conflict seen"); end
    checks++; if (s[17]) begin failures++; $display("partial underflow seen"); end
    // mechanisms
    checks++; if (ddr_stalls == 0)  begin failures++; $display("no DDR stall"); end
    checks++; if (n_wr1_stall == 0) begin failures++; $display("no weight-port stall"); end
    checks++; if (n_overlap == 0)   begin failures++; $display("no DMA/CE overlap"); end
    $display("mechanisms: ddr_stalls=%0d wr1_stalls=%0d overlap_cycles=%0d host=%0d partial_runs=1 bias_runs=1 tail_lanes=%0d",
             ddr_stalls, n_wr1_stall, n_overlap, n_host, 4 * NCH - LOUT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
