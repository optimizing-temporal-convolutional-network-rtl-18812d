// tb_wdma: DDR model with random stalls and 3-cycle read latency; several
// descriptors are copied while the weight port is randomly held off. Checks
// every weight written (address and data, lane 0 first), the count of
// writes, and one done pulse per descriptor.
module tb_wdma;
  import tcn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; dma_desc_t desc = '0; logic busy, done;
  logic ext_req, ext_gnt, ext_rvalid; logic [31:0] ext_addr; word_t ext_rdata;
  logic ext_we = 1'b0; word_t ext_wdata = '0;  // read-only DDR port
  logic wr_valid, wr_ready = 1; logic [31:0] wr_addr; sample_t wr_data;

  wdma dut (.*);

  logic [31:0] da [1]; logic [63:0] dw [1], dr [1]; int st;
  assign da[0] = ext_addr; assign dw[0] = ext_wdata; assign ext_rdata = dr[0];
  ddr_model #(.NP(1), .WORDS(4096)) u_ddr (.clk, .req(ext_req), .we(ext_we), .addr(da), .wdata(dw),
    .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(dr), .stalls(st));

  int checks = 0, failures = 0, nwr = 0, ndone = 0;
  logic [31:0] exp_addr; int exp_beat;
  always @(negedge clk) wr_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    if (rst_n && done) ndone++;
    if (rst_n && wr_valid && wr_ready) begin
      logic [15:0] e;
      e = u_ddr.mem[exp_beat / 4][16 * (exp_beat % 4) +: 16];
      checks++;
      if (wr_addr !== exp_addr || wr_data !== e) begin failures++; $display("write %0d: %h %h", nwr, wr_addr, wr_data); end
      exp_addr <= exp_addr + 1; exp_beat <= exp_beat + 1; nwr++;
    end
  end

  initial begin
    for (int i = 0; i < 4096; i++) u_ddr.mem[i] = {$urandom, $urandom};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int d = 0; d < 5; d++) begin
      int len, eb, la;
      len = $urandom_range(1, 6); eb = $urandom_range(0, 1000); la = $urandom_range(0, 40000);
      @(negedge clk); desc.ext_addr = eb * 8; desc.loc_addr = la; desc.len = 16'(len);
      exp_addr = la; exp_beat = eb * 4; nwr = 0; ndone = 0;
      start = 1; @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      @(negedge clk);
      checks++; if (nwr != 4 * len) begin failures++; $display("writes %0d", nwr); end
      checks++; if (ndone != 1) begin failures++; $display("done %0d", ndone); end
    end
    checks++; if (st == 0) begin failures++; $display("no DDR stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
