// tb_adma: loads DDR words into a behavioural local memory (one-cycle
// read, random grant stalls on both sides) and stores them back to another
// DDR area; checks both copies word by word and the done pulses.
module tb_adma;
  import tcn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; dma_desc_t desc = '0; logic busy, done;
  logic ext_req, ext_we, ext_gnt, ext_rvalid; logic [31:0] ext_addr; word_t ext_wdata, ext_rdata;
  logic x_req, x_we, x_gnt, x_rvalid = 0; logic [31:0] x_addr; word_t x_wdata, x_rdata = 0;

  adma dut (.*);

  logic [31:0] da [1]; logic [63:0] dw [1], dr [1]; int st;
  assign da[0] = ext_addr; assign dw[0] = ext_wdata; assign ext_rdata = dr[0];
  ddr_model #(.NP(1), .WORDS(4096)) u_ddr (.clk, .req(ext_req), .we(ext_we), .addr(da), .wdata(dw),
    .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(dr), .stalls(st));

  word_t lmem [256];
  logic  xg;
  always @(negedge clk) xg = ($urandom_range(0, 2) != 0);
  assign x_gnt = x_req && xg;
  always @(posedge clk) begin
    x_rvalid <= x_gnt && !x_we;
    if (x_gnt && !x_we) x_rdata <= lmem[x_addr % 256];
    if (x_gnt && x_we) lmem[x_addr % 256] <= x_wdata;
  end

  int checks = 0, failures = 0, ndone = 0;
  always @(posedge clk) if (rst_n && done) ndone++;

  task automatic go(input logic [31:0] ea, input logic [31:0] la, input int len, input bit dir);
    @(negedge clk); desc.ext_addr = ea; desc.loc_addr = la; desc.len = 16'(len); desc.dir = dir;
    start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) u_ddr.mem[i] = {$urandom, $urandom};
    repeat (3) @(posedge clk); rst_n = 1;
    go(100 * 8, 20, 30, 0);
    for (int i = 0; i < 30; i++) begin
      checks++; if (lmem[20 + i] !== u_ddr.mem[100 + i]) begin failures++; $display("load %0d", i); end
    end
    go(2000 * 8, 20, 30, 1);
    for (int i = 0; i < 30; i++) begin
      checks++; if (u_ddr.mem[2000 + i] !== u_ddr.mem[100 + i]) begin failures++; $display("store %0d", i); end
    end
    checks++; if (ndone != 2) begin failures++; $display("done %0d", ndone); end
    checks++; if (st == 0) begin failures++; $display("no DDR stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
