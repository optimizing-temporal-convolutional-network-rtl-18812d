// tb_csp_regs: writes every configuration register and checks the decoded
// structs, read-back values, one-cycle start pulses, sticky done and error
// bits with write-one-to-clear, and the interrupt line.
module tb_csp_regs;
  import tcn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic reg_en = 0, reg_we = 0; logic [7:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  ce_cfg_t ce_cfg; logic [3:0] start, busy = 0, done = 0; dma_desc_t desc [3];
  logic conflict = 0, underflow = 0, irq;
  int checks = 0, failures = 0;

  csp_regs dut (.*);

  task automatic wr(input int a, input logic [31:0] v);
    @(negedge clk); reg_en = 1; reg_we = 1; reg_addr = 8'(a); reg_wdata = v;
    @(negedge clk); reg_en = 0; reg_we = 0;
  endtask
  task automatic rd(input int a, output logic [31:0] v);
    @(negedge clk); reg_en = 1; reg_we = 0; reg_addr = 8'(a);
    @(negedge clk); reg_en = 0; v = reg_rdata;
  endtask
  task automatic chk(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++; if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] v;
    repeat (3) @(posedge clk); rst_n = 1;
    wr(2, 7); wr(3, 5); wr(4, 3); wr(5, 99); wr(6, 32'h1234); wr(7, 32'h55); wr(8, 1000);
    wr(9, 32'h77); wr(10, 32'h88); wr(11, 32'h0503); wr(12, 3); wr(13, 11);
    chk(ce_cfg.kernel_size, 7, "ks"); chk(ce_cfg.dilation, 5, "dil"); chk(ce_cfg.stride, 3, "stride");
    chk(ce_cfg.out_len, 99, "len"); chk(ce_cfg.act_base, 32'h1234, "act"); chk(ce_cfg.w_base, 32'h55, "w");
    chk(ce_cfg.bias_addr, 1000, "bias"); chk(ce_cfg.pr_base, 32'h77, "pr"); chk(ce_cfg.os_base, 32'h88, "os");
    chk(ce_cfg.shift, 5, "shift"); chk({ce_cfg.swap, ce_cfg.partial_en, ce_cfg.bias_en}, 3'b011, "flags");
    chk(ce_cfg.rows_active, 3, "rows"); chk(ce_cfg.cols_active, 11, "cols");
    rd(2, v); chk(v, 7, "rd ks"); rd(11, v); chk(v, 32'h0503, "rd flags"); rd(13, v); chk(v, 11, "rd cols");
    for (int d = 0; d < 3; d++) begin
      wr(16 + 4 * d, 32'h1000 * (d + 1)); wr(17 + 4 * d, 32'h20 + d); wr(18 + 4 * d, 10 + d);
    end
    wr(27, 1);
    for (int d = 0; d < 3; d++) begin
      chk(desc[d].ext_addr, 32'h1000 * (d + 1), "ext"); chk(desc[d].loc_addr, 32'h20 + d, "loc");
      chk(desc[d].len, 10 + d, "len");
    end
    chk(desc[2].dir, 1, "dir");
    // start pulse lasts one cycle
    @(negedge clk); reg_en = 1; reg_we = 1; reg_addr = 0; reg_wdata = 32'h9;
    @(negedge clk); reg_en = 0; reg_we = 0; chk(start, 4'h9, "start");
    @(negedge clk); chk(start, 0, "start pulse");
    // sticky done, irq, clear
    busy = 4'b0101; done = 4'b0010; conflict = 1; @(negedge clk); done = 0; conflict = 0;
    rd(1, v); chk(v, {14'd0, 2'b01, 4'd0, 4'b0010, 4'd0, 4'b0101}, "status");
    chk(irq, 1, "irq");
    wr(1, 32'h0001_0200); rd(1, v); chk(v[17:8], 0, "cleared"); chk(irq, 0, "irq cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
