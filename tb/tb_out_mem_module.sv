// tb_out_mem_module: random reads and writes on both ports against a
// reference array; data written on one port is read back on the other.
module tb_out_mem_module;
  import tcn_pkg::*;
  localparam int D = 2048;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0; logic [31:0] a_addr = 0, b_addr = 0;
  word_t a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  word_t ref_mem [D];
  logic  valid [D];
  int checks = 0, failures = 0;

  out_mem_module #(.DEPTH(D)) dut (.*);

  initial begin
    foreach (valid[i]) valid[i] = 0;
    for (int t = 0; t < 2000; t++) begin
      int aa, ba; bit aw, bw; word_t ad, bd; logic ae, be;
      aa = $urandom_range(0, 63); ba = $urandom_range(0, 63);
      aw = $urandom_range(0, 1); bw = $urandom_range(0, 1);
      if (aa == ba) bw = 0;
      ad = {$urandom, $urandom}; bd = {$urandom, $urandom};
      ae = valid[aa]; be = valid[ba];
      @(negedge clk);
      a_en = 1; a_we = aw; a_addr = aa; a_wdata = ad;
      b_en = 1; b_we = bw; b_addr = ba; b_wdata = bd;
      @(negedge clk); a_en = 0; b_en = 0;
      if (ae) begin checks++; if (a_rdata !== ref_mem[aa]) begin failures++; $display("A %0d", aa); end end
      if (be) begin checks++; if (b_rdata !== ref_mem[ba]) begin failures++; $display("B %0d", ba); end end
      if (aw) begin ref_mem[aa] = ad; valid[aa] = 1; end
      if (bw) begin ref_mem[ba] = bd; valid[ba] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
