// tb_act_mem_module: fills a module through the 64-bit word port, reads it
// back through that port, then reads four lanes per cycle with the access
// pattern of a SoP (a, a+s, a+2s, a+3s) for strides 1..3 and checks every
// sample and that no conflict is flagged. Finally it forces a same-bank
// pair of lanes and checks that `conflict` rises.
module tb_act_mem_module;
  import tcn_pkg::*;
  localparam int N = 8 * 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] rd_req = 0; logic [3:0][31:0] rd_addr = '0; sample_t [3:0] rd_data; logic conflict;
  logic b_en = 0, b_we = 0; logic [31:0] b_addr = 0; word_t b_wdata = 0, b_rdata;
  sample_t ref_mem [N];
  int checks = 0, failures = 0, nconf = 0;

  act_mem_module dut (.*);

  always @(posedge clk) if (conflict) nconf++;

  initial begin
    for (int i = 0; i < N; i++) ref_mem[i] = 16'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int wd = 0; wd < N / 4; wd++) begin
      @(negedge clk); b_en = 1; b_we = 1; b_addr = wd;
      b_wdata = {ref_mem[4*wd+3], ref_mem[4*wd+2], ref_mem[4*wd+1], ref_mem[4*wd]};
    end
    @(negedge clk); b_en = 0; b_we = 0;
    for (int t = 0; t < 50; t++) begin
      int wd; wd = $urandom_range(0, N / 4 - 1);
      @(negedge clk); b_en = 1; b_addr = wd; @(negedge clk); b_en = 0;
      checks++;
      if (b_rdata !== {ref_mem[4*wd+3], ref_mem[4*wd+2], ref_mem[4*wd+1], ref_mem[4*wd]}) begin
        failures++; $display("word read %0d", wd);
      end
    end
    for (int t = 0; t < 600; t++) begin
      int s, a; logic [3:0] rq;
      s = $urandom_range(1, 3); a = $urandom_range(0, N - 1 - 3 * s);
      rq = 4'($urandom);
      @(negedge clk); rd_req = rq;
      for (int j = 0; j < 4; j++) rd_addr[j] = a + j * s;
      @(negedge clk); rd_req = 0;
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (rd_data[j] !== (rq[j] ? ref_mem[a + j * s] : 16'sd0)) begin
          failures++; $display("lane %0d stride %0d addr %0d", j, s, a + j * s);
        end
      end
    end
    checks++; if (nconf != 0) begin failures++; $display("conflict for stride <= 3"); end
    // stride 4 puts lanes 0 and 2 on one bank: conflict must be flagged
    @(negedge clk); rd_req = 4'b0101; rd_addr[0] = 0; rd_addr[2] = 8;
    #1 checks++; if (!conflict) begin failures++; $display("conflict not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
