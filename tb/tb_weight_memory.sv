// tb_weight_memory: writes every bank through both write ports at once
// (port 1 must stall when both hit one bank), then reads all banks at one
// broadcast address and checks each bank's own data and that unrequested
// banks read zero.
module tb_weight_memory;
  import tcn_pkg::*;
  localparam int R = 2, C = 3, D = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [R-1:0][C-1:0] rd_req = '0; logic [31:0] rd_addr = 0; sample_t [R-1:0][C-1:0] rd_data;
  logic wr0_valid = 0, wr1_valid = 0, wr1_ready; logic [31:0] wr0_addr = 0, wr1_addr = 0;
  sample_t wr0_data = 0, wr1_data = 0;
  sample_t ref_mem [R*C][16];
  int checks = 0, failures = 0, stalls = 0;

  weight_memory #(.NROWS(R), .NCOLS(C), .DEPTH(D)) dut (.*);

  initial begin
    for (int b = 0; b < R * C; b++) for (int i = 0; i < 16; i++) ref_mem[b][i] = 16'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;
    // port 0 writes words 0..7 of every bank, port 1 words 8..15, same bank order
    for (int b = 0; b < R * C; b++) begin
      int i0, i1; i0 = 0; i1 = 0;
      while (i0 < 8 || i1 < 8) begin
        @(negedge clk);
        wr0_valid = (i0 < 8); wr0_addr = b * D + i0; wr0_data = ref_mem[b][i0 % 16];
        wr1_valid = (i1 < 8); wr1_addr = b * D + 8 + i1; wr1_data = ref_mem[b][(8 + i1) % 16];
        #1;
        if (wr1_valid && !wr1_ready) stalls++;
        if (wr0_valid) i0++;
        if (wr1_valid && wr1_ready) i1++;
      end
    end
    @(negedge clk); wr0_valid = 0; wr1_valid = 0;
    checks++; if (stalls == 0) begin failures++; $display("port 1 never stalled"); end
    for (int i = 0; i < 16; i++) begin
      logic [R-1:0][C-1:0] rq; rq = ($urandom);
      @(negedge clk); rd_req = rq; rd_addr = i;
      @(negedge clk); rd_req = '0;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        checks++;
        if (rd_data[r][c] !== (rq[r][c] ? ref_mem[r * C + c][i] : 16'sd0)) begin
          failures++; $display("bank %0d,%0d word %0d", r, c, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
