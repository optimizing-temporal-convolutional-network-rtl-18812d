// tb_xbar: both masters issue random reads and writes to activation and
// output modules (behavioural one-cycle memories behind the slave ports).
// Checks routing (each write lands in the addressed module only), read data
// returned to the right master, parallel service of different modules, and
// that master 1 waits when both masters address the same module.
module tb_xbar;
  import tcn_pkg::*;
  localparam int R = 2, C = 3, NT = C + 2 * R;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] m_req = 0, m_we = 0, m_gnt, m_rvalid; logic [1:0][31:0] m_addr = '0;
  word_t [1:0] m_wdata = '0, m_rdata;
  logic [C-1:0] act_en, act_we; logic [31:0] act_addr [C]; word_t [C-1:0] act_wdata, act_rdata;
  logic [2*R-1:0] out_en, out_we; logic [31:0] out_addr [2*R]; word_t [2*R-1:0] out_wdata, out_rdata;

  xbar #(.NROWS(R), .NCOLS(C)) dut (.*);

  word_t mem [NT][64];
  always_ff @(posedge clk) begin
    for (int k = 0; k < C; k++) if (act_en[k]) begin
      if (act_we[k]) mem[k][act_addr[k] % 64] <= act_wdata[k];
      act_rdata[k] <= mem[k][act_addr[k] % 64];
    end
    for (int k = 0; k < 2 * R; k++) if (out_en[k]) begin
      if (out_we[k]) mem[C + k][out_addr[k] % 64] <= out_wdata[k];
      out_rdata[k] <= mem[C + k][out_addr[k] % 64];
    end
  end

  word_t ref_mem [NT][64];
  int checks = 0, failures = 0, n_par = 0, n_wait = 0;

  function automatic logic [31:0] mk(input int t, input int w);
    return (t < C) ? ((t << 11) | w) : ((1 << 23) | ((t - C) << 11) | w);
  endfunction

  initial begin
    for (int t = 0; t < NT; t++) for (int w = 0; w < 64; w++) begin
      ref_mem[t][w] = {$urandom, $urandom}; mem[t][w] = ref_mem[t][w];
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      int t [2], w [2]; bit wr [2]; word_t d [2]; logic [1:0] g; word_t exp_r [2];
      for (int m = 0; m < 2; m++) begin
        t[m] = $urandom_range(0, NT - 1); w[m] = $urandom_range(0, 63);
        wr[m] = $urandom_range(0, 1); d[m] = {$urandom, $urandom};
      end
      if (t[0] == t[1] && w[0] == w[1]) wr[1] = 0;
      @(negedge clk);
      for (int m = 0; m < 2; m++) begin
        m_req[m] = 1; m_we[m] = wr[m]; m_addr[m] = mk(t[m], w[m]); m_wdata[m] = d[m];
      end
      #1 g = m_gnt;
      checks++;
      if (g[0] !== 1'b1 || g[1] !== (t[0] != t[1])) begin failures++; $display("grant %b", g); end
      if (g == 2'b11) n_par++;
      if (!g[1]) n_wait++;
      for (int m = 0; m < 2; m++) exp_r[m] = ref_mem[t[m]][w[m]];
      @(negedge clk); m_req = 0;
      for (int m = 0; m < 2; m++) if (g[m]) begin
        if (!wr[m]) begin
          checks++;
          if (!m_rvalid[m] || m_rdata[m] !== exp_r[m]) begin failures++; $display("read m%0d t%0d", m, t[m]); end
        end else ref_mem[t[m]][w[m]] = d[m];
      end
    end
    for (int t = 0; t < NT; t++) for (int w = 0; w < 64; w++) begin
      checks++; if (mem[t][w] !== ref_mem[t][w]) begin failures++; $display("mem %0d %0d", t, w); end
    end
    checks++; if (n_par == 0 || n_wait == 0) begin failures++; $display("par %0d wait %0d", n_par, n_wait); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
