// ddr_model: behavioural off-chip memory for the testbenches (not synthesizable
// intent). NP independent request/grant ports share one array of 64-bit words
// addressed by byte address / 8. A port's request is granted on a cycle unless
// a pseudo-random stall hits (STALL_PCT percent); a granted read returns its
// data LAT cycles later with rvalid. Writes complete at the grant. `stalls`
// counts the cycles a request waited. The array is also preloaded and read
// directly by the testbenches, so a plain always block (not always_ff) models
// the clocked side.
module ddr_model #(
  parameter int NP        = 3,
  parameter int WORDS     = 65536,
  parameter int LAT       = 3,
  parameter int STALL_PCT = 25
) (
  input  logic              clk,
  input  logic [NP-1:0]     req,
  input  logic [NP-1:0]     we,
  input  logic [31:0]       addr  [NP],
  input  logic [63:0]       wdata [NP],
  output logic [NP-1:0]     gnt,
  output logic [NP-1:0]     rvalid,
  output logic [63:0]       rdata [NP],
  output int                stalls
);
  logic [63:0] mem [WORDS];
  int          cnt [NP];
  logic [63:0] pend [NP];
  logic [31:0] lfsr = 32'h1234_5678;

  initial begin
    stalls = 0;
    for (int p = 0; p < NP; p++) begin cnt[p] = 0; rvalid[p] = 1'b0; rdata[p] = '0; end
    foreach (mem[i]) mem[i] = '0;
  end

  always_comb
    for (int p = 0; p < NP; p++)
      gnt[p] = req[p] && (int'((lfsr >> (p * 7)) % 100) >= STALL_PCT);

  always @(posedge clk) begin
    lfsr <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
    for (int p = 0; p < NP; p++) begin
      rvalid[p] <= 1'b0;
      if (req[p] && !gnt[p]) stalls <= stalls + 1;
      if (gnt[p]) begin
        if (we[p]) mem[(addr[p] >> 3) % WORDS] <= wdata[p];
        else begin pend[p] <= mem[(addr[p] >> 3) % WORDS]; cnt[p] <= LAT; end
      end
      if (cnt[p] > 0) begin
        cnt[p] <= cnt[p] - 1;
        if (cnt[p] == 1) begin rvalid[p] <= 1'b1; rdata[p] <= pend[p]; end
      end
    end
  end
endmodule
