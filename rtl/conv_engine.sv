// conv_engine: the Convolution Engine - sequencer, MAC matrix, shift adders,
// and the four programmable sources/sinks around them.
//
// A run computes rows_active output features (one per matrix row) from
// cols_active input features (one per column) over out_len output samples.
// The sequencer walks the output in chunks of four windows; for each chunk it
// issues kernel_size taps, one per cycle, back to back, so the matrix is busy
// every cycle whatever the kernel size, stride or dilation. Per tap the
// activation source fetches four samples per column (one per window), the
// weight source one weight per SoP; at the first tap of a chunk the
// partial-results source fetches the rows' earlier partial sums. When a
// chunk's last tap leaves the SoPs, each row's shift adder adds the columns,
// the partials and the bias and the output sink writes the 64-bit result word.
// Before the first chunk the weight source reads the bias of each row.
//
// Timing: start (one cycle, with cfg) -> 3 cycles of bias read -> K*ceil(L/4)
// issue cycles -> 7 cycles pipeline drain (source reg, BRAM, 3 DSP stages,
// shift adder, sink), then done pulses. So a run takes K*ceil(L/4) + 11 cycles
// from start to done. The memories sit outside the engine; all their reads
// have one cycle latency. The paper gives the parts and their roles; the
// sequencing and timing are this design's own.
module conv_engine
  import tcn_pkg::*;
#(
  parameter int NROWS = 4,
  parameter int NCOLS = 12
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                start,
  input  ce_cfg_t                             cfg,
  output logic                                busy,
  output logic                                done,
  // activation memory modules (one per column)
  output logic [NCOLS-1:0][LANES-1:0]         act_req,
  output logic [LANES-1:0][AW-1:0]            act_addr,
  input  sample_t [NCOLS-1:0][LANES-1:0]      act_data,
  // weight memory region
  output logic [NROWS-1:0][NCOLS-1:0]         w_req,
  output logic [AW-1:0]                       w_addr,
  input  sample_t [NROWS-1:0][NCOLS-1:0]      w_data,
  // partial-results modules
  output logic [NROWS-1:0]                    pr_req,
  output logic [AW-1:0]                       pr_addr,
  input  word_t [NROWS-1:0]                   pr_data,
  // output modules
  output logic [NROWS-1:0]                    os_we,
  output logic [AW-1:0]                       os_addr,
  output word_t [NROWS-1:0]                   os_wdata,
  // status
  output logic                                pr_underflow
);
  typedef enum logic [2:0] {IDLE, BIAS, BWAIT, BLATCH, RUN, DRAIN} state_t;
  state_t      state;
  ce_cfg_t     c;
  logic [15:0] chunk, tap, nchunks;
  logic        issue, bias_rd;
  logic [2:0]  bcnt;

  assign issue   = (state == RUN);
  assign bias_rd = (state == BIAS);
  assign busy    = (state != IDLE);

  logic sink_done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE; c <= '0; chunk <= '0; tap <= '0; nchunks <= '0; bcnt <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          c       <= cfg;
          nchunks <= (cfg.out_len + 16'd3) >> 2;
          chunk   <= '0;
          tap     <= '0;
          state   <= BIAS;
        end
        BIAS:   begin bcnt <= '0; state <= BWAIT; end
        BWAIT:  begin bcnt <= bcnt + 3'd1; if (bcnt == 3'd0) state <= BLATCH; end
        BLATCH: state <= (nchunks == 0) ? IDLE : RUN;
        RUN: begin
          if (tap == c.kernel_size - 16'd1 || c.kernel_size <= 16'd1) begin
            tap <= '0;
            if (chunk == nchunks - 16'd1) state <= DRAIN;
            chunk <= chunk + 16'd1;
          end else begin
            tap <= tap + 16'd1;
          end
        end
        DRAIN: if (sink_done) begin done <= 1'b1; state <= IDLE; end
        default: state <= IDLE;
      endcase
    end
  end

  // ---------------- sources ----------------
  logic [LANES-1:0] a_req;
  activation_source u_asrc (
    .clk, .rst_n, .issue, .chunk, .tap,
    .stride(c.stride), .dilation(c.dilation), .out_len(c.out_len), .act_base(c.act_base),
    .req(a_req), .addr(act_addr)
  );
  always_comb
    for (int k = 0; k < NCOLS; k++) act_req[k] = (k < int'(c.cols_active)) ? a_req : '0;

  weight_source #(.NROWS(NROWS), .NCOLS(NCOLS)) u_wsrc (
    .clk, .rst_n, .issue, .bias_rd, .tap,
    .w_base(c.w_base), .bias_addr(c.bias_addr),
    .rows_active(c.rows_active), .cols_active(c.cols_active),
    .req(w_req), .addr(w_addr)
  );

  partial_source #(.NROWS(NROWS)) u_psrc (
    .clk, .rst_n, .issue(issue && tap == 16'd0 && c.partial_en), .chunk,
    .pr_base(c.pr_base), .rows_active(c.rows_active),
    .req(pr_req), .addr(pr_addr)
  );

  // ---------------- datapath ----------------
  // issue (t) -> source regs (t+1) -> memory data (t+2) -> matrix
  logic [1:0] iss_d;
  logic       pr_v;
  sample_t [NROWS-1:0] bias_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      iss_d <= '0; pr_v <= 1'b0; bias_q <= '0;
    end else begin
      iss_d <= {iss_d[0], issue};
      pr_v  <= |pr_req;
      if (state == BLATCH)
        for (int r = 0; r < NROWS; r++) bias_q[r] <= w_data[r][0];
    end
  end

  acc_t [NROWS-1:0][NCOLS-1:0][LANES-1:0] sop_out;
  logic sop_valid;
  mac_matrix #(.NROWS(NROWS), .NCOLS(NCOLS)) u_mm (
    .clk, .rst_n, .tap_valid(iss_d[1]), .ks(c.kernel_size),
    .act(act_data), .wgt(w_data), .sop_out, .sop_valid
  );

  word_t [NROWS-1:0] sa_out;
  logic  [NROWS-1:0] sa_valid, sa_uf;
  for (genvar r = 0; r < NROWS; r++) begin : g_sa
    shift_adder #(.NCOLS(NCOLS)) u_sa (
      .clk, .rst_n, .clear(start && state == IDLE), .shift(c.shift),
      .bias_en(c.bias_en), .partial_en(c.partial_en), .bias(bias_q[r]),
      .sop_valid, .sop_in(sop_out[r]),
      .pr_valid(pr_v), .pr_data(pr_data[r]),
      .out_valid(sa_valid[r]), .out_data(sa_out[r]), .pr_underflow(sa_uf[r])
    );
  end
  assign pr_underflow = |sa_uf;

  output_sink #(.NROWS(NROWS)) u_sink (
    .clk, .rst_n, .clear(start && state == IDLE), .os_base(c.os_base), .nwords(nchunks),
    .rows_active(c.rows_active), .in_valid(sa_valid[0]), .in_data(sa_out),
    .we(os_we), .addr(os_addr), .wdata(os_wdata), .done(sink_done)
  );
endmodule
