// tcn_pkg: constants and types shared by the TCN convolution accelerator.
//
// Samples, weights and stored partial results are 16-bit signed fixed point;
// the MAC accumulators are 48 bits wide, as in a DSP48E slice. A Sum-of-Products
// unit works on four neighbouring convolution windows at once, so the natural
// data unit between the engine and the output memories is a 64-bit word holding
// four 16-bit samples (lane 0 in bits 15:0). The layer configuration that the
// scheduler writes into the memory-mapped registers is carried as one struct.
// The widths 16, 48 and the 8-bank / 1024-deep activation organisation follow
// the paper; the struct layout and field widths are this design's choice.
package tcn_pkg;

  localparam int DW         = 16;    // sample / weight width
  localparam int ACC_W      = 48;    // DSP accumulator width
  localparam int LANES      = 4;     // DSPs per SoP = windows per chunk
  localparam int ACT_BANKS  = 8;     // RAMB18 banks per activation module
  localparam int BANK_DEPTH = 1024;  // words per RAMB18 at 16 bits
  localparam int OUT_DEPTH  = 2048;  // 64-bit words per output module (8 RAMB18)
  localparam int AW         = 32;    // address width of the source/sink ports
  localparam int XW         = 64;    // DMA / XBAR beat width

  typedef logic signed [DW-1:0]    sample_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [XW-1:0]           word_t;

  // Layer configuration of one convolution-engine run.
  typedef struct packed {
    logic [15:0] kernel_size;  // taps per kernel, >= 1
    logic [15:0] dilation;     // distance between taps, in samples
    logic [15:0] stride;       // distance between windows, 1..3
    logic [15:0] out_len;      // output samples per output feature
    logic [31:0] act_base;     // first sample of the input features
    logic [31:0] w_base;       // first tap of the kernels in each weight bank
    logic [31:0] bias_addr;    // bias location in bank (row, 0)
    logic [31:0] pr_base;      // first word of the partial results
    logic [31:0] os_base;      // first word of the outputs
    logic [5:0]  shift;        // fraction bits of the fixed-point format
    logic        bias_en;      // add the row bias (first run of a layer)
    logic        partial_en;   // add partial results (later runs)
    logic        swap;         // 0: partials in modules 0..R-1, outputs in R..2R-1
    logic [7:0]  rows_active;  // output features in this run (1..NROWS)
    logic [7:0]  cols_active;  // input features in this run (1..NCOLS)
  } ce_cfg_t;

  // DMA descriptor.
  typedef struct packed {
    logic [31:0] ext_addr;  // DDR byte address, 8-byte aligned
    logic [31:0] loc_addr;  // local word address (see xbar / weight_memory)
    logic [15:0] len;       // beats of 64 bits
    logic        dir;       // ADMA only: 0 load DDR->local, 1 store local->DDR
  } dma_desc_t;

  // Saturate a wide signed value to 16 bits.
  function automatic sample_t sat16(input logic signed [ACC_W+8:0] v);
    if (v > 32767)       return 16'sh7fff;
    else if (v < -32768) return 16'sh8000;
    else                 return v[DW-1:0];
  endfunction

endpackage
