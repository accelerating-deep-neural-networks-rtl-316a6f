// cnn_pkg: types and constants shared by the blocks of the convolutional
// loosely-coupled accelerator (LCA).
//
// The accelerator computes one convolutional layer per run, configured at run
// time through a conv_cfg_t. Data words are 32-bit signed fixed point with
// FRAC_BITS fractional bits (the 32-bit word follows the authors' fixed-point
// build; the split into 16.16 is this design's choice). The AXI4 channel
// payloads are reduced to the fields the DMA engines drive: single ID, 32-bit
// data, INCR bursts of 4-byte beats.
package cnn_pkg;

  // Datapath word.
  localparam int unsigned DATA_W    = 32;
  localparam int unsigned FRAC_BITS = 16;
  typedef logic signed [DATA_W-1:0] data_t;

  // Accelerator organisation (defaults of the top).
  localparam int unsigned NUM_MAC   = 4;    // MAC engines = filters in flight (4 drawn in the block diagram)
  localparam int unsigned N_MUL     = 9;    // multipliers per MAC engine (one 3x3 patch per cycle)
  localparam int unsigned MAX_K     = 11;   // largest patch extractor, 11x11
  localparam int unsigned MAX_KK    = MAX_K * MAX_K;
  localparam int unsigned NUM_PE    = 5;    // extractors for K = 3, 5, 7, 9, 11
  localparam int unsigned IN_DEPTH  = 4096; // Input PLM words: a 64x64 ROI, one channel
  localparam int unsigned IN_BANKS  = 16;   // Input PLM banks, interleaved by column (>= MAX_K, power of 2)
  localparam int unsigned OUT_DEPTH = 4096; // Output PLM words per bank: one 64x64 output map
  localparam int unsigned W_DEPTH   = 128;  // words per Weights PLM sub-bank

  // AXI4.
  localparam int unsigned AXI_AW     = 32;
  localparam int unsigned MAX_BURST  = 16;  // beats per burst issued by the DMA engines
  localparam logic [1:0]  AXI_INCR   = 2'b01;
  localparam logic [2:0]  AXI_SIZE_4 = 3'd2; // 4 bytes per beat
  localparam logic [1:0]  AXI_OKAY   = 2'b00;

  typedef logic [AXI_AW-1:0] addr_t;

  typedef struct packed {
    addr_t      addr;
    logic [7:0] len;    // beats - 1
    logic [2:0] size;
    logic [1:0] burst;
  } axi_ax_t;           // AR or AW channel payload

  typedef struct packed {
    data_t      data;
    logic [1:0] resp;
    logic       last;
  } axi_r_t;

  typedef struct packed {
    data_t      data;
    logic [3:0] strb;
    logic       last;
  } axi_w_t;

  typedef struct packed {
    logic [1:0] resp;
  } axi_b_t;

  // Run-time layer configuration, written by the host before start.
  // Feature maps are stored channel-major in main memory:
  //   input  [c][y][x], weights [f][c][ky][kx], output [f][oy][ox].
  typedef struct packed {
    addr_t       in_base;   // byte address of the input feature maps
    addr_t       w_base;    // byte address of the filter weights
    addr_t       out_base;  // byte address of the output maps
    logic [11:0] in_h;      // input height
    logic [11:0] in_w;      // input width
    logic [11:0] in_c;      // input channels
    logic [11:0] n_filt;    // number of filters (output channels)
    logic [11:0] out_h;     // output height = (in_h + 2*pad - k)/stride + 1
    logic [11:0] out_w;     // output width
    logic [3:0]  k;         // kernel size: 3, 5, 7, 9 or 11
    logic [3:0]  stride;
    logic [3:0]  pad;       // zero padding on each side
  } conv_cfg_t;

  // Index of the patch extractor for kernel size k, NUM_PE if unsupported.
  function automatic int unsigned pe_index(input logic [3:0] k);
    case (k)
      4'd3:    return 0;
      4'd5:    return 1;
      4'd7:    return 2;
      4'd9:    return 3;
      4'd11:   return 4;
      default: return NUM_PE;
    endcase
  endfunction

endpackage
