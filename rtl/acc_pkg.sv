// acc_pkg: types and constants shared by the accelerator.
//
// Holds the PE-array sizes (Pox x Poy x Pof = 8 x 8 x 16, the configuration the
// accelerator is built with), the 8-bit data format, the Z-flow register-array
// operations, the engine and buffer selectors, and the per-layer descriptor that
// the configuration registers store and the fused-mode/layer controller executes.
// The descriptor layout, the field widths and the buffer numbering are choices of
// this design; the paper only says that per-layer parameters sit in registers.
package acc_pkg;

  // Loop-unrolling variables of the computing engine.
  localparam int unsigned POX = 8;
  localparam int unsigned POY = 8;
  localparam int unsigned POF = 16;

  // Data widths: 8-bit quantised pixels and weights, wide accumulators.
  localparam int unsigned DW    = 8;
  localparam int unsigned ACCW  = 32;

  // External-memory word: BUS_BYTES pixels per transfer.
  localparam int unsigned BUS_BYTES = 8;
  localparam int unsigned MADDR_W   = 32;  // byte address into external memory

  // On-chip buffer sizes (address bits of one ping-pong bank, in bytes).
  localparam int unsigned FBUF_AW = 18;    // 256 KiB per feature bank
  localparam int unsigned WBUF_AW = 18;    // 256 KiB per weight bank

  // Geometry field widths.
  localparam int unsigned DIM_W = 12;      // image sizes, channel counts
  localparam int unsigned KW    = 6;       // kernel size, up to 63

  // Operations of the Z-flow pixel register array.
  typedef enum logic [2:0] {
    ZF_HOLD  = 3'd0,   // keep the window
    ZF_LOAD  = 3'd1,   // load the whole Poy x Pox window from the buffer
    ZF_SHL   = 3'd2,   // reuse right neighbour, new column enters at x = Pox-1
    ZF_SHR   = 3'd3,   // mirrored row: reuse left neighbour, new column at x = 0
    ZF_SHU   = 3'd4    // inflection point: reuse the row below, new row at y = Poy-1
  } zf_op_e;

  // Engine used by a layer.
  typedef enum logic [1:0] {
    ENG_CONV = 2'd0,   // standard / group / horizontally fused convolution
    ENG_DWCV = 2'd1,   // depthwise convolution
    ENG_POOL = 2'd2    // max pooling
  } engine_e;

  // Feature buffer banks: the input and the output ping-pong buffers, A and B.
  typedef enum logic [1:0] {
    BUF_IN_A  = 2'd0,
    BUF_IN_B  = 2'd1,
    BUF_OUT_A = 2'd2,
    BUF_OUT_B = 2'd3
  } buf_sel_e;

  localparam int unsigned NBR = 4;   // branches of one horizontally fused layer

  typedef struct packed {
    logic [DIM_W-1:0] nofg;     // output channels of this branch per group
    logic [DIM_W-1:0] och_base; // first output channel of this branch in the destination
  } branch_t;

  // One layer descriptor, 16 words of 32 bits (word 0 = bits 31:0).
  typedef struct packed {
    engine_e               engine;
    logic                  relu;
    logic [4:0]            shift;      // requantisation right shift
    logic                  load_in;    // fetch the input map from external memory first
    logic                  load_w;     // fetch the weights (into bank wbank)
    logic                  store_out;  // write the output map to external memory after
    buf_sel_e              src;        // feature bank read
    buf_sel_e              dst;        // feature bank written
    logic                  wbank;      // weight bank read
    logic [1:0]            stride;     // 1 or 2
    logic [3:0]            pad;        // zero padding on every side
    logic [KW-1:0]         nkx;
    logic [KW-1:0]         nky;
    logic [DIM_W-1:0]      nix;
    logic [DIM_W-1:0]      niy;
    logic [DIM_W-1:0]      nif;        // input channels held in the source bank
    logic [DIM_W-1:0]      groups;     // Group_num (1 for a standard convolution)
    logic [DIM_W-1:0]      nifg;       // input channels per group
    logic [DIM_W-1:0]      noft;       // output channels per group, all branches together
    logic [DIM_W-1:0]      nof;        // output channels in the destination map
    logic [2:0]            nbr;        // branches (1..NBR)
    branch_t [NBR-1:0]     br;
    logic [MADDR_W-1:0]    in_addr;    // external-memory byte addresses
    logic [MADDR_W-1:0]    w_addr;
    logic [MADDR_W-1:0]    out_addr;
    logic [MADDR_W-1:0]    w_len;      // weight bytes
    logic [166:0]          spare;      // pads the descriptor to 16 words
  } layer_cfg_t;

  localparam int unsigned CFG_WORDS = 16;

  // Output size of a window operation.
  function automatic logic [DIM_W-1:0] out_dim(input logic [DIM_W-1:0] n,
                                               input logic [KW-1:0] k,
                                               input logic [3:0] pad,
                                               input logic [1:0] stride);
    logic [DIM_W+1:0] span;
    span = (DIM_W+2)'(n) + (DIM_W+2)'(2 * pad) - (DIM_W+2)'(k);
    return (stride == 2'd2) ? DIM_W'((span >> 1) + 1) : DIM_W'(span + 1);
  endfunction

endpackage
