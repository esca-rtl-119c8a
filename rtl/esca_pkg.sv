// esca_pkg: types and constants shared by the Codec Avatar accelerator.
//
// The accelerator runs one convolution or transposed-convolution layer per job
// on a 16x16 weight-stationary systolic array of input-combining PEs. A layer
// is described by layer_cfg_t, which the register file holds for two job slots
// (encoder and decoder). The array size (16x16), the 4x4 tile used by input
// combining and the 8-bit / 4-bit operand precisions follow the paper; the field
// widths of the descriptor, the 32-bit accumulators and the address widths are
// this design's own choices.
package esca_pkg;

  localparam int unsigned ARRAY_DIM = 16;   // 16x16 systolic array
  localparam int unsigned DATA_W    = 8;    // operand width (INT8; INT4 uses the low nibble)
  localparam int unsigned ACC_W     = 32;   // partial-sum / accumulator width
  localparam int unsigned TILE      = 4;    // input-combining tile edge (4x4 tiles)
  localparam int unsigned PAT_LEN   = 16;   // length of the PE select-bit sequence
  localparam int unsigned MAX_COUT  = 256;  // size of the SFU bias table

  // Which job slot of the register file a job uses.
  typedef enum logic {
    JOB_ENCODE = 1'b0,
    JOB_DECODE = 1'b1
  } job_e;

  // Destination of a DMA read transfer.
  typedef enum logic [1:0] {
    DMA_TO_IBUF = 2'd0,
    DMA_TO_WBUF = 2'd1,
    DMA_TO_BIAS = 2'd2
  } dma_dst_e;

  // One layer descriptor.
  //   Expanded (zero-inserted, padded) input width:
  //     We = (Win-1)*2^s_log2 + 1 + 2*pad_e
  //   which equals the paper's W' = W + 2(K-P-1) + (W-1)(S-1) with pad_e = K-P-1
  //   for a transposed convolution, and gives an ordinary padded convolution
  //   with s_log2 = 0, pad_e = P. Output width Wo = ((We-K) >> os_log2) + 1.
  typedef struct packed {
    logic [11:0] cin;          // input channels
    logic [11:0] cout;         // output channels
    logic [7:0]  hin;          // input height
    logic [7:0]  win;          // input width
    logic [3:0]  k;            // kernel size (square)
    logic [1:0]  s_log2;       // log2 of the zero-insertion stride S (0: none)
    logic [1:0]  os_log2;      // log2 of the output stride (standard conv only)
    logic [3:0]  pad_e;        // padding of the expanded map
    logic        combine;      // 1: input-combining (needs S=2, even K, os=0)
    logic        int4;         // 1: 4-bit operands and outputs
    logic [3:0]  alpha_shift;  // LeakyReLU negative slope = 2^-alpha_shift
    logic [4:0]  out_shift;    // requantisation right shift
    logic [31:0] act_addr;     // DRAM byte address of the input map [cin][h][w]
    logic [31:0] wgt_addr;     // DRAM byte address of weights [cout][cin][kh][kw]
    logic [31:0] bias_addr;    // DRAM byte address of 32-bit biases [cout]
    logic [31:0] out_addr;     // DRAM byte address of the output map [cout][ho][wo]
  } layer_cfg_t;

  // Row of the (combined) im2col matrix mapped onto one array column.
  typedef struct packed {
    logic        valid;        // column carries a real row of the matrix
    logic [11:0] cin;          // input channel
    logic [3:0]  kh;           // kernel row
    logic [3:0]  kw;           // kernel column of the first activation (Xi1)
  } col_map_t;

  // Combined mode is only used where the checkerboard argument holds.
  function automatic logic combine_ok(layer_cfg_t c);
    return c.combine && (c.s_log2 == 2'd1) && !c.k[0] && (c.os_log2 == 2'd0);
  endfunction

  // Expanded-map edge and output edge of a layer.
  function automatic logic [11:0] expanded_dim(logic [7:0] n, layer_cfg_t c);
    return ((12'(n) - 12'd1) << c.s_log2) + 12'd1 + 12'({c.pad_e, 1'b0});
  endfunction

  function automatic logic [11:0] out_dim(logic [7:0] n, layer_cfg_t c);
    return ((expanded_dim(n, c) - 12'(c.k)) >> c.os_log2) + 12'd1;
  endfunction

endpackage
