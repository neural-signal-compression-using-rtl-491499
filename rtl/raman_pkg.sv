// raman_pkg: constants and types shared by the RAMAN encoder blocks.
//
// The PE array geometry (3 rows x 4 columns of PEs, 4 MAC units per PE, a
// 16-entry register file of 24-bit partial sums per PE) and the 8-bit
// weight/activation precision follow the published RAMAN configuration.
// The layer instruction format below is this design's own: one instruction
// describes one encoder layer (CONV, DW, PW/FC or pooling) with its tensor
// shapes, memory base addresses, pruning density and requantization constants.
package raman_pkg;

  localparam int unsigned PE_ROWS  = 3;   // PE rows: output pixels processed together
  localparam int unsigned PE_COLS  = 4;   // PE columns: one 1x16 weight tile each
  localparam int unsigned NMAC     = 4;   // MAC units per PE
  localparam int unsigned RF_DEPTH = 16;  // psum register-file entries per PE (tile width n)
  localparam int unsigned ACT_W    = 8;   // activation width
  localparam int unsigned WGT_W    = 8;   // weight width
  localparam int unsigned PSUM_W   = 24;  // partial-sum width
  localparam int unsigned IDX_W    = 4;   // index inside a 16-wide tile
  localparam int unsigned PWORD_W  = NMAC * WGT_W; // parameter-bank word (4 weights or 1 bias)

  // Layer operation codes.
  typedef enum logic [2:0] {
    OP_END     = 3'd0,  // end of program
    OP_CONV    = 3'd1,  // standard KxK convolution (3x3, pad 1), dense weights
    OP_DW      = 3'd2,  // depthwise 3x3 convolution, pad 1, dense weights
    OP_PW      = 3'd3,  // pointwise 1x1 convolution / fully connected, LFSR-pruned
    OP_AVGPOOL = 3'd4,  // average pooling (KHxKW window, no padding)
    OP_MAXPOOL = 3'd5   // max pooling (KHxKW window, no padding)
  } op_e;

  // One layer instruction.
  typedef struct packed {
    op_e         op;
    logic [7:0]  in_h;      // input height
    logic [7:0]  in_w;      // input width
    logic [11:0] in_c;      // input channels M
    logic [11:0] out_c;     // output channels N (multiple of 16 for CONV/DW/PW)
    logic [7:0]  out_h;     // output height
    logic [7:0]  out_w;     // output width
    logic [1:0]  stride;    // 1 or 2
    logic [3:0]  pool_kh;   // pooling window height
    logic [3:0]  pool_kw;   // pooling window width
    logic [15:0] ia_base;   // input activation byte address
    logic [15:0] oa_base;   // output activation byte address (may equal ia_base)
    logic [15:0] res_base;  // residual activation byte address
    logic [11:0] w_base;    // weight word address in every parameter bank
    logic [11:0] b_base;    // bias word address in every parameter bank
    logic [4:0]  theta;     // non-zero weights per 1x16 tile: 4, 8, 12 or 16 (16 = dense)
    logic [3:0]  seed;      // LFSR base seed for this layer
    logic        relu;      // apply ReLU
    logic        res_en;    // add residual
    logic [15:0] qmul;      // requantization multiplier (unsigned)
    logic [4:0]  qshift;    // requantization right shift
  } instr_t;

  localparam int unsigned INSTR_W = $bits(instr_t);

  // Pooling modes of the post-processing module.
  typedef enum logic [1:0] {
    POOL_NONE = 2'd0,
    POOL_AVG  = 2'd1,
    POOL_MAX  = 2'd2
  } pool_e;

  // Fibonacci LFSR x^4 + x^3 + 1 (maximal length 15), one step.
  function automatic logic [3:0] lfsr4_next(input logic [3:0] s);
    return {s[2:0], s[3] ^ s[2]};
  endfunction

  // State reached from s after n steps.
  function automatic logic [3:0] lfsr4_advance(input logic [3:0] s, input int unsigned n);
    logic [3:0] t;
    t = s;
    for (int unsigned i = 0; i < 15; i++) begin
      if (i < n) t = lfsr4_next(t);
    end
    return t;
  endfunction

endpackage
