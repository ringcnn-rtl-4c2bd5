// ring_pkg: constants and types shared by the eRingCNN accelerator.
//
// The accelerator computes convolution layers over n-tuple "ring" features with
// the ring (R_I, f_H): ring multiplication is a component-wise product and the
// non-linearity is the directional ReLU f_H(y) = H * relu(H * y).  Both engines
// carry 32 real channels, i.e. 32/n ring channels of n components; real channel
// j holds component (j mod n) of ring channel (j div n).
//
// Spatial work unit: an output tile of 4x2 pixels (4 columns, 2 rows) computed
// from a 6x4-pixel input tile.  Features, weights and biases are 8-bit signed;
// accumulations are 24-bit.  The instruction word format, memory word widths and
// block-buffer organisation below are this design's own choices; the channel
// counts, tile sizes and bit widths follow the published design.
package ring_pkg;

  localparam int unsigned CH     = 32;  // real channels per engine
  localparam int unsigned FW     = 8;   // feature / weight / bias width
  localparam int unsigned YW     = 24;  // accumulator width
  localparam int unsigned NMAX   = 4;   // largest supported ring dimension
  localparam int unsigned TILE_W = 4;   // output tile width
  localparam int unsigned TILE_H = 2;   // output tile height
  localparam int unsigned WIN_W  = 6;   // input tile width  (3x3 halo)
  localparam int unsigned WIN_H  = 4;   // input tile height
  localparam int unsigned SEG_PX = 4;   // pixels per block-buffer word
  localparam int unsigned SEG_W  = SEG_PX * CH * FW;  // 1024-bit BB word
  localparam int unsigned MW     = CH * FW;           // 256-bit parameter word
  localparam int unsigned NBB    = 3;   // number of block buffers
  localparam int unsigned NSUB   = 4;   // sub-banks per block buffer (row mod 4)
  localparam int unsigned MAX_SEGS_X = 32;   // 128-pixel block width / 4
  localparam int unsigned MAX_ROWS   = 128;  // block height
  localparam int unsigned SUB_DEPTH  = MAX_SEGS_X * MAX_ROWS / NSUB;  // 1024
  localparam int unsigned SUB_AW     = $clog2(SUB_DEPTH);
  localparam int unsigned WM_AW  = 15;  // weight memory address width
  localparam int unsigned BM_AW  = 9;   // bias memory address width
  localparam int unsigned PM_AW  = 8;   // program memory address width

  typedef logic signed [FW-1:0] feat_t;
  typedef logic signed [YW-1:0] acc_t;

  // Layer operation.
  typedef enum logic [1:0] {
    OP_END     = 2'd0,  // stop the program
    OP_CONV3   = 2'd1,  // 3x3 RCONV; datapath post-processes the 3x3 output y
    OP_CONV3_1 = 2'd2   // 3x3 RCONV + f_H + Q, then 1x1 RCONV; datapath uses 1x1 y
  } op_e;

  // Component-wise Q-format alignment for one directional-ReLU stage:
  // s[i] = max n_y - n_y,i (0..5), t[i] = max n_y - n_x,i (0..17).
  typedef struct packed {
    logic [NMAX-1:0][2:0] s;
    logic [NMAX-1:0][4:0] t;
  } qfmt_t;

  // One layer instruction (stored in the low bits of a 256-bit program word).
  typedef struct packed {
    op_e                  op;
    logic [1:0]           src_bb;    // block buffer read with a 3x3 halo
    logic [1:0]           dst_bb;    // block buffer written
    logic [1:0]           skip_bb;   // block buffer holding the residual input
    logic                 res_en;    // add the skip feature before the datapath f_H
    logic                 relu_en;   // datapath applies f_H (else shift + quantize)
    logic                 relu3_en;  // 3x3 engine applies f_H before the 1x1 engine
    logic [5:0]           tiles_w;   // block width in 4-pixel tiles (1..32)
    logic [6:0]           tiles_h;   // block height in 2-row tiles (1..64)
    logic [WM_AW-1:0]     w3_base;   // 72 words of 3x3 weights
    logic [WM_AW-1:0]     w1_base;   // 32/n words of 1x1 weights
    logic [BM_AW-1:0]     b_base;    // bias word for 3x3, then for 1x1
    logic [NMAX-1:0][3:0] b3_shift;  // bias alignment, 3x3 engine
    logic [NMAX-1:0][3:0] b1_shift;  // bias alignment, 1x1 engine
    logic [NMAX-1:0][3:0] k_shift;   // skip-feature alignment
    qfmt_t                q3;        // 3x3 engine directional ReLU
    qfmt_t                qd;        // datapath directional ReLU
  } instr_t;

  // Per-layer settings seen by an engine.
  typedef struct packed {
    logic                 relu_en;
    logic [NMAX-1:0][3:0] b_shift;
    qfmt_t                q;
  } eng_cfg_t;

  // Saturating round-to-nearest quantizer used after the right shift t.
  function automatic feat_t sat8(input logic signed [63:0] v);
    if (v > 64'sd127)       return 8'sd127;
    else if (v < -64'sd128) return -8'sd128;
    else                    return feat_t'(v[FW-1:0]);
  endfunction

endpackage
