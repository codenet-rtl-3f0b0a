// codenet_pkg: types and constants shared by the CoDeNet accelerator.
//
// The accelerator works on feature maps stored pixel by pixel with the
// channels contiguous (NHWC).  Every stream word carries one group of LANES
// (16) channels of one pixel, 8 bits per channel.  Weights are 4-bit signed,
// activations 8-bit signed, and both engines produce 16-bit sums that the
// quantization unit turns back into 8-bit activations.  These widths, the 16
// lanes, the 9 taps of the 3x3 engine, the 15 buffered lines and the offset
// bound of 7 follow the paper; the configuration record, the 16-bit scale
// and 32-bit bias, and the shift are this design's own choices.
package codenet_pkg;

  localparam int LANES    = 16;  // channels per word, MAC array side
  localparam int ACT_W    = 8;   // activation bits
  localparam int WGT_W    = 4;   // weight bits
  localparam int SUM_W    = 16;  // engine sum bits
  localparam int KTAPS    = 9;   // 3x3 window
  localparam int LB_LINES = 15;  // lines held by the line buffer
  localparam int OFF_MAX  = 7;   // offset bound N
  localparam int SCALE_W  = 16;  // quantization scale bits
  localparam int BIAS_W   = 32;  // quantization bias bits
  localparam int QP_W     = SCALE_W + BIAS_W;

  localparam int WORD_W   = LANES * ACT_W;          // 128: one stream word
  localparam int W1_W     = LANES * LANES * WGT_W;  // 1024: one 1x1 weight tile
  localparam int WDW_W    = LANES * KTAPS * WGT_W;  // 576: 3x3 weights of 16 channels
  localparam int QV_W     = LANES * QP_W;           // 768: 16 scale/bias pairs
  localparam int PRM_W    = W1_W;                   // widest parameter word

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0] wgt_t;
  typedef logic signed [SUM_W-1:0] sum_t;

  typedef act_t [LANES-1:0] act_vec_t;  // one stream word
  typedef sum_t [LANES-1:0] sum_vec_t;

  typedef struct packed {
    logic signed [BIAS_W-1:0]  bias;
    logic signed [SCALE_W-1:0] scale;
  } qparam_t;
  typedef qparam_t [LANES-1:0] qparam_vec_t;

  // 1x1 weight tile: w1[o][i] is the weight from input lane i to output lane o
  typedef wgt_t [LANES-1:0][LANES-1:0] w1_tile_t;
  // 3x3 weights: wdw[c][t] is tap t (t = 3*row + col) of channel lane c
  typedef wgt_t [LANES-1:0][KTAPS-1:0] wdw_vec_t;

  // which on-chip parameter buffer a load word goes to
  typedef enum logic [1:0] {
    BUF_W1  = 2'd0,  // 1x1 weights
    BUF_WDW = 2'd1,  // 3x3 depthwise weights
    BUF_Q1  = 2'd2,  // quant parameters of the 1x1 engine
    BUF_QDW = 2'd3   // quant parameters of the 3x3 engine
  } buf_sel_e;

  // one layer (one pass through the dataflow engine)
  typedef struct packed {
    logic [9:0] height;      // input rows
    logic [9:0] width;       // input columns
    logic [6:0] in_groups;   // input channels / 16, 1..64
    logic [6:0] out_groups;  // 1x1 output channels / 16, 1..64
    logic       stride2;     // 3x3 stride 2 (else 1)
    logic       deform_en;   // take one offset per output pixel (else d = 1)
    logic       bypass_1x1;  // skip the 1x1 engine
    logic       bypass_dw;   // skip the 3x3 engine
    logic       relu_1x1;
    logic       relu_dw;
    logic [4:0] shift_1x1;
    logic [4:0] shift_dw;
  } layer_cfg_t;

  // clip an offset to the square half-side range [0, OFF_MAX]
  function automatic logic [2:0] clip_offset(input logic signed [7:0] off);
    if (off < 8'sd0)        return 3'd0;
    else if (off > 8'sd7)   return 3'(OFF_MAX);
    else                     return off[2:0];
  endfunction

endpackage
