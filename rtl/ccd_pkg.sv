// ccd_pkg: shared sizes, number formats and types of the covert-channel
// detection (CCD) CNN accelerator.
//
// The network is LLDS + CNN: a 2 x 640 I/Q frame is compressed by the
// Learnable Linear Down-Sample block (four input convolutions, then a
// stride-5 linear convolution) to 2 x 128, then goes through a 2x8
// convolution (45 filters), a 1x6 convolution (9 filters), a 1044 -> 32
// dense layer and a 5-class output layer. Sizes, the 12-bit activations and
// the 8-bit weights follow the paper; the fixed-point scaling (Q0.7 weights,
// bias shift) and the weight-load bus are this design's own choices.
//
// Weight addresses, per layer (flat, one 8-bit word per parameter):
//   LY_LLDS1  b*10 + {c5 taps 0..4, c5 bias, c3 taps 0..2, c3 bias}, b=0 I, 1 Q
//   LY_LLDS2  b*11 + {taps on the 1x5 map 0..4, taps on the 1x3 map 0..4, bias}
//   LY_CONV1  f*17 + row*8 + tap, bias at f*17+16        (f < 45, row 0 = I)
//   LY_CONV2  f*271 + ch*6 + tap, bias at f*271+270     (f < 9, ch < 45)
//   LY_DENSE  n*1045 + pos*9 + f, bias at n*1045+1044   (n < 32)
//   LY_OUT    k*33 + j, bias at k*33+32                  (k < 5)
// Total 20 + 22 + 765 + 2439 + 33440 + 165 = 36,851 words.
package ccd_pkg;

  localparam int DW       = 12;  // activation / ADC sample width
  localparam int WW       = 8;   // weight width
  localparam int ACCW     = 32;  // accumulator width
  localparam int W_FRAC   = 7;   // weights are signed Q0.7
  localparam int BIAS_SHIFT = W_FRAC + 4;  // a bias LSB is 16 activation LSBs
  localparam int AW       = 16;  // weight address width

  localparam int FRAME_LEN = 640;
  localparam int CF        = 5;
  localparam int CLEN      = FRAME_LEN / CF;      // 128 compressed columns
  localparam int C1_NF     = 45;
  localparam int C1_KW     = 8;
  localparam int C1_LEN    = CLEN - C1_KW + 1;    // 121
  localparam int C2_NF     = 9;
  localparam int C2_KW     = 6;
  localparam int C2_LEN    = C1_LEN - C2_KW + 1;  // 116
  localparam int D_NIN     = C2_NF * C2_LEN;      // 1044
  localparam int D_NH      = 32;
  localparam int NCLS      = 5;
  localparam int NPHASE    = 3;                   // 1/3 of the work per cycle

  localparam int LLDS1_DEPTH = 20;
  localparam int LLDS2_DEPTH = 22;
  localparam int CONV1_DEPTH = C1_NF * (2 * C1_KW + 1);        // 765
  localparam int CONV2_DEPTH = C2_NF * (C1_NF * C2_KW + 1);    // 2439
  localparam int DENSE_DEPTH = D_NH * (D_NIN + 1);             // 33440
  localparam int OUT_DEPTH   = NCLS * (D_NH + 1);              // 165

  typedef logic signed [DW-1:0]   act_t;
  typedef logic signed [WW-1:0]   wgt_t;
  typedef logic signed [ACCW-1:0] acc_t;

  typedef enum logic [2:0] {
    LY_LLDS1 = 3'd0,
    LY_LLDS2 = 3'd1,
    LY_CONV1 = 3'd2,
    LY_CONV2 = 3'd3,
    LY_DENSE = 3'd4,
    LY_OUT   = 3'd5
  } layer_e;

  // Weight load bus: one word per cycle, routed by layer id.
  typedef struct packed {
    logic            valid;
    layer_e          layer;
    logic [AW-1:0]   addr;
    wgt_t            data;
  } wload_t;

  // Classes of the multi-class task.
  typedef enum logic [2:0] {
    CLS_FREE = 3'd0,
    CLS_HT1  = 3'd1,
    CLS_HT2  = 3'd2,
    CLS_HT3  = 3'd3,
    CLS_HT4  = 3'd4
  } cls_e;

  // Bias as it enters an accumulator.
  function automatic acc_t bias_acc(wgt_t b);
    return acc_t'(b) <<< BIAS_SHIFT;
  endfunction

endpackage
