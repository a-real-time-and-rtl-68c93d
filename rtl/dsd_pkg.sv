// dsd_pkg: number formats, fixed-point helpers and the parameter address map
// shared by every block of the 1-D CNN deep spike detector.
//
// Activations (input samples and every intermediate feature value) are
// 10-bit two's-complement fixed-point numbers with ACT_FRAC fractional bits.
// Learnable parameters (weights and biases) are 4-bit two's-complement numbers
// with WGT_FRAC fractional bits. A product of an activation and a weight
// therefore carries ACT_FRAC+WGT_FRAC fractional bits; a bias is aligned to
// that scale by shifting it left by ACT_FRAC. After a layer's sum of products
// the value is brought back to the activation format by an arithmetic shift
// right of WGT_FRAC (rounding toward minus infinity) and saturation to 10 bits.
//
// The 10-bit activation width and the 4-bit parameter width follow the paper;
// the positions of the binary points (ACT_FRAC, WGT_FRAC), the accumulator
// width, the floor rounding and the saturation are this design's own choices.
//
// The 419 parameters of one CNN live in the blocks that use them. They are
// written through one load port whose 9-bit address selects a block by range;
// the bases below give that map (each block stores its parameters in the
// order documented in its own file).
package dsd_pkg;

  localparam int unsigned ACT_W    = 10;  // activation width (paper: 10-bit fixed point)
  localparam int unsigned WGT_W    = 4;   // parameter width (paper: 4-bit quantization)
  localparam int unsigned ACT_FRAC = 6;   // fractional bits of an activation
  localparam int unsigned WGT_FRAC = 2;   // fractional bits of a weight or bias
  localparam int unsigned ACC_W    = 24;  // accumulator width

  localparam int unsigned WIN_LEN  = 66;  // samples per input batch
  localparam int unsigned PROJ_M   = 10;  // rows of every projection (m = 10)
  localparam int unsigned N_CLASS  = 3;   // outputs of the FC projection-out layer

  localparam int unsigned PADDR_W  = 9;   // parameter address width (419 words)
  localparam int unsigned N_PARAMS = 419;

  // Parameter address map of one CNN (4-bit words)
  localparam int unsigned BASE_CONV1 = 0;    //   4: w[3], b
  localparam int unsigned BASE_FPB1  = 4;    //  31: pout w[10], pout b[10], pin w[10], pin b
  localparam int unsigned BASE_CONV2 = 35;   //   4
  localparam int unsigned BASE_FPB2  = 39;   //  31
  localparam int unsigned BASE_CONV3 = 70;   //   8: w[2][3], b[2]
  localparam int unsigned BASE_FPB3  = 78;   // 332: pout w[10][2], pout b[10], fc w[2][15][10], fc b[2]
  localparam int unsigned BASE_CLS   = 410;  //   9: w[3][2], b[3]

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0] wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam act_t ACT_MAX = act_t'((1 << (ACT_W-1)) - 1);
  localparam act_t ACT_MIN = act_t'(-(1 << (ACT_W-1)));

  // product of an activation and a weight, sign-extended to the accumulator
  function automatic acc_t mul(input act_t a, input wgt_t w);
    return acc_t'(a) * acc_t'(w);
  endfunction

  // bias aligned to the product scale
  function automatic acc_t bias(input wgt_t b);
    return acc_t'(b) <<< ACT_FRAC;
  endfunction

  // back to the activation format: shift right by WGT_FRAC, saturate
  function automatic act_t requant(input acc_t s);
    acc_t t;
    t = s >>> WGT_FRAC;
    if (t > acc_t'(ACT_MAX)) return ACT_MAX;
    if (t < acc_t'(ACT_MIN)) return ACT_MIN;
    return act_t'(t);
  endfunction

  function automatic act_t relu(input act_t a);
    return (a < 0) ? '0 : a;
  endfunction

  function automatic act_t max2(input act_t a, input act_t b);
    return (a > b) ? a : b;
  endfunction

endpackage
