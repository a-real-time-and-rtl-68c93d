// conv_engine: the convolution engine of a convolution block, three
// multiply-accumulate units in series.
//
// The top MAC adds Value[2]*Weight[2] to the bias, the middle one adds
// Value[1]*Weight[1] and the bottom one Value[0]*Weight[0]; the bottom sum is
// brought back to the 10-bit activation format and leaves as the result. So
// result = requant(b + w[0]*v[0] + w[1]*v[1] + w[2]*v[2]), where v[0..2] are the
// three leading cells of the shifting array.
//
// The chain of three MACs, the bias at its head and the pairing of Value[k]
// with Weight[k] follow the paper's drawing of the engine. The block is purely
// combinational: its result is written into the result array by the enclosing
// convolution block in the same cycle.
module conv_engine
  import dsd_pkg::*;
(
  input  act_t [2:0] val,
  input  wgt_t [2:0] wgt,
  input  wgt_t       b,
  output act_t       result
);
  acc_t ps2, ps1, ps0;  // partial sums leaving the top, middle and bottom MAC

  always_comb begin
    ps2    = bias(b) + mul(val[2], wgt[2]);
    ps1    = ps2     + mul(val[1], wgt[1]);
    ps0    = ps1     + mul(val[0], wgt[0]);
    result = requant(ps0);
  end
endmodule
