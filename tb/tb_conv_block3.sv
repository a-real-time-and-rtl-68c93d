// tb_conv_block3: runs conv_block_tb_core with the configuration of
// Convolution Block 3 (IN_LEN 32, PAD 0, N_FILT 2, N_SEG 1, parameter base 70).
module tb_conv_block3;
  conv_block_tb_core #(.IN_LEN(32), .PAD(0), .N_FILT(2), .N_SEG(1), .P_BASE(70)) core ();
endmodule
