// tb_conv_block1: runs conv_block_tb_core with the configuration of
// Convolution Block 1 (IN_LEN 66, PAD 1, N_FILT 1, N_SEG 2, parameter base 0).
module tb_conv_block1;
  conv_block_tb_core #(.IN_LEN(66), .PAD(1), .N_FILT(1), .N_SEG(2), .P_BASE(0)) core ();
endmodule
