// tb_conv_block2: runs conv_block_tb_core with the configuration of
// Convolution Block 2 (IN_LEN 66, PAD 0, N_FILT 1, N_SEG 2, parameter base 35).
module tb_conv_block2;
  conv_block_tb_core #(.IN_LEN(66), .PAD(0), .N_FILT(1), .N_SEG(2), .P_BASE(35)) core ();
endmodule
