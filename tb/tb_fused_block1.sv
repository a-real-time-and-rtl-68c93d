// tb_fused_block1: runs fused_block_tb_core with the configuration of Fused
// Processing Block 1 (66 inputs, one-to-one mapping, 22 mappers, base 4).
module tb_fused_block1;
  fused_block_tb_core #(.IN_LEN(66), .POOL(1), .N_MAP(22), .P_BASE(4)) core ();
endmodule
