// tb_fused_block2: runs fused_block_tb_core with the configuration of Fused
// Processing Block 2 (64 inputs, two-to-one mapping with max-pool, 11
// mappers, base 39).
module tb_fused_block2;
  fused_block_tb_core #(.IN_LEN(64), .POOL(2), .N_MAP(11), .P_BASE(39)) core ();
endmodule
