// cnn1d: one optimized 1-D CNN as a pipeline of self-contained blocks.
//
//   signal_memory -> conv_block (Conv1) -> fused_block (FPB1)
//     -> conv_block (Conv2) -> fused_block (FPB2) -> conv_block (Conv3)
//     -> fused_fc_block (FPB3) -> classifier
//
// Array lengths along the pipeline: 66 -> 66 -> 66 -> 64 -> 32 -> 2x30 -> 2 -> 3.
// There is no global controller: every link is a ready/fetch handshake (the
// producer's ready drives the consumer's ready_in, the consumer's fetched
// strobe drives the producer's fetch), and each block starts as soon as it
// has input and its own result has been taken. All compute stages take
// 30-33 cycles; with the handshake cycles a new batch enters every 34
// cycles in the steady state, and a batch needs 195 cycles from the signal
// memory to its class.
//
// Each block keeps its own parameters (419 four-bit words in all). They are
// written through p_we/p_addr/p_data with the address map of dsd_pkg, while
// the pipeline is idle. The classifier's result is taken as soon as it is
// ready: res_valid is a one-cycle strobe with res_cls and res_score. While
// run is low, complete batches stay in the signal memory.
module cnn1d
  import dsd_pkg::*;
#(
  parameter int unsigned MEM_DEPTH = 524
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 p_we,
  input  logic [PADDR_W-1:0]   p_addr,
  input  wgt_t                 p_data,
  input  logic                 run,
  input  logic                 s_valid,
  input  act_t                 s_data,
  output logic                 s_ready,
  output logic                 res_valid,
  output logic [1:0]           res_cls,
  output act_t [N_CLASS-1:0]   res_score
);
  // stage links: r* = producer ready, f* = consumer fetched
  logic r0, f0, r1, f1, r2, f2, r3, f3, r4, f4, r5, f5, r6, f6, r7;
  act_t [65:0]       a0;         // signal memory batch
  act_t [0:0][65:0]  a1;         // Conv1
  act_t [65:0]       a2;         // FPB1
  act_t [0:0][63:0]  a3;         // Conv2
  act_t [31:0]       a4;         // FPB2
  act_t [1:0][29:0]  a5;         // Conv3
  act_t [1:0]        a6;         // FPB3

  signal_memory #(.DEPTH(MEM_DEPTH), .LEN(WIN_LEN)) u_mem (
    .clk, .rst_n, .run, .s_valid, .s_data, .s_ready,
    .ready(r0), .fetch(f0), .out_arr(a0), .count()
  );

  conv_block #(.IN_LEN(66), .PAD(1), .N_FILT(1), .N_SEG(2), .P_BASE(BASE_CONV1)) u_conv1 (
    .clk, .rst_n, .p_we, .p_addr, .p_data,
    .ready_in(r0), .fetched(f0), .in_arr(a0), .ready(r1), .fetch(f1), .out_arr(a1)
  );

  fused_block #(.IN_LEN(66), .POOL(1), .N_MAP(22), .P_BASE(BASE_FPB1)) u_fpb1 (
    .clk, .rst_n, .p_we, .p_addr, .p_data,
    .ready_in(r1), .fetched(f1), .in_arr(a1[0]), .ready(r2), .fetch(f2), .out_arr(a2)
  );

  conv_block #(.IN_LEN(66), .PAD(0), .N_FILT(1), .N_SEG(2), .P_BASE(BASE_CONV2)) u_conv2 (
    .clk, .rst_n, .p_we, .p_addr, .p_data,
    .ready_in(r2), .fetched(f2), .in_arr(a2), .ready(r3), .fetch(f3), .out_arr(a3)
  );

  fused_block #(.IN_LEN(64), .POOL(2), .N_MAP(11), .P_BASE(BASE_FPB2)) u_fpb2 (
    .clk, .rst_n, .p_we, .p_addr, .p_data,
    .ready_in(r3), .fetched(f3), .in_arr(a3[0]), .ready(r4), .fetch(f4), .out_arr(a4)
  );

  conv_block #(.IN_LEN(32), .PAD(0), .N_FILT(2), .N_SEG(1), .P_BASE(BASE_CONV3)) u_conv3 (
    .clk, .rst_n, .p_we, .p_addr, .p_data,
    .ready_in(r4), .fetched(f4), .in_arr(a4), .ready(r5), .fetch(f5), .out_arr(a5)
  );

  fused_fc_block #(.IN_LEN(30), .N_MAP(5), .P_BASE(BASE_FPB3)) u_fpb3 (
    .clk, .rst_n, .p_we, .p_addr, .p_data,
    .ready_in(r5), .fetched(f5), .in_arr(a5), .ready(r6), .fetch(f6), .out_arr(a6)
  );

  classifier #(.P_BASE(BASE_CLS)) u_cls (
    .clk, .rst_n, .p_we, .p_addr, .p_data,
    .ready_in(r6), .fetched(f6), .in_arr(a6), .ready(r7), .fetch(r7),
    .out_arr(res_score), .cls(res_cls)
  );

  assign res_valid = r7;
endmodule
