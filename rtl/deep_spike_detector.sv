// deep_spike_detector: artefact-free spike event selection for one recording
// channel with two optimized 1-D CNNs.
//
// CNN1 (channel selection) sees the channel's raw samples down-sampled by 10,
// so each of its 66-sample batches covers 660 raw samples, and decides
// whether the channel carries neural activity. CNN2 (artefact removal) sees
// 66-sample event windows cut around detected spikes, supplied on the ev_*
// port, and decides whether an event is a spike or an artefact. An event is
// kept (ev_keep) when CNN2 does not call it an artefact and the last CNN1
// decision selected the channel (ch_active). Spike detection and alignment
// ahead of CNN2, and feature extraction and clustering after it, are outside
// this block.
//
// Both CNNs are identical pipelines (cnn1d) with their own 419 parameters,
// written through p_we/p_cnn/p_addr/p_data. The class indices that mean
// "neural" for CNN1 and "artefact" for CNN2 depend on how the networks were
// trained; they are the parameters NEURAL_CLASS and ARTEFACT_CLASS. The
// down-sampling factor of 10 and the two-CNN arrangement follow the paper;
// the gating rule and the class indices are this design's choices.
//
// Timing: raw and event samples are accepted one per cycle while raw_ready /
// ev_ready are high (samples offered while they are low are lost). Each CNN
// produces a one-cycle decision strobe 195 cycles after its batch is
// complete; ch_active changes the cycle after ch_valid. While run is low
// both signal memories only collect batches.
module deep_spike_detector
  import dsd_pkg::*;
#(
  parameter int unsigned MEM_DEPTH      = 524,
  parameter int unsigned DS_FACTOR      = 10,
  parameter logic [1:0]  NEURAL_CLASS   = 2'd0,
  parameter logic [1:0]  ARTEFACT_CLASS = 2'd2
)(
  input  logic                clk,
  input  logic                rst_n,
  // parameter load
  input  logic                p_we,
  input  logic                p_cnn,       // 0: CNN1, 1: CNN2
  input  logic [PADDR_W-1:0]  p_addr,
  input  wgt_t                p_data,
  // release stored batches to both CNNs (hold low to preload a test set)
  input  logic                run,
  // raw channel samples (channel selection)
  input  logic                raw_valid,
  input  act_t                raw_data,
  output logic                raw_ready,
  // event window samples (artefact removal)
  input  logic                ev_valid,
  input  act_t                ev_data,
  output logic                ev_ready,
  // decisions
  output logic                ch_valid,
  output logic [1:0]          ch_cls,
  output act_t [N_CLASS-1:0]  ch_score,
  output logic                ch_active,
  output logic                ev_out_valid,
  output logic [1:0]          ev_cls,
  output act_t [N_CLASS-1:0]  ev_score,
  output logic                ev_keep
);
  logic ds_valid;
  act_t ds_data;

  decimator #(.FACTOR(DS_FACTOR)) u_ds (
    .clk, .rst_n, .in_valid(raw_valid), .in_data(raw_data),
    .out_valid(ds_valid), .out_data(ds_data)
  );

  cnn1d #(.MEM_DEPTH(MEM_DEPTH)) u_cnn1 (
    .clk, .rst_n,
    .p_we(p_we && !p_cnn), .p_addr, .p_data,
    .run, .s_valid(ds_valid), .s_data(ds_data), .s_ready(raw_ready),
    .res_valid(ch_valid), .res_cls(ch_cls), .res_score(ch_score)
  );

  cnn1d #(.MEM_DEPTH(MEM_DEPTH)) u_cnn2 (
    .clk, .rst_n,
    .p_we(p_we && p_cnn), .p_addr, .p_data,
    .run, .s_valid(ev_valid), .s_data(ev_data), .s_ready(ev_ready),
    .res_valid(ev_out_valid), .res_cls(ev_cls), .res_score(ev_score)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        ch_active <= 1'b0;
    else if (ch_valid) ch_active <= (ch_cls == NEURAL_CLASS);

  assign ev_keep = ev_out_valid && ch_active && (ev_cls != ARTEFACT_CLASS);
endmodule
