// signal_memory: the input layer of a CNN pipeline. It stores batches of LEN
// ten-bit samples and offers the oldest complete batch to Convolution
// Block 1.
//
// The memory is a ring of DEPTH batch slots. Samples arrive one per s_valid
// cycle and fill the slot at the write pointer in order; when LEN samples
// have arrived the slot counts as full and the write pointer moves on.
// s_ready is low while every slot is full (samples offered then are not
// stored). On the read side ready is high while at least one slot is full
// and run is high (run low holds the stored batches back, so that a test set
// can be loaded first and then classified back to back);
// out_arr is the whole oldest full slot (a combinational read), and fetch
// frees it. Filling the ring with a test set in advance and reading it out
// (the way the paper's prototype held its test batches) and streaming with a
// few slots both work.
//
// The paper gives this block's purpose and cost but not its organisation;
// the ring, the sample-wise write port, the run input and DEPTH = 524 (the number of test
// batches the paper reports) are this design's choices.
module signal_memory
  import dsd_pkg::*;
#(
  parameter int unsigned DEPTH = 524,
  parameter int unsigned LEN   = WIN_LEN,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned IW   = $clog2(LEN)
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  input  logic               s_valid,
  input  act_t               s_data,
  output logic               s_ready,
  output logic               ready,
  input  logic               fetch,
  output act_t [LEN-1:0]     out_arr,
  output logic [AW:0]        count
);
  act_t [LEN-1:0]   mem [DEPTH];
  logic [AW-1:0]    wr_slot, rd_slot;
  logic [IW-1:0]    wr_idx;
  logic             commit;

  assign s_ready = (count != (AW+1)'(DEPTH));
  assign ready   = run && (count != '0);
  assign out_arr = mem[rd_slot];
  assign commit  = s_valid && s_ready && (wr_idx == IW'(LEN - 1));

  always_ff @(posedge clk)
    if (s_valid && s_ready) mem[wr_slot][wr_idx] <= s_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_slot <= '0;
      rd_slot <= '0;
      wr_idx  <= '0;
      count   <= '0;
    end else begin
      if (s_valid && s_ready) begin
        if (commit) begin
          wr_idx  <= '0;
          wr_slot <= (wr_slot == AW'(DEPTH - 1)) ? '0 : wr_slot + 1'b1;
        end else begin
          wr_idx <= wr_idx + 1'b1;
        end
      end
      if (fetch)
        rd_slot <= (rd_slot == AW'(DEPTH - 1)) ? '0 : rd_slot + 1'b1;
      count <= count + (AW+1)'(commit) - (AW+1)'(fetch);
    end
  end

  a_fetch_needs_ready : assert property (@(posedge clk) disable iff (!rst_n) fetch |-> ready);
endmodule
