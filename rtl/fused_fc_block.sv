// fused_fc_block: the third fused processing block. It merges the Conv3
// projection-out layer (2 -> 10 channels), ReLU, a 2:1 max-pool (30 -> 15
// positions) and the projection-in half of the fully connected layer
// (150 -> 2), so that neither the 30x10 nor the 15x10 feature map is stored.
//
// For pooled position p and row i the pooled feature is
//   d[p][i] = max_{t=0,1} ReLU(requant(w[i][0]*a[0][2p+t] + w[i][1]*a[1][2p+t] + b[i]))
// and the block's two outputs are
//   f[k] = requant(bfc[k] + sum_{p<15} sum_{i<10} wfc[k][p][i] * d[p][i]),  k = 0, 1.
//
// N_MAP mappers work in parallel, one pooled position each; a mapping takes
// 10 cycles (one row per cycle) and the 15 positions take ROUNDS =
// ceil(15 / N_MAP) rounds. A mapper has four projection-out MACs (two columns
// times two input channels) and two FC MACs that add into its two
// accumulation registers, which run across all of its rounds. In the last
// cycle the N_MAP partial sums of each output are added with the FC bias.
// With the paper's 30 MACs this gives N_MAP = 5 and 30 compute cycles. The
// grouping of the MACs and the accumulation across mappers are this design's
// reading; the paper gives only the layer shapes and the MAC count.
//
// Parameters (332 words from P_BASE): projection-out weights w[i][c] at
// 2*i+c, biases b[i] at 20+i, FC weights wfc[k][p][i] at 30+150*k+10*p+i, FC
// biases at 330 and 331. Write them while the block is idle (the
// projection-out arrays rotate while computing). Handshakes as in conv_block.
module fused_fc_block
  import dsd_pkg::*;
#(
  parameter int unsigned IN_LEN = 30,
  parameter int unsigned N_MAP  = 5,
  parameter int unsigned P_BASE = BASE_FPB3,
  localparam int unsigned IN_CH  = 2,
  localparam int unsigned N_OUT  = 2,
  localparam int unsigned PLEN   = IN_LEN / 2,
  localparam int unsigned ROUNDS = (PLEN + N_MAP - 1) / N_MAP,
  localparam int unsigned M      = PROJ_M,
  localparam int unsigned FC_N   = N_OUT * PLEN * M,
  localparam int unsigned O_B    = IN_CH * M,     // offset of projection-out biases
  localparam int unsigned O_FC   = O_B + M,       // offset of FC weights
  localparam int unsigned O_FCB  = O_FC + FC_N,   // offset of FC biases
  localparam int unsigned NP     = O_FCB + N_OUT
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 p_we,
  input  logic [PADDR_W-1:0]   p_addr,
  input  wgt_t                 p_data,
  input  logic                 ready_in,
  output logic                 fetched,
  input  act_t [IN_CH-1:0][IN_LEN-1:0] in_arr,
  output logic                 ready,
  input  logic                 fetch,
  output act_t [N_OUT-1:0]     out_arr
);
  typedef enum logic {S_IDLE, S_RUN} state_t;

  state_t                    state;
  logic [3:0]                row, rnd;
  wgt_t [M-1:0][IN_CH-1:0]   w_po;          // shifting arrays
  wgt_t [M-1:0]              b_po;
  wgt_t                      w_fc [FC_N];   // FC projection-in weights
  wgt_t [N_OUT-1:0]          b_fc;
  act_t [IN_CH-1:0][IN_LEN-1:0] ia;
  act_t [N_OUT-1:0]          oa;
  acc_t                      acc      [N_MAP][N_OUT];
  acc_t                      acc_next [N_MAP][N_OUT];
  logic                      running, last;
  int                        p_off;                   // parameter offset of p_addr
  act_t [N_OUT-1:0]          fc_out;                  // FC outputs in the last cycle

  assign running = (state == S_RUN);
  assign last    = (row == 4'(M - 1)) && (rnd == 4'(ROUNDS - 1));
  assign fetched = (state == S_IDLE) && ready_in && (!ready || fetch);
  assign out_arr = oa;

  for (genvar m = 0; m < N_MAP; m++) begin : g_map
    always_comb begin
      int   p;
      act_t d;
      p = int'(rnd) * N_MAP + m;
      d = '0;
      if (p < PLEN)
        for (int t = 0; t < 2; t++)
          d = max2(d, requant(mul(ia[0][2*p + t], w_po[0][0]) +
                              mul(ia[1][2*p + t], w_po[0][1]) + bias(b_po[0])));
      for (int k = 0; k < N_OUT; k++)
        acc_next[m][k] = ((row == 4'd0 && rnd == 4'd0) ? acc_t'(0) : acc[m][k]) +
                         ((p < PLEN) ? mul(d, w_fc[(k*PLEN + p)*M + int'(row)]) : acc_t'(0));
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)       for (int k = 0; k < N_OUT; k++) acc[m][k] <= '0;
      else if (running) for (int k = 0; k < N_OUT; k++) acc[m][k] <= acc_next[m][k];
  end

  assign p_off = int'(p_addr) - int'(P_BASE);

  always_comb
    for (int k = 0; k < N_OUT; k++) begin
      acc_t s;
      s = bias(b_fc[k]);
      for (int m = 0; m < N_MAP; m++) s += acc_next[m][k];
      fc_out[k] = requant(s);
    end

  // parameters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_po <= '0; b_po <= '0; b_fc <= '0;
      for (int n = 0; n < FC_N; n++) w_fc[n] <= '0;
    end else if (running) begin
      w_po <= {w_po[0], w_po[M-1:1]};
      b_po <= {b_po[0], b_po[M-1:1]};
    end else if (p_we && p_addr >= PADDR_W'(P_BASE) && p_addr < PADDR_W'(P_BASE + NP)) begin
      if      (p_off < O_B)   w_po[p_off / IN_CH][p_off % IN_CH] <= p_data;
      else if (p_off < O_FC)  b_po[p_off - O_B]                  <= p_data;
      else if (p_off < O_FCB) w_fc[p_off - O_FC]                 <= p_data;
      else                    b_fc[p_off - O_FCB]                <= p_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      row   <= '0;
      rnd   <= '0;
      ready <= 1'b0;
      ia    <= '0;
      oa    <= '0;
    end else begin
      if (fetch) ready <= 1'b0;
      case (state)
        S_IDLE: if (fetched) begin
          ia    <= in_arr;
          row   <= '0;
          rnd   <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (row == 4'(M - 1)) begin
            row <= '0;
            rnd <= rnd + 4'd1;
          end else begin
            row <= row + 4'd1;
          end
          if (last) begin
            oa    <= fc_out;
            state <= S_IDLE;
            ready <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_fetch_needs_ready : assert property (@(posedge clk) disable iff (!rst_n) fetch |-> ready);
  a_ready_holds       : assert property (@(posedge clk) disable iff (!rst_n) ready && !fetch |=> ready);
endmodule
