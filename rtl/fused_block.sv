// fused_block: fused processing block that merges a projection-out layer
// (1 -> 10 channels), ReLU, an optional 2:1 max-pool and a projection-in
// layer (10 -> 1 channel) so that the 10-channel feature map never exists.
//
// Because every output e_j depends only on the input value(s) at position j
// (one-to-one mapping; two-to-one with max-pool), the block runs N_MAP
// independent mappers in parallel:
//
//   e_j = requant(b' + sum_{i=0..9} w'_i * max_{t<POOL} ReLU(requant(w_i a_{POOL*j+t} + b_i)))
//
// A mapping takes 10 cycles (one row per cycle); the OUT_LEN outputs are
// covered in ROUNDS = ceil(OUT_LEN / N_MAP) rounds, output j being handled by
// mapper j mod N_MAP in round j / N_MAP. The projection weights and biases sit
// in three shifting arrays that rotate by one cell each compute cycle, so all
// mappers see row i's parameters at the head of the arrays; after a whole
// batch (a multiple of 10 shifts) they are back in load order.
//
// Configurations (paper's Table I, MAC allocation {44, 33} for FPB1 and FPB2):
//   FPB1: IN_LEN 66, POOL 1, N_MAP 22 (2 MACs each)  -> 66 outputs, 30 cycles
//   FPB2: IN_LEN 64, POOL 2, N_MAP 11 (3 MACs each)  -> 32 outputs, 30 cycles
// How the MACs are grouped into mappers is this design's reading of those
// counts.
//
// Interface: the ready_in/fetched and ready/fetch handshakes work as in
// conv_block. Parameters (31 words from P_BASE): projection-out weights
// w_0..w_9, projection-out biases b_0..b_9, projection-in weights
// w'_0..w'_9, projection-in bias b'. They must be written while the block is
// idle, because computing rotates the same registers.
module fused_block
  import dsd_pkg::*;
#(
  parameter int unsigned IN_LEN = 66,
  parameter int unsigned POOL   = 1,
  parameter int unsigned N_MAP  = 22,
  parameter int unsigned P_BASE = BASE_FPB1,
  localparam int unsigned OUT_LEN = IN_LEN / POOL,
  localparam int unsigned ROUNDS  = (OUT_LEN + N_MAP - 1) / N_MAP,
  localparam int unsigned M       = PROJ_M,
  localparam int unsigned NP      = 3*M + 1
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 p_we,
  input  logic [PADDR_W-1:0]   p_addr,
  input  wgt_t                 p_data,
  input  logic                 ready_in,
  output logic                 fetched,
  input  act_t [IN_LEN-1:0]    in_arr,
  output logic                 ready,
  input  logic                 fetch,
  output act_t [OUT_LEN-1:0]   out_arr
);
  typedef enum logic {S_IDLE, S_RUN} state_t;

  state_t              state;
  logic [3:0]          row;              // projection row i
  logic [3:0]          rnd;              // round
  wgt_t [M-1:0]        w_po, b_po, w_pi; // shifting parameter arrays
  wgt_t                b_pi;
  act_t [IN_LEN-1:0]   ia;               // input array
  act_t [OUT_LEN-1:0]  oa;               // output array
  acc_t                acc_next [N_MAP];
  logic                running;

  assign running = (state == S_RUN);
  assign fetched = (state == S_IDLE) && ready_in && (!ready || fetch);
  assign out_arr = oa;

  for (genvar m = 0; m < N_MAP; m++) begin : g_map
    act_t [POOL-1:0] a_m;
    always_comb begin
      int j;
      j = int'(rnd) * N_MAP + m;
      for (int t = 0; t < POOL; t++)
        a_m[t] = (j < OUT_LEN) ? ia[(j*POOL + t) % IN_LEN] : act_t'(0);
    end
    mapper #(.POOL(POOL)) u_map (
      .clk, .rst_n,
      .en       (running),
      .first    (row == 4'd0),
      .a        (a_m),
      .w_po     (w_po[0]),
      .b_po     (b_po[0]),
      .w_pi     (w_pi[0]),
      .acc_next (acc_next[m])
    );
  end

  // parameter memory: loaded by address when idle, rotated while computing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_po <= '0; b_po <= '0; w_pi <= '0; b_pi <= '0;
    end else if (running) begin
      w_po <= {w_po[0], w_po[M-1:1]};
      b_po <= {b_po[0], b_po[M-1:1]};
      w_pi <= {w_pi[0], w_pi[M-1:1]};
    end else if (p_we && p_addr >= PADDR_W'(P_BASE) && p_addr < PADDR_W'(P_BASE + NP)) begin
      if      (p_addr < PADDR_W'(P_BASE + M))   w_po[p_addr - PADDR_W'(P_BASE)]       <= p_data;
      else if (p_addr < PADDR_W'(P_BASE + 2*M)) b_po[p_addr - PADDR_W'(P_BASE + M)]   <= p_data;
      else if (p_addr < PADDR_W'(P_BASE + 3*M)) w_pi[p_addr - PADDR_W'(P_BASE + 2*M)] <= p_data;
      else                                      b_pi                                  <= p_data;
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
            for (int m = 0; m < N_MAP; m++)
              if (int'(rnd) * N_MAP + m < OUT_LEN)
                oa[int'(rnd) * N_MAP + m] <= requant(acc_next[m] + bias(b_pi));
            row <= '0;
            rnd <= rnd + 4'd1;
            if (rnd == 4'(ROUNDS - 1)) begin
              state <= S_IDLE;
              ready <= 1'b1;
            end
          end else begin
            row <= row + 4'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_fetch_needs_ready : assert property (@(posedge clk) disable iff (!rst_n) fetch |-> ready);
  a_ready_holds       : assert property (@(posedge clk) disable iff (!rst_n) ready && !fetch |=> ready);
endmodule
