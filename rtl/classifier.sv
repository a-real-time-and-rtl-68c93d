// classifier: the last pipeline stage. It applies the projection-out half of
// the fully connected layer (2 -> 3 outputs), ReLU, and picks the class.
//
//   y[n] = ReLU(requant(b[n] + w[n][0]*f[0] + w[n][1]*f[1])),  n = 0..2
//   cls  = index of the largest y[n] (the lower index wins a tie)
//
// Two multipliers compute one class score per cycle, so a batch takes three
// compute cycles. A SoftMax layer would only rescale the scores monotonically,
// so the hardware reports the scores and the index of the largest instead of
// probabilities; this, and the tie rule, are this design's choices (the paper
// lists a SoftMax layer but does not describe its hardware).
//
// Parameters (9 words from P_BASE): w[n][c] at 2*n+c, then b[0..2].
// Handshakes as in conv_block; out_arr carries the three scores and cls the
// decision while ready is high.
module classifier
  import dsd_pkg::*;
#(
  parameter int unsigned P_BASE = BASE_CLS,
  localparam int unsigned N_IN = 2,
  localparam int unsigned NC   = N_CLASS,
  localparam int unsigned NP   = NC*N_IN + NC
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 p_we,
  input  logic [PADDR_W-1:0]   p_addr,
  input  wgt_t                 p_data,
  input  logic                 ready_in,
  output logic                 fetched,
  input  act_t [N_IN-1:0]      in_arr,
  output logic                 ready,
  input  logic                 fetch,
  output act_t [NC-1:0]        out_arr,
  output logic [1:0]           cls
);
  typedef enum logic {S_IDLE, S_RUN} state_t;

  state_t            state;
  logic [1:0]        n;        // class being scored
  wgt_t [NP-1:0]     prm;
  act_t [N_IN-1:0]   fa;       // input features
  act_t [NC-1:0]     y;
  act_t              y_n;
  logic [1:0]        best;     // running arg-max
  act_t              best_y;

  assign fetched = (state == S_IDLE) && ready_in && (!ready || fetch);
  assign out_arr = y;

  always_comb
    y_n = relu(requant(mul(fa[0], prm[2*int'(n)]) + mul(fa[1], prm[2*int'(n) + 1]) + bias(prm[NC*N_IN + int'(n)])));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) prm <= '0;
    else if (p_we && p_addr >= PADDR_W'(P_BASE) && p_addr < PADDR_W'(P_BASE + NP))
      prm[p_addr - PADDR_W'(P_BASE)] <= p_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      n      <= '0;
      ready  <= 1'b0;
      fa     <= '0;
      y      <= '0;
      best   <= '0;
      best_y <= '0;
      cls    <= '0;
    end else begin
      if (fetch) ready <= 1'b0;
      case (state)
        S_IDLE: if (fetched) begin
          fa    <= in_arr;
          n     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          y[n] <= y_n;
          if (n == 2'd0 || y_n > best_y) begin
            best   <= n;
            best_y <= y_n;
          end
          n <= n + 2'd1;
          if (n == 2'(NC - 1)) begin
            cls   <= (y_n > best_y) ? n : best;
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
