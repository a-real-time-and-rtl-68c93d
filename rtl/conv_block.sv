// conv_block: one convolution layer of the 1-D CNN (kernel 1x3, stride 1).
//
// The input array is copied, zero-padded by PAD cells at each end, into
// N_SEG shifting arrays. Segment s holds the SEG_LEN+2 cells that produce
// outputs s*SEG_LEN .. s*SEG_LEN+SEG_LEN-1. Every cycle each engine reads the
// three leading cells of its segment's shifting array, writes one output into
// the result array at the running address, and the array shifts by one. With
// N_FILT filters there are N_FILT*N_SEG engines of three MACs each; filters of
// one segment share its shifting array. A batch therefore takes SEG_LEN
// compute cycles.
//
//   out[f][j] = requant(b[f] + sum_k w[f][k] * xpad[j+k]),  xpad = 0-padded input
//
// Configurations used in the pipeline (from the paper's Table I and its MAC
// allocation of 6 MACs per convolution block):
//   Conv1: IN_LEN 66, PAD 1, N_FILT 1, N_SEG 2 -> 66 outputs, 33 cycles
//   Conv2: IN_LEN 66, PAD 0, N_FILT 1, N_SEG 2 -> 64 outputs, 32 cycles
//          (two 34-long shifting arrays, two 32-long results, as in the paper)
//   Conv3: IN_LEN 32, PAD 0, N_FILT 2, N_SEG 1 -> 2 x 30 outputs, 30 cycles
// The split of Conv1 and the use of Conv3's two engines for its two filters
// are this design's reading of that allocation; the zero padding of Conv1 is
// inferred from its 66-long output.
//
// Interface. Upstream: ready_in (its array is valid) and in_arr; this block
// raises fetched for the one cycle in which it copies in_arr. Downstream:
// ready stays high while out_arr holds a finished batch, and falls after the
// cycle in which fetch (the consumer's fetched) is high. The result array is
// the output array, so a new batch is accepted only when the previous result
// has been taken (possibly in the same cycle). Parameters: written through
// p_we/p_addr/p_data when p_addr is in [P_BASE, P_BASE+3*N_FILT+N_FILT), in the
// order w[0][0..2], w[1][0..2], ..., b[0], b[1], ...
module conv_block
  import dsd_pkg::*;
#(
  parameter int unsigned IN_LEN = 66,
  parameter int unsigned PAD    = 1,
  parameter int unsigned N_FILT = 1,
  parameter int unsigned N_SEG  = 2,
  parameter int unsigned P_BASE = BASE_CONV1,
  localparam int unsigned PAD_LEN = IN_LEN + 2*PAD,
  localparam int unsigned OUT_LEN = PAD_LEN - 2,
  localparam int unsigned SEG_LEN = OUT_LEN / N_SEG,
  localparam int unsigned SA_LEN  = SEG_LEN + 2,
  localparam int unsigned NP      = 4*N_FILT
)(
  input  logic                 clk,
  input  logic                 rst_n,
  // parameter load
  input  logic                 p_we,
  input  logic [PADDR_W-1:0]   p_addr,
  input  wgt_t                 p_data,
  // upstream
  input  logic                 ready_in,
  output logic                 fetched,
  input  act_t [IN_LEN-1:0]    in_arr,
  // downstream
  output logic                 ready,
  input  logic                 fetch,
  output act_t [N_FILT-1:0][OUT_LEN-1:0] out_arr
);
  typedef enum logic {S_IDLE, S_RUN} state_t;

  state_t                 state;
  logic [7:0]             addr;                     // result address (per segment)
  wgt_t [NP-1:0]          prm;                      // local parameter memory
  act_t [SA_LEN-1:0]      sa [N_SEG];               // shifting arrays
  act_t [N_FILT-1:0][OUT_LEN-1:0] res;              // convolution result array
  act_t                   eng_out [N_FILT][N_SEG];
  act_t [PAD_LEN-1:0]     xpad;

  // zero-padded view of the input array
  always_comb
    for (int t = 0; t < PAD_LEN; t++)
      xpad[t] = (t < PAD || t >= PAD + IN_LEN) ? act_t'(0) : in_arr[t-PAD];

  // convolution engines
  for (genvar f = 0; f < N_FILT; f++) begin : g_filt
    for (genvar s = 0; s < N_SEG; s++) begin : g_seg
      conv_engine u_eng (
        .val    (sa[s][2:0]),
        .wgt    (prm[3*f +: 3]),
        .b      (prm[3*N_FILT + f]),
        .result (eng_out[f][s])
      );
    end
  end

  assign fetched = (state == S_IDLE) && ready_in && (!ready || fetch);
  assign out_arr = res;

  // parameter memory
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) prm <= '0;
    else if (p_we && p_addr >= PADDR_W'(P_BASE) && p_addr < PADDR_W'(P_BASE + NP))
      prm[p_addr - PADDR_W'(P_BASE)] <= p_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      addr  <= '0;
      ready <= 1'b0;
      res   <= '0;
      for (int s = 0; s < N_SEG; s++) sa[s] <= '0;
    end else begin
      if (fetch) ready <= 1'b0;
      case (state)
        S_IDLE: if (fetched) begin
          for (int s = 0; s < N_SEG; s++)
            for (int t = 0; t < SA_LEN; t++)
              sa[s][t] <= xpad[s*SEG_LEN + t];
          addr  <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          for (int f = 0; f < N_FILT; f++)
            for (int s = 0; s < N_SEG; s++)
              res[f][s*SEG_LEN + int'(addr)] <= eng_out[f][s];
          for (int s = 0; s < N_SEG; s++)
            sa[s] <= {act_t'(0), sa[s][SA_LEN-1:1]};   // shift by one
          addr <= addr + 8'd1;
          if (addr == 8'(SEG_LEN - 1)) begin
            state <= S_IDLE;
            ready <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // handshake rules
  a_fetch_needs_ready : assert property (@(posedge clk) disable iff (!rst_n) fetch |-> ready);
  a_ready_holds       : assert property (@(posedge clk) disable iff (!rst_n) ready && !fetch |=> ready);
endmodule
