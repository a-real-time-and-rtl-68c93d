// conv_block_tb_core: self-checking test of one conv_block configuration,
// instantiated by tb_conv_block1/2/3 with the configuration of Conv1/2/3.
//
// It loads random 4-bit parameters (and writes just outside the block's
// address range, which must be ignored), then streams NB random batches
// through the block. The consumer takes results after a random delay, so the
// block is also seen stalling with a new batch waiting. For each result it
// checks every output against an integer reference convolution and that the
// result appears exactly SEG_LEN cycles after the batch was fetched; it also
// checks that no batch is fetched while an untaken result is held.
module conv_block_tb_core #(
  parameter int IN_LEN = 66,
  parameter int PAD    = 1,
  parameter int N_FILT = 1,
  parameter int N_SEG  = 2,
  parameter int P_BASE = 0,
  parameter int NB     = 12
);
  import tb_ref_pkg::*;
  localparam int PAD_LEN = IN_LEN + 2*PAD;
  localparam int OUT_LEN = PAD_LEN - 2;
  localparam int SEG_LEN = OUT_LEN / N_SEG;
  localparam int NP      = 4*N_FILT;

  logic clk = 0, rst_n = 0;
  logic p_we = 0;
  logic [8:0] p_addr = '0;
  logic signed [3:0] p_data = '0;
  logic ready_in = 0, fetched, ready, fetch = 0;
  logic signed [IN_LEN-1:0][9:0] in_arr = '0;
  logic signed [N_FILT-1:0][OUT_LEN-1:0][9:0] out_arr;

  conv_block #(.IN_LEN(IN_LEN), .PAD(PAD), .N_FILT(N_FILT), .N_SEG(N_SEG), .P_BASE(P_BASE)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, stalls = 0;
  int w [N_FILT][3];
  int b [N_FILT];
  int exp_q [$];       // expected outputs, flattened, batch after batch
  int t_fetch_q [$];   // transfer cycle of each batch
  int done = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic load(input int addr, input int val);
    @(negedge clk); p_we = 1; p_addr = 9'(addr); p_data = 4'(val);
    @(negedge clk); p_we = 0;
  endtask

  function automatic void expect_batch(input int x [IN_LEN]);
    int xp [PAD_LEN];
    for (int t = 0; t < PAD_LEN; t++) xp[t] = (t < PAD || t >= PAD + IN_LEN) ? 0 : x[t-PAD];
    for (int f = 0; f < N_FILT; f++)
      for (int j = 0; j < OUT_LEN; j++)
        exp_q.push_back(rq(b[f]*64 + w[f][0]*xp[j] + w[f][1]*xp[j+1] + w[f][2]*xp[j+2]));
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < N_FILT; f++) begin
      for (int k = 0; k < 3; k++) begin w[f][k] = rnd_wgt(); load(P_BASE + 3*f + k, w[f][k]); end
    end
    for (int f = 0; f < N_FILT; f++) begin b[f] = rnd_wgt(); load(P_BASE + 3*N_FILT + f, b[f]); end
    if (P_BASE > 0) load(P_BASE - 1, 7);
    load(P_BASE + NP, 7);
    // producer
    for (int n = 0; n < NB; n++) begin
      int x [IN_LEN];
      for (int t = 0; t < IN_LEN; t++) begin
        x[t] = (n == 0) ? ((t % 2) ? 511 : -512) : rnd_act(n < 4 ? 500 : 150);
        in_arr[t] = 10'(x[t]);
      end
      expect_batch(x);
      @(negedge clk);
      ready_in = 1;
      #1;
      while (!fetched) begin
        if (ready && !fetch) stalls++;
        @(negedge clk); #1;
      end
      t_fetch_q.push_back(cyc + 1);
      @(negedge clk);
      ready_in = 0;
      repeat ($urandom_range(2)) @(negedge clk);
    end
  end

  // consumer
  initial begin
    int nres = 0;
    @(posedge rst_n);
    while (nres < NB) begin
      @(negedge clk);
      if (ready) begin
        int t0;
        t0 = t_fetch_q.pop_front();
        checks++;
        if (cyc - t0 != SEG_LEN) begin
          failures++;
          $display("FAIL batch %0d: result after %0d cycles, expected %0d", nres, cyc - t0, SEG_LEN);
        end
        for (int f = 0; f < N_FILT; f++)
          for (int j = 0; j < OUT_LEN; j++) begin
            int e;
            e = exp_q.pop_front();
            checks++;
            if (int'($signed(out_arr[f][j])) != e) begin
              failures++;
              if (failures < 10) $display("FAIL batch %0d f%0d j%0d: got %0d expected %0d", nres, f, j, int'($signed(out_arr[f][j])), e);
            end
          end
        repeat ($urandom_range(12)) @(negedge clk);
        fetch = 1;
        @(negedge clk);
        fetch = 0;
        nres++;
      end
    end
    repeat (5) @(negedge clk);
    checks++;
    if (ready) begin failures++; $display("FAIL: ready still high after all results taken"); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: no stall was exercised"); end
    $display("conv_block IN_LEN=%0d N_FILT=%0d N_SEG=%0d: %0d batches, %0d stall cycles", IN_LEN, N_FILT, N_SEG, NB, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // no new batch may be taken while a result is held and not taken
  always @(posedge clk) if (rst_n && fetched && ready && !fetch) begin
    failures++; $display("FAIL: fetched while holding an untaken result");
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
