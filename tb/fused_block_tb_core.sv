// fused_block_tb_core: self-checking test of one fused_block configuration,
// instantiated by tb_fused_block1 and tb_fused_block2.
//
// Random 4-bit projection parameters are loaded (plus stray writes just
// outside the block's range, which must be ignored). NB random batches are
// streamed through; results are taken after a random delay so that stalls
// happen. Every output is compared with an integer reference of
//   e_j = floor((64 b' + sum_i w'_i max_t ReLU(floor((w_i a + 64 b_i)/4)))/4),
// the result must appear 10*ceil(OUT_LEN/N_MAP) = 30 cycles after its batch
// was fetched, and no batch may be fetched while a result is held.
module fused_block_tb_core #(
  parameter int IN_LEN = 66,
  parameter int POOL   = 1,
  parameter int N_MAP  = 22,
  parameter int P_BASE = 4,
  parameter int NB     = 10
);
  import tb_ref_pkg::*;
  localparam int OUT_LEN = IN_LEN / POOL;
  localparam int LAT     = 10 * ((OUT_LEN + N_MAP - 1) / N_MAP);

  logic clk = 0, rst_n = 0;
  logic p_we = 0;
  logic [8:0] p_addr = '0;
  logic signed [3:0] p_data = '0;
  logic ready_in = 0, fetched, ready, fetch = 0;
  logic signed [IN_LEN-1:0][9:0] in_arr = '0;
  logic signed [OUT_LEN-1:0][9:0] out_arr;

  fused_block #(.IN_LEN(IN_LEN), .POOL(POOL), .N_MAP(N_MAP), .P_BASE(P_BASE)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, stalls = 0;
  int wpo [10], bpo [10], wpi [10], bpi;
  int exp_q [$];
  int t_fetch_q [$];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic load(input int addr, input int val);
    @(negedge clk); p_we = 1; p_addr = 9'(addr); p_data = 4'(val);
    @(negedge clk); p_we = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 10; i++) begin wpo[i] = rnd_wgt(); load(P_BASE + i, wpo[i]); end
    for (int i = 0; i < 10; i++) begin bpo[i] = rnd_wgt(); load(P_BASE + 10 + i, bpo[i]); end
    for (int i = 0; i < 10; i++) begin wpi[i] = rnd_wgt(); load(P_BASE + 20 + i, wpi[i]); end
    bpi = rnd_wgt(); load(P_BASE + 30, bpi);
    load(P_BASE - 1, 7);
    load(P_BASE + 31, 7);
    for (int n = 0; n < NB; n++) begin
      int x [IN_LEN];
      for (int t = 0; t < IN_LEN; t++) begin
        x[t] = (n == 0) ? ((t % 3 == 0) ? 511 : -512) : rnd_act(n < 3 ? 500 : 200);
        in_arr[t] = 10'(x[t]);
      end
      for (int j = 0; j < OUT_LEN; j++) begin
        int s;
        s = bpi * 64;
        for (int i = 0; i < 10; i++)
          s += wpi[i] * pool_feature(x[POOL*j], x[(POOL*j + POOL - 1)], POOL, wpo[i], bpo[i]);
        exp_q.push_back(rq(s));
      end
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

  initial begin
    int nres = 0;
    @(posedge rst_n);
    while (nres < NB) begin
      @(negedge clk);
      if (ready) begin
        int t0;
        t0 = t_fetch_q.pop_front();
        checks++;
        if (cyc - t0 != LAT) begin
          failures++;
          $display("FAIL batch %0d: result after %0d cycles, expected %0d", nres, cyc - t0, LAT);
        end
        for (int j = 0; j < OUT_LEN; j++) begin
          int e;
          e = exp_q.pop_front();
          checks++;
          if (int'($signed(out_arr[j])) != e) begin
            failures++;
            if (failures < 10) $display("FAIL batch %0d j%0d: got %0d expected %0d", nres, j, int'($signed(out_arr[j])), e);
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
    $display("fused_block IN_LEN=%0d POOL=%0d N_MAP=%0d: %0d batches, %0d stall cycles", IN_LEN, POOL, N_MAP, NB, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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
