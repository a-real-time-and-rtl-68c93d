// tb_fused_block3: self-checking test of fused_fc_block (Fused Processing
// Block 3: Conv3 projection-out 2 -> 10, ReLU, 2:1 max-pool, FC
// projection-in 150 -> 2).
//
// All 332 parameters are loaded with random values; NB random 2x30 batches
// are streamed; results are taken after random delays. Both outputs are
// compared with an integer reference, the result must come 30 cycles after
// its batch was fetched, and no batch may be fetched while a result is held.
module tb_fused_block3;
  import tb_ref_pkg::*;
  localparam int NB = 10, IN_LEN = 30, PL = 15, P_BASE = 78, LAT = 30;

  logic clk = 0, rst_n = 0;
  logic p_we = 0;
  logic [8:0] p_addr = '0;
  logic signed [3:0] p_data = '0;
  logic ready_in = 0, fetched, ready, fetch = 0;
  logic signed [1:0][IN_LEN-1:0][9:0] in_arr = '0;
  logic signed [1:0][9:0] out_arr;

  fused_fc_block dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, stalls = 0;
  int wpo [10][2], bpo [10], wfc [2][PL][10], bfc [2];
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
    for (int i = 0; i < 10; i++) for (int c = 0; c < 2; c++) begin
      wpo[i][c] = rnd_wgt(); load(P_BASE + 2*i + c, wpo[i][c]);
    end
    for (int i = 0; i < 10; i++) begin bpo[i] = rnd_wgt(); load(P_BASE + 20 + i, bpo[i]); end
    for (int k = 0; k < 2; k++) for (int p = 0; p < PL; p++) for (int i = 0; i < 10; i++) begin
      wfc[k][p][i] = rnd_wgt(); load(P_BASE + 30 + 150*k + 10*p + i, wfc[k][p][i]);
    end
    for (int k = 0; k < 2; k++) begin bfc[k] = rnd_wgt(); load(P_BASE + 330 + k, bfc[k]); end
    load(P_BASE - 1, 7);
    load(P_BASE + 332, 7);
    for (int n = 0; n < NB; n++) begin
      int x [2][IN_LEN];
      int s [2];
      for (int c = 0; c < 2; c++) for (int t = 0; t < IN_LEN; t++) begin
        x[c][t] = rnd_act(n < 3 ? 500 : (n < 6 ? 100 : 8));
        in_arr[c][t] = 10'(x[c][t]);
      end
      for (int k = 0; k < 2; k++) s[k] = bfc[k] * 64;
      for (int p = 0; p < PL; p++)
        for (int i = 0; i < 10; i++) begin
          int d0, d1, d;
          d0 = relu(rq(wpo[i][0]*x[0][2*p]   + wpo[i][1]*x[1][2*p]   + 64*bpo[i]));
          d1 = relu(rq(wpo[i][0]*x[0][2*p+1] + wpo[i][1]*x[1][2*p+1] + 64*bpo[i]));
          d  = (d0 > d1) ? d0 : d1;
          for (int k = 0; k < 2; k++) s[k] += wfc[k][p][i] * d;
        end
      for (int k = 0; k < 2; k++) exp_q.push_back(rq(s[k]));
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
        for (int k = 0; k < 2; k++) begin
          int e;
          e = exp_q.pop_front();
          checks++;
          if (int'($signed(out_arr[k])) != e) begin
            failures++;
            $display("FAIL batch %0d k%0d: got %0d expected %0d", nres, k, int'($signed(out_arr[k])), e);
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
    $display("fused_fc_block: %0d batches, %0d stall cycles", NB, stalls);
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
