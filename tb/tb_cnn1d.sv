// tb_cnn1d: end-to-end test of one CNN pipeline at its default size.
//
// Phase 1 loads 419 random parameters, stores NB batches of random samples in the
// signal memory with run low, then raises run so that the pipeline runs full
// and its links see back-pressure, and compares each class and score triple with the
// whole-network integer reference. It also measures the interval between
// consecutive results: in the steady state the pipeline must deliver one
// classification at least every 42 cycles, the per-classification delay the
// paper reports. Random parameters make most outputs alike, so phase 2
// repeats the run with the polarity-detector parameters of tb_ref_pkg,
// jittered at random, on synthetic spike, noise and artefact windows; there
// all three classes must occur.
module tb_cnn1d;
  import tb_ref_pkg::*;
  localparam int NB = 24, MAX_INTERVAL = 42;

  logic clk = 0, rst_n = 0;
  logic p_we = 0;
  logic [8:0] p_addr = '0;
  logic signed [3:0] p_data = '0;
  logic run = 0, s_valid = 0, s_ready, res_valid;
  logic signed [9:0] s_data = '0;
  logic [1:0] res_cls;
  logic signed [2:0][9:0] res_score;

  cnn1d dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int prm [419];
  int exp_cls [$];
  int exp_sc [$];
  int nres = 0, last_t = -1, max_iv = 0, stalls = 0, first_lat = -1, t_batch_done = -1;
  int cls_hist [3];

  always @(posedge clk) cyc <= cyc + 1;

  // back-pressure: a producer holds a finished array that its consumer, still
  // busy with the previous one, has not fetched
  always @(posedge clk) if (rst_n && ((dut.r0 && !dut.f0) || (dut.r1 && !dut.f1) || (dut.r2 && !dut.f2) ||
                                      (dut.r3 && !dut.f3) || (dut.r4 && !dut.f4) || (dut.r5 && !dut.f5) ||
                                      (dut.r6 && !dut.f6))) stalls++;

  int phase = 1;

  task automatic run_phase(input bit structured);
    run = 0;
    for (int a = 0; a < 419; a++) begin
      @(negedge clk); p_we = 1; p_addr = 9'(a); p_data = 4'(prm[a]);
    end
    @(negedge clk); p_we = 0;
    for (int n = 0; n < NB; n++) begin
      int x [66], sc [3], c;
      int mag;
      if (structured) make_window(n % 3, 8 + 4*(n % 5), x);
      else begin
        mag = (n % 4 == 0) ? 500 : (n % 4 == 1) ? 150 : (n % 4 == 2) ? 40 : 10;
        for (int t = 0; t < 66; t++) x[t] = rnd_act(mag) + ((n % 3 == 0) ? mag/2 : 0);
        for (int t = 0; t < 66; t++) if (x[t] > 511) x[t] = 511;
      end
      cnn_ref(prm, x, sc, c);
      exp_cls.push_back(c);
      for (int k = 0; k < 3; k++) exp_sc.push_back(sc[k]);
      for (int t = 0; t < 66; t++) begin
        s_valid = 1; s_data = 10'(x[t]);
        @(negedge clk);
      end
    end
    s_valid = 0;
    @(negedge clk);
    run = 1;           // release the stored batches: the pipeline runs full
    t_batch_done = cyc;
    nres = 0; last_t = -1;
    while (nres < NB) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 419; a++) prm[a] = rnd_wgt();
    run_phase(1'b0);
    $display("cnn1d phase 1 (random parameters): first result %0d cycles after run, steady interval %0d cycles, classes %0d/%0d/%0d",
             first_lat, max_iv, cls_hist[0], cls_hist[1], cls_hist[2]);
    for (int k = 0; k < 3; k++) cls_hist[k] = 0;
    phase = 2;
    polarity_params(prm, 1'b1);
    run_phase(1'b1);
    $display("cnn1d phase 2 (structured parameters): first result %0d cycles after run, steady interval %0d cycles, classes %0d/%0d/%0d",
             first_lat, max_iv, cls_hist[0], cls_hist[1], cls_hist[2]);
    checks++;
    if (max_iv > MAX_INTERVAL) begin failures++; $display("FAIL: result interval %0d > %0d", max_iv, MAX_INTERVAL); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: no back-pressure exercised"); end
    checks++;
    if (cls_hist[0] == 0 || cls_hist[1] == 0 || cls_hist[2] == 0) begin failures++; $display("FAIL: not all classes seen in phase 2"); end
    $display("cnn1d: %0d stall cycles", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && res_valid) begin
    int c;
    c = exp_cls.pop_front();
    checks++;
    if (int'(res_cls) != c) begin failures++; $display("FAIL result %0d: class %0d expected %0d", nres, res_cls, c); end
    for (int k = 0; k < 3; k++) begin
      int e;
      e = exp_sc.pop_front();
      checks++;
      if (int'($signed(res_score[k])) != e) begin
        failures++; $display("FAIL result %0d score %0d: got %0d expected %0d", nres, k, int'($signed(res_score[k])), e);
      end
    end
    cls_hist[c]++;
    if (nres == 0) first_lat = cyc - t_batch_done;
    if (nres >= 4 && cyc - last_t > max_iv) max_iv = cyc - last_t;
    last_t = cyc;
    nres++;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (%0d results)", nres);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
