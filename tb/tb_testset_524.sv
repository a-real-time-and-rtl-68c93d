// tb_testset_524: the 524-batch test-set workload on one CNN at full size.
//
// The signal memory of the default cnn1d holds 524 batches of 66 samples,
// exactly the evaluation set of the paper. This bench loads the jittered
// polarity-detector parameters of tb_ref_pkg, writes 524 synthetic windows
// (spike, noise or artefact, in turn) with run low, checks that the memory
// then refuses further samples, and raises run. All 524 class and score
// triples are compared with the integer reference, the intended label of
// each window is tallied against the class, and the whole set must finish
// within 524 x 42 cycles plus the pipeline latency.
module tb_testset_524;
  import tb_ref_pkg::*;
  localparam int NB = 524, MAX_INTERVAL = 42, MAX_LATENCY = 260;

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
  int label [$];
  int nres = 0, agree = 0, t_run = -1, t_last = -1;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    polarity_params(prm, 1'b1);
    for (int a = 0; a < 419; a++) begin
      @(negedge clk); p_we = 1; p_addr = 9'(a); p_data = 4'(prm[a]);
    end
    @(negedge clk); p_we = 0;
    for (int n = 0; n < NB; n++) begin
      int x [66], sc [3], c;
      make_window(n % 3, 4 + 4*(n % 7), x);
      cnn_ref(prm, x, sc, c);
      exp_cls.push_back(c);
      label.push_back(n % 3);
      for (int k = 0; k < 3; k++) exp_sc.push_back(sc[k]);
      for (int t = 0; t < 66; t++) begin
        s_valid = 1; s_data = 10'(x[t]);
        checks++;
        if (!s_ready) begin failures++; $display("FAIL: memory full at batch %0d sample %0d", n, t); end
        @(negedge clk);
      end
    end
    s_valid = 0;
    checks++;
    if (s_ready) begin failures++; $display("FAIL: memory with 524 batches still accepts samples"); end
    checks++;
    if (res_valid) begin failures++; $display("FAIL: result before run"); end
    run = 1;
    t_run = cyc;
    while (nres < NB) @(negedge clk);
    checks++;
    if (t_last - t_run > NB * MAX_INTERVAL + MAX_LATENCY) begin
      failures++; $display("FAIL: test set took %0d cycles", t_last - t_run);
    end
    $display("testset: %0d batches classified in %0d cycles (%0d per batch), %0d of %0d match the window label",
             nres, t_last - t_run, (t_last - t_run) / NB, agree, NB);
    checks++;
    if (agree < NB * 9 / 10) begin failures++; $display("FAIL: only %0d labels matched", agree); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && res_valid) begin
    int c, l;
    c = exp_cls.pop_front();
    l = label.pop_front();
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
    if (int'(res_cls) == l) agree++;
    t_last = cyc;
    nres++;
  end

  initial begin
    repeat (90000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (%0d results)", nres);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
