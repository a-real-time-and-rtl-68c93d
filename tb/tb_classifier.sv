// tb_classifier: self-checking test of the classifier (FC projection-out
// 2 -> 3, ReLU, arg-max).
//
// Random parameters are loaded; NB feature pairs are classified, including
// pairs that make two scores equal (the lower index must win). Scores and
// class are compared with an integer reference, and the result must come
// three cycles after the features were fetched.
module tb_classifier;
  import tb_ref_pkg::*;
  localparam int NB = 60, P_BASE = 410, LAT = 3;

  logic clk = 0, rst_n = 0;
  logic p_we = 0;
  logic [8:0] p_addr = '0;
  logic signed [3:0] p_data = '0;
  logic ready_in = 0, fetched, ready, fetch = 0;
  logic signed [1:0][9:0] in_arr = '0;
  logic signed [2:0][9:0] out_arr;
  logic [1:0] cls;

  classifier dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, ties = 0;
  int w [3][2], b [3];
  int cls_hist [3];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic load(input int addr, input int val);
    @(negedge clk); p_we = 1; p_addr = 9'(addr); p_data = 4'(val);
    @(negedge clk); p_we = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3; n++) for (int c = 0; c < 2; c++) begin w[n][c] = rnd_wgt(); load(P_BASE + 2*n + c, w[n][c]); end
    for (int n = 0; n < 3; n++) begin b[n] = rnd_wgt(); load(P_BASE + 6 + n, b[n]); end
    load(P_BASE - 1, 7);
    for (int v = 0; v < NB; v++) begin
      int f [2], y [3], best, t0;
      f[0] = rnd_act(400); f[1] = rnd_act(400);
      if (v % 10 == 9) begin f[0] = -500; f[1] = -500; end   // drives scores to zero: ties
      for (int n = 0; n < 3; n++) y[n] = relu(rq(64*b[n] + w[n][0]*f[0] + w[n][1]*f[1]));
      best = 0;
      for (int n = 1; n < 3; n++) if (y[n] > y[best]) best = n;
      if (y[0] == y[1] || y[1] == y[2] || y[0] == y[2]) ties++;
      in_arr[0] = 10'(f[0]); in_arr[1] = 10'(f[1]);
      @(negedge clk);
      ready_in = 1;
      #1;
      while (!fetched) begin @(negedge clk); #1; end
      t0 = cyc + 1;
      @(negedge clk);
      ready_in = 0;
      while (!ready) @(negedge clk);
      checks++;
      if (cyc - t0 != LAT) begin failures++; $display("FAIL: latency %0d", cyc - t0); end
      for (int n = 0; n < 3; n++) begin
        checks++;
        if (int'($signed(out_arr[n])) != y[n]) begin
          failures++; $display("FAIL v%0d score %0d: got %0d expected %0d", v, n, int'($signed(out_arr[n])), y[n]);
        end
      end
      checks++;
      if (int'(cls) != best) begin failures++; $display("FAIL v%0d class: got %0d expected %0d", v, cls, best); end
      cls_hist[best]++;
      fetch = 1;
      @(negedge clk);
      fetch = 0;
    end
    checks++;
    if (ties == 0) begin failures++; $display("FAIL: no tie exercised"); end
    $display("classifier: %0d vectors, %0d with ties, classes %0d/%0d/%0d", NB, ties, cls_hist[0], cls_hist[1], cls_hist[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
