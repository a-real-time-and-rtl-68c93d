// tb_decimator: self-checking test of the down-sampler (factor 10).
//
// A stream of random samples with random gaps in in_valid is applied; the
// test checks that exactly the 1st, 11th, 21st, ... valid samples come out,
// in order, each one cycle after it was accepted.
module tb_decimator;
  import tb_ref_pkg::*;
  localparam int N = 1000, F = 10;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic signed [9:0] in_data = '0, out_data;

  decimator #(.FACTOR(F)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, nout = 0;
  int exp_q [$];

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      int v;
      while ($urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
      v = rnd_act(511);
      in_valid = 1; in_data = 10'(v);
      if (n % F == 0) exp_q.push_back(v);
      @(negedge clk);
      checks++;
      if (out_valid != (n % F == 0)) begin failures++; $display("FAIL sample %0d: out_valid %0d", n, out_valid); end
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (nout != N / F) begin failures++; $display("FAIL: %0d outputs, expected %0d", nout, N / F); end
    $display("decimator: %0d in, %0d out", N, nout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int e;
    e = exp_q.pop_front();
    nout++;
    checks++;
    if (int'(out_data) != e) begin failures++; $display("FAIL output %0d: got %0d expected %0d", nout, out_data, e); end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
